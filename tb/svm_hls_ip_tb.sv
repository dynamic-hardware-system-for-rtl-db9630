// svm_hls_ip_tb -- self-checking testbench for one classifier IP.
//
// Drives the IP the way the processor software does: the coefficients of a
// random stand-in model are written through the coefficient port, the
// features of a random instance are written to X over AXI-lite, ap_start is
// set, CTRL is polled until ap_done, and RETURN is read. The class is
// compared with a reference evaluation of sign(AC . x - b) in fp32 with the
// same summation order. The time from the core accepting ap_start to
// ap_done is measured on the IP's internal handshake and must be 148
// cycles, the pipelined latency the paper reports.
module svm_hls_ip_tb;
  import svm_pkg::*;
  import fp_ref_pkg::*;
  localparam int unsigned N  = F;
  localparam int unsigned AW = $clog2(N + 1);

  logic clk = 1'b0, rst_n = 1'b0;
  axil_req_t s_req;
  axil_rsp_t s_rsp;
  logic ac_we = 1'b0;
  logic [AW-1:0] ac_waddr = '0;
  logic [31:0] ac_wdata = '0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  svm_hls_ip dut (.clk, .rst_n, .req(s_req), .rsp(s_rsp), .ac_we, .ac_waddr, .ac_wdata);

  // precise latency of each run, from the IP's own handshake
  int cyc = 0, t_start = 0, last_lat = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (dut.ap_start && dut.ap_idle) t_start <= cyc;
    if (dut.ap_done) last_lat <= cyc - t_start;
  end

  // ---- AXI-lite master tasks ----
  task automatic axil_write(input logic [7:0] addr, input logic [31:0] data,
                            output axil_resp_e resp);
    s_req.awvalid <= 1'b1; s_req.awaddr <= addr;
    s_req.wvalid  <= 1'b1; s_req.wdata  <= data; s_req.wstrb <= 4'hF;
    do @(posedge clk); while (!s_rsp.awready);
    s_req.awvalid <= 1'b0; s_req.wvalid <= 1'b0; s_req.bready <= 1'b1;
    do @(posedge clk); while (!s_rsp.bvalid);
    resp = s_rsp.bresp;
    s_req.bready <= 1'b0;
  endtask

  task automatic axil_read(input logic [7:0] addr, output logic [31:0] data,
                           output axil_resp_e resp);
    s_req.arvalid <= 1'b1; s_req.araddr <= addr;
    do @(posedge clk); while (!s_rsp.arready);
    s_req.arvalid <= 1'b0; s_req.rready <= 1'b1;
    do @(posedge clk); while (!s_rsp.rvalid);
    data = s_rsp.rdata; resp = s_rsp.rresp;
    s_req.rready <= 1'b0;
  endtask

  task automatic chk(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  logic [31:0] ac [N + 1];
  logic [31:0] x [N];

  function automatic logic [31:0] ref_class();
    logic [31:0] acc = 32'd0;
    for (int i = 0; i < N; i++) acc = fadd(acc, fmul(ac[i], x[i]));
    acc = fsub(acc, ac[N]);
    return (!is_nan(acc) && (!acc[31] || acc[30:0] == 0)) ? CLASS_POS : CLASS_NEG;
  endfunction

  int n_pos = 0, n_neg = 0;

  initial begin
    axil_resp_e r;
    logic [31:0] d;
    s_req = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    for (int m = 0; m < 12; m++) begin
      // new model
      for (int i = 0; i < N; i++) ac[i] = rand_float(5);
      ac[0] = 32'd0;
      ac[N] = rand_float(4);
      for (int i = 0; i <= N; i++) begin
        @(negedge clk);
        ac_we = 1'b1; ac_waddr = AW'(i); ac_wdata = ac[i];
      end
      @(negedge clk) ac_we = 1'b0;
      for (int t = 0; t < 4; t++) begin
        for (int i = 0; i < N; i++) begin
          x[i] = {1'b0, rand_float(3)};
          axil_write(REG_X_BASE + 8'(4 * i), x[i], r);
        end
        axil_write(REG_CTRL, 32'h1, r);
        do axil_read(REG_CTRL, d, r); while (!d[CTRL_DONE]);
        axil_read(REG_RETURN, d, r);
        chk("class", d, ref_class());
        if (d == CLASS_POS) n_pos++; else n_neg++;
        chk("latency", last_lat, 148);
        axil_read(REG_CTRL, d, r);
        chk("idle, done cleared", d, 32'h4);
      end
    end
    checks++;
    if (n_pos == 0 || n_neg == 0) begin
      failures++;
      $display("FAIL: both classes not seen");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// svm_axil_ctrl_tb -- self-checking testbench for the classifier's AXI-lite
// control bus.
//
// The testbench acts both as the processor (AXI-lite master) and as the
// decision core (it drives ap_idle, ap_done and ap_return). It checks:
//   * X[i] write and read-back, including partial writes with byte strobes,
//     and the core's X read port (one cycle of latency);
//   * ap_start: set by a write, visible in CTRL, cleared in the cycle the
//     core accepts it (ap_start with ap_idle);
//   * ap_done and ap_ready: sticky after the core's done pulse and cleared
//     by reading CTRL; ap_idle follows the core;
//   * RETURN latches the core's value at done;
//   * unmapped addresses read as zero and all responses are OKAY.
module svm_axil_ctrl_tb;
  import svm_pkg::*;
  localparam int unsigned N   = F;
  localparam int unsigned XAW = $clog2(N + 1);

  logic clk = 1'b0, rst_n = 1'b0;
  axil_req_t s_req;
  axil_rsp_t s_rsp;
  logic ap_start, ap_idle = 1'b1, ap_done = 1'b0;
  logic [31:0] ap_return = '0, x_rdata;
  logic [XAW-1:0] x_addr = '0;
  logic [31:0] xmodel [N];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  svm_axil_ctrl dut (.clk, .rst_n, .req(s_req), .rsp(s_rsp), .ap_start,
                     .ap_idle, .ap_done, .ap_return, .x_addr, .x_rdata);

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

  initial begin
    axil_resp_e r;
    logic [31:0] d;
    s_req = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    // X array
    for (int i = 0; i < N; i++) begin
      xmodel[i] = $urandom;
      axil_write(REG_X_BASE + 8'(4 * i), xmodel[i], r);
      chk("x write resp", 32'(r), 32'(RESP_OKAY));
    end
    // byte-strobe write to X[3]: only byte 1 changes
    s_req.wstrb <= 4'b0010;
    s_req.awvalid <= 1'b1; s_req.awaddr <= REG_X_BASE + 8'd12;
    s_req.wvalid <= 1'b1; s_req.wdata <= 32'hCAFE_BABE;
    do @(posedge clk); while (!s_rsp.awready);
    s_req.awvalid <= 1'b0; s_req.wvalid <= 1'b0; s_req.bready <= 1'b1;
    do @(posedge clk); while (!s_rsp.bvalid);
    s_req.bready <= 1'b0;
    xmodel[3][15:8] = 8'hBA;
    for (int i = 0; i < N; i++) begin
      axil_read(REG_X_BASE + 8'(4 * i), d, r);
      chk("x readback", d, xmodel[i]);
      chk("x read resp", 32'(r), 32'(RESP_OKAY));
    end
    // core read port
    for (int i = 0; i < N; i++) begin
      x_addr <= XAW'(i);
      @(posedge clk);
      #1 chk("x core port", x_rdata, xmodel[i]);
    end
    // control: idle, not started
    axil_read(REG_CTRL, d, r);
    chk("ctrl idle", d, 32'h4);
    // start with the core busy: start stays set until the core is idle
    ap_idle <= 1'b0;
    axil_write(REG_CTRL, 32'h1, r);
    repeat (3) @(posedge clk);
    chk("start pending", 32'(ap_start), 1);
    axil_read(REG_CTRL, d, r);
    chk("ctrl start, busy", d, 32'h1);
    ap_idle <= 1'b1;
    @(posedge clk);                 // accepted at this edge
    ap_idle <= 1'b0;
    #1 chk("start cleared", 32'(ap_start), 0);
    repeat (5) @(posedge clk);
    // done pulse with return -1
    ap_done <= 1'b1; ap_return <= CLASS_NEG;
    @(posedge clk);
    ap_done <= 1'b0; ap_idle <= 1'b1; ap_return <= 32'h1234_5678;
    @(posedge clk);
    axil_read(REG_CTRL, d, r);
    chk("ctrl done", d, 32'hE);
    axil_read(REG_CTRL, d, r);
    chk("done cleared on read", d, 32'h4);
    axil_read(REG_RETURN, d, r);
    chk("return -1", d, CLASS_NEG);
    // a second run returning +1
    axil_write(REG_CTRL, 32'h1, r);
    @(posedge clk);
    ap_done <= 1'b1; ap_return <= CLASS_POS;
    @(posedge clk);
    ap_done <= 1'b0;
    axil_read(REG_RETURN, d, r);
    chk("return +1", d, CLASS_POS);
    axil_read(REG_CTRL, d, r);
    chk("ctrl done 2", d, 32'hE);
    // unmapped
    axil_read(8'h40, d, r);
    chk("unmapped", d, 0);
    chk("unmapped resp", 32'(r), 32'(RESP_OKAY));
    axil_read(REG_X_BASE + 8'(4 * N), d, r);
    chk("past X", d, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

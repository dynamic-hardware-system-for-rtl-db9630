// svm_dpr_top_tb -- end-to-end test of the dynamic two-stage cascade.
//
// The testbench plays the processor system: it owns two stand-in trained
// models (random coefficients; RM-M plays the melanoma-sensitive stage,
// RM-N the benign-sensitive one), keeps their configuration images, and runs
// the cascade application on random feature vectors:
//   load RM-M if it is not in the partition; write X; start; poll; read.
//   +1 -> melanoma, decided by stage 1.
//   -1 -> load RM-N, write X again, start, poll, read: the final class.
// Every final class is compared with a reference cascade evaluated with
// correctly rounded fp32 arithmetic in the same order as the hardware.
//
// Timing checks: each classification must take 148 core cycles (about 1.5 us
// at 100 MHz); a cascade decided in stage 1 costs 148 core cycles and one
// that needs stage 2 costs 296 (about 3 us), the figures the paper gives.
//
// Mechanisms that must each occur at least once (a failure is counted for
// any that never does): decision in stage 1, decision in stage 2 with each
// outcome, reconfiguration RM-M -> RM-N and RM-N -> RM-M, an access refused
// with SLVERR while the partition is empty or being reconfigured, and a
// malformed configuration image that is rejected.
//
// The design runs with its default parameters (27 features, 28-element
// arrays), so this is also the full-size test.
module svm_dpr_top_tb;
  import svm_pkg::*;
  import fp_ref_pkg::*;
  localparam int unsigned N = F;
  localparam int unsigned N_INST = 40;

  logic clk = 1'b0, rst_n = 1'b0;
  axil_req_t s_req;
  axil_rsp_t s_rsp;
  logic cfg_valid = 1'b0, cfg_ready;
  logic [31:0] cfg_data = '0;
  logic rm_loaded, reconfiguring, cfg_error;
  logic [7:0] rm_id;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  svm_dpr_top dut (
    .clk, .rst_n,
    .s_axil_req(s_req), .s_axil_rsp(s_rsp),
    .cfg_valid, .cfg_data, .cfg_ready,
    .rm_loaded, .rm_id, .reconfiguring, .cfg_error
  );

  // core cycles of each classification, from the IP's internal handshake
  int cyc = 0, t_start = 0, last_lat = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (dut.u_rp.ap_start && dut.u_rp.ap_idle) t_start <= cyc;
    if (dut.u_rp.ap_done) last_lat <= cyc - t_start;
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

  // ---- stand-in models and their configuration images ----
  localparam logic [7:0] ID_M = 8'h4D, ID_N = 8'h4E;
  logic [31:0] ac_m [N + 1], ac_n [N + 1];
  logic [31:0] x [N];

  function automatic logic [31:0] ref_class(ref logic [31:0] ac [N + 1]);
    logic [31:0] acc = 32'd0;
    for (int i = 0; i < N; i++) acc = fadd(acc, fmul(ac[i], x[i]));
    acc = fsub(acc, ac[N]);
    return (!is_nan(acc) && (!acc[31] || acc[30:0] == 0)) ? CLASS_POS : CLASS_NEG;
  endfunction

  task automatic cfg_word(logic [31:0] w);
    @(negedge clk);
    cfg_valid = 1'b1; cfg_data = w;
    @(negedge clk);
    cfg_valid = 1'b0;
  endtask

  int n_reconf_mn = 0, n_reconf_nm = 0, n_refused = 0, n_bad_image = 0;
  int n_stage1 = 0, n_stage2_pos = 0, n_stage2_neg = 0;

  // load one module; optionally touch the bus in the middle of it
  task automatic load_rm(logic [7:0] id, ref logic [31:0] ac [N + 1], input bit poke);
    axil_resp_e r;
    logic [31:0] d;
    logic [7:0] prev;
    prev = rm_loaded ? rm_id : 8'h00;
    cfg_word({CFG_MARKER, id, 8'(N + 1)});
    @(negedge clk);
    chk("reconfiguring", 32'(reconfiguring), 1);
    for (int i = 0; i <= N; i++) begin
      cfg_word(ac[i]);
      if (poke && i == N / 2) begin
        axil_read(REG_RETURN, d, r);
        chk("refused during reconfiguration", 32'(r), 32'(RESP_SLVERR));
        if (r == RESP_SLVERR) n_refused++;
      end
    end
    repeat (2) @(negedge clk);
    chk("loaded", 32'(rm_loaded), 1);
    chk("rm_id", 32'(rm_id), 32'(id));
    if (prev == ID_M && id == ID_N) n_reconf_mn++;
    if (prev == ID_N && id == ID_M) n_reconf_nm++;
  endtask

  task automatic classify(output logic [31:0] cls);
    axil_resp_e r;
    logic [31:0] d;
    for (int i = 0; i < N; i++) begin
      axil_write(REG_X_BASE + 8'(4 * i), x[i], r);
      chk("x write", 32'(r), 32'(RESP_OKAY));
    end
    axil_write(REG_CTRL, 32'h1, r);
    do axil_read(REG_CTRL, d, r); while (!d[CTRL_DONE]);
    axil_read(REG_RETURN, cls, r);
    chk("return resp", 32'(r), 32'(RESP_OKAY));
    chk("stage latency 148", last_lat, 148);
  endtask

  initial begin
    axil_resp_e r;
    logic [31:0] d, c1, c2, exp_c;
    int core_cycles;
    s_req = '0;
    for (int i = 0; i < N; i++) begin
      ac_m[i] = rand_float(5);
      ac_n[i] = rand_float(5);
    end
    ac_m[0] = 32'd0;
    ac_n[0] = 32'd0;
    ac_m[N] = rand_float(3);
    ac_n[N] = rand_float(3);
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    repeat (2) @(posedge clk);

    // the partition is empty after reset: the bus is refused
    chk("empty after reset", 32'(rm_loaded), 0);
    axil_write(REG_CTRL, 32'h1, r);
    chk("refused while empty", 32'(r), 32'(RESP_SLVERR));
    if (r == RESP_SLVERR) n_refused++;

    // a malformed image is rejected
    cfg_word({16'hFFFF, ID_M, 8'(N + 1)});
    @(negedge clk);
    chk("bad image flagged", 32'(cfg_error), 1);
    chk("bad image not loaded", 32'(rm_loaded), 0);
    if (cfg_error) n_bad_image++;

    // initial configuration: stage 1 module
    load_rm(ID_M, ac_m, 1'b1);

    for (int t = 0; t < N_INST; t++) begin
      for (int i = 0; i < N; i++) x[i] = {1'b0, rand_float(3)};
      exp_c = (ref_class(ac_m) == CLASS_POS) ? CLASS_POS : ref_class(ac_n);
      core_cycles = 0;
      if (rm_id != ID_M) load_rm(ID_M, ac_m, t % 5 == 1);
      classify(c1);
      core_cycles += last_lat;
      chk("stage 1 class", c1, ref_class(ac_m));
      if (c1 == CLASS_POS) begin
        n_stage1++;
        chk("cascade class", c1, exp_c);
        chk("one-stage time 148", core_cycles, 148);
      end else begin
        load_rm(ID_N, ac_n, t % 5 == 2);
        // the new module starts from reset: idle, nothing done
        axil_read(REG_CTRL, d, r);
        chk("fresh module idle", d, 32'h4);
        classify(c2);
        core_cycles += last_lat;
        chk("cascade class", c2, exp_c);
        chk("two-stage time 296", core_cycles, 296);
        if (c2 == CLASS_POS) n_stage2_pos++; else n_stage2_neg++;
      end
    end

    $display("stage1=%0d stage2_pos=%0d stage2_neg=%0d reconf M->N=%0d N->M=%0d refused=%0d bad_image=%0d",
             n_stage1, n_stage2_pos, n_stage2_neg, n_reconf_mn, n_reconf_nm, n_refused, n_bad_image);
    checks += 7;
    if (n_stage1 == 0)     begin failures++; $display("FAIL: no stage-1 decision"); end
    if (n_stage2_pos == 0) begin failures++; $display("FAIL: no stage-2 +1"); end
    if (n_stage2_neg == 0) begin failures++; $display("FAIL: no stage-2 -1"); end
    if (n_reconf_mn == 0)  begin failures++; $display("FAIL: no RM-M -> RM-N swap"); end
    if (n_reconf_nm == 0)  begin failures++; $display("FAIL: no RM-N -> RM-M swap"); end
    if (n_refused == 0)    begin failures++; $display("FAIL: no refused access"); end
    if (n_bad_image == 0)  begin failures++; $display("FAIL: no rejected image"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

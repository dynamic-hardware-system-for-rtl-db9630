// svm_table1_models_tb -- the two trained-model sizes of the published
// cascade, run through the whole design.
//
// The published models have 27 features; the melanoma-sensitive model M has
// 61 support vectors and the benign-sensitive model N has 139. Their trained
// values are not available, so this testbench draws stand-in support vectors
// (27 features in [0,1), weights alpha_i*y_i of random sign) of exactly those
// counts, folds each model offline into its coefficient array
// AC = sum_i alpha_i*y_i*x_i (in fp32, support vector by support vector),
// and sets b so that both classes occur. The two images are then loaded
// into the partition in turn and the cascade is run on random instances.
//
// Checks:
//   * the final class equals a correctly rounded fp32 evaluation of the
//     folded decision function, for every instance;
//   * the class also agrees with the unfolded decision function
//     sum_i alpha_i*y_i*(x_i . x) - b evaluated in double precision whenever
//     that distance is not within rounding noise of zero;
//   * each classification takes 148 core cycles for both models, i.e. the
//     time does not depend on the number of support vectors.
module svm_table1_models_tb;
  import svm_pkg::*;
  import fp_ref_pkg::*;
  localparam int unsigned N = F;
  localparam int unsigned N_INST = 30;
  localparam int unsigned SV_M = 61, SV_N = 139;

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


  function automatic logic [31:0] ref_dot(ref logic [31:0] ac [N + 1]);
    logic [31:0] acc = 32'd0;
    for (int i = 0; i < N; i++) acc = fadd(acc, fmul(ac[i], x[i]));
    return acc;
  endfunction

  // support vectors (features 1..27; index 0 unused) and weights alpha*y
  real sv_m [SV_M][N], sv_n [SV_N][N];
  real w_m [SV_M], w_n [SV_N];
  real b_m, b_n;


  task automatic load_rm(logic [7:0] id, ref logic [31:0] ac [N + 1]);
    cfg_word({CFG_MARKER, id, 8'(N + 1)});
    for (int i = 0; i <= N; i++) cfg_word(ac[i]);
    repeat (2) @(negedge clk);
    chk("loaded", 32'(rm_loaded), 1);
    chk("rm_id", 32'(rm_id), 32'(id));
  endtask

  task automatic classify(output logic [31:0] cls);
    axil_resp_e r;
    logic [31:0] d;
    for (int i = 0; i < N; i++) axil_write(REG_X_BASE + 8'(4 * i), x[i], r);
    axil_write(REG_CTRL, 32'h1, r);
    do axil_read(REG_CTRL, d, r); while (!d[CTRL_DONE]);
    axil_read(REG_RETURN, cls, r);
    chk("latency 148", last_lat, 148);
  endtask

  function automatic real unfolded_m();
    real s = 0.0;
    for (int i = 0; i < SV_M; i++) begin
      real dp = 0.0;
      for (int j = 1; j < N; j++) dp += sv_m[i][j] * f2r(x[j]);
      s += w_m[i] * dp;
    end
    return s - b_m;
  endfunction
  function automatic real unfolded_n();
    real s = 0.0;
    for (int i = 0; i < SV_N; i++) begin
      real dp = 0.0;
      for (int j = 1; j < N; j++) dp += sv_n[i][j] * f2r(x[j]);
      s += w_n[i] * dp;
    end
    return s - b_n;
  endfunction

  function automatic logic [31:0] rnd01();
    return r2f(real'($urandom_range(0, 1 << 20)) / real'(1 << 20));
  endfunction

  int agree = 0, near_zero = 0, n_pos = 0, n_neg = 0;

  initial begin
    logic [31:0] c1, c2, exp_c;
    real du, dm, dn;
    s_req = '0;
    // ---- draw the support vectors and fold them (equation AC = sum w_i x_i)
    for (int j = 0; j < N; j++) begin ac_m[j] = 32'd0; ac_n[j] = 32'd0; end
    for (int i = 0; i < SV_M; i++) begin
      logic [31:0] wf;
      wf = r2f((real'($urandom_range(0, 2000)) / 1000.0 - 1.0));
      w_m[i] = f2r(wf);
      sv_m[i][0] = 0.0;
      for (int j = 1; j < N; j++) begin
        logic [31:0] v;
        v = rnd01();
        sv_m[i][j] = f2r(v);
        ac_m[j] = fadd(ac_m[j], fmul(wf, v));
      end
    end
    for (int i = 0; i < SV_N; i++) begin
      logic [31:0] wf;
      wf = r2f((real'($urandom_range(0, 2000)) / 1000.0 - 1.0));
      w_n[i] = f2r(wf);
      sv_n[i][0] = 0.0;
      for (int j = 1; j < N; j++) begin
        logic [31:0] v;
        v = rnd01();
        sv_n[i][j] = f2r(v);
        ac_n[j] = fadd(ac_n[j], fmul(wf, v));
      end
    end
    // bias: the folded dot product of a mid-range instance, so both classes occur
    for (int j = 0; j < N; j++) x[j] = (j == 0) ? 32'd0 : 32'h3F00_0000;
    ac_m[N] = 32'd0; ac_n[N] = 32'd0;
    ac_m[N] = ref_dot(ac_m);
    ac_n[N] = ref_dot(ac_n);
    b_m = f2r(ac_m[N]);
    b_n = f2r(ac_n[N]);

    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    repeat (2) @(posedge clk);
    load_rm(8'h4D, ac_m);

    for (int t = 0; t < N_INST; t++) begin
      x[0] = 32'd0;
      for (int j = 1; j < N; j++) x[j] = rnd01();
      exp_c = (ref_class(ac_m) == CLASS_POS) ? CLASS_POS : ref_class(ac_n);
      if (rm_id != 8'h4D) load_rm(8'h4D, ac_m);
      classify(c1);
      chk("stage 1 class", c1, ref_class(ac_m));
      dm = unfolded_m();
      du = dm;
      if (c1 != CLASS_POS) begin
        load_rm(8'h4E, ac_n);
        classify(c2);
        dn = unfolded_n();
        du = dn;
        chk("cascade class", c2, exp_c);
      end else begin
        c2 = c1;
        chk("cascade class", c1, exp_c);
      end
      if (c2 == CLASS_POS) n_pos++; else n_neg++;
      // agreement with the unfolded double-precision decision function
      if (du > 1.0e-3 || du < -1.0e-3) begin
        checks++;
        if ((du >= 0.0) != (c2 == CLASS_POS)) begin
          failures++;
          $display("FAIL: unfolded distance %f disagrees with class %h", du, c2);
        end else agree++;
      end else near_zero++;
    end
    $display("instances=%0d positive=%0d negative=%0d agree_unfolded=%0d near_zero=%0d",
             N_INST, n_pos, n_neg, agree, near_zero);
    checks++;
    if (n_pos == 0 || n_neg == 0) begin
      failures++;
      $display("FAIL: both classes not seen");
    end
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

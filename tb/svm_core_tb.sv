// svm_core_tb -- self-checking testbench for the SVM decision core.
//
// The testbench plays the input-array and coefficient memories itself (one
// cycle of read latency, like the RAMs in the IP). For many random linear
// models and instances it runs one classification and compares
//   * the distance bit-exactly with a reference loop that multiplies and
//     accumulates in the same order with correctly rounded fp32 operations,
//   * the returned class (+1 when distance >= 0, -1 otherwise),
//   * the latency: done must come exactly 148 cycles after start for the
//     28-element array, the pipelined latency the paper reports.
// Special cases: a bias equal to the dot product (distance exactly zero,
// class +1), a NaN coefficient (class -1), and start held high so that
// runs follow back to back.
module svm_core_tb;
  import svm_pkg::*;
  import fp_ref_pkg::*;

  localparam int unsigned N  = F;
  localparam int unsigned AW = $clog2(N + 1);

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic idle, done;
  logic [31:0] class_out, distance;
  logic [AW-1:0] x_addr, ac_addr;
  logic [31:0] x_rdata, ac_rdata;
  int checks = 0, failures = 0;

  logic [31:0] xm [N];
  logic [31:0] acm [N + 1];

  always #5 clk = ~clk;

  always_ff @(posedge clk) begin
    x_rdata  <= xm[x_addr];
    ac_rdata <= acm[ac_addr];
  end

  svm_core dut (.clk, .rst_n, .start, .idle, .done, .class_out, .distance,
                .x_addr, .x_rdata, .ac_addr, .ac_rdata);

  function automatic logic [31:0] ref_dot();
    logic [31:0] acc = 32'd0;
    for (int i = 0; i < N; i++) acc = fadd(acc, fmul(acm[i], xm[i]));
    return acc;
  endfunction

  task automatic check(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  // run one classification; start stays high when keep is set
  task automatic run_one(input bit keep, output int lat);
    int c = 0;
    start <= 1'b1;
    do @(posedge clk); while (!idle);   // accepted at this edge
    if (!keep) start <= 1'b0;
    forever begin
      @(posedge clk);
      c++;
      if (done) break;
    end
    lat = c;
  endtask

  task automatic classify_and_check(input bit keep);
    logic [31:0] d_exp, c_exp;
    int lat;
    d_exp = fsub(ref_dot(), acm[N]);
    c_exp = (!is_nan(d_exp) && (!d_exp[31] || d_exp[30:0] == 0)) ? CLASS_POS : CLASS_NEG;
    run_one(keep, lat);
    check("distance", distance, d_exp);
    check("class", class_out, c_exp);
    checks++;
    if (lat != 148 || lat != int'(core_latency(N, MUL_LAT, ADD_LAT))) begin
      failures++;
      $display("FAIL latency %0d cycles, expected 148", lat);
    end
  endtask

  int n_pos = 0, n_neg = 0;

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    repeat (2) @(posedge clk);
    checks++;
    if (!idle) begin failures++; $display("FAIL: not idle after reset"); end

    for (int t = 0; t < 60; t++) begin
      for (int i = 0; i < N; i++) begin
        acm[i] = rand_float(6);
        xm[i]  = {1'b0, rand_float(3)};      // scaled, non-negative features
      end
      acm[0] = 32'd0;                          // padding element, as in SVM-Light indexing
      xm[0]  = rand_float(2);
      acm[N] = rand_float(6);
      if (t % 10 == 3) acm[N] = ref_dot();     // distance exactly zero
      classify_and_check(t % 7 == 5);
      if (class_out == CLASS_POS) n_pos++; else n_neg++;
      repeat ($urandom_range(0, 3)) @(posedge clk);
    end
    // a NaN coefficient: comparison fails, class -1
    acm[5] = 32'h7FC0_0000;
    classify_and_check(1'b0);
    check("nan class", class_out, CLASS_NEG);
    // outputs hold after done
    repeat (5) @(posedge clk);
    check("hold class", class_out, CLASS_NEG);
    checks++;
    if (n_pos == 0 || n_neg == 0) begin
      failures++;
      $display("FAIL: both classes not seen (%0d/%0d)", n_pos, n_neg);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// fp32_mul_tb -- self-checking testbench for the single-precision multiplier.
//
// Streams one operation per cycle (random normal operands over a wide
// exponent range, plus zeros, infinities, NaNs, overflow and underflow
// cases) and compares every result bit-exactly with the double-precision
// reference of fp_ref_pkg. Also checks that each result appears exactly
// two cycles after its operands.
module fp32_mul_tb;
  import fp_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0;
  logic [31:0] a = '0, b = '0;
  logic out_valid;
  logic [31:0] y;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  fp32_mul dut (.clk, .rst_n, .in_valid, .a, .b, .out_valid, .y);

  localparam int N = 4000;
  logic [31:0] ea [$];
  int cyc = 0, issue_cyc [$];
  always @(posedge clk) cyc <= cyc + 1;

  // scoreboard
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      logic [31:0] exp_y;
      int ic;
      checks++;
      if (ea.size() == 0) begin
        failures++;
        $display("FAIL: unexpected output %h", y);
      end else begin
        exp_y = ea.pop_front();
        ic = issue_cyc.pop_front();
        if (y !== exp_y) begin
          failures++;
          if (failures < 10) $display("FAIL: got %h expected %h", y, exp_y);
        end
        checks++;
        if (cyc - ic != 2 + 1) begin  // +1: sampled one edge after it appears
          failures++;
          $display("FAIL: latency %0d", cyc - ic);
        end
      end
    end
  end

  function automatic logic [31:0] pick(int k);
    case ($urandom_range(0, 19))
      0: return {1'($urandom), 31'd0};                       // zero
      1: return {1'($urandom), 8'hFF, 23'd0};                // inf
      2: return 32'h7FC0_0000;                                // NaN
      3: return {1'($urandom), 8'($urandom_range(1, 40)), 23'($urandom)};   // tiny
      4: return {1'($urandom), 8'($urandom_range(215, 254)), 23'($urandom)};// huge
      default: return rand_float(60);
    endcase
  endfunction

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int k = 0; k < N; k++) begin
      logic [31:0] ta, tb;
      ta = pick(k);
      tb = pick(k);
      a <= ta; b <= tb; in_valid <= 1'b1;
      ea.push_back(fmul(ta, tb));
      issue_cyc.push_back(cyc);
      @(posedge clk);
      if ($urandom_range(0, 7) == 0) begin
        in_valid <= 1'b0;
        @(posedge clk);
      end
    end
    in_valid <= 1'b0;
    repeat (6) @(posedge clk);
    checks++;
    if (ea.size() != 0) begin
      failures++;
      $display("FAIL: %0d results missing", ea.size());
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

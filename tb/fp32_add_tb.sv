// fp32_add_tb -- self-checking testbench for the single-precision
// adder/subtractor.
//
// Streams one operation per cycle: random operands with wide and narrow
// exponent spreads (so that both large alignment shifts and heavy
// cancellation occur), exact cancellation x - x, signed zeros, infinities,
// NaNs and overflow. Every result is compared bit-exactly with the
// double-precision reference of fp_ref_pkg, and each must appear exactly
// five cycles after its operands.
module fp32_add_tb;
  import fp_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0, sub = 1'b0;
  logic [31:0] a = '0, b = '0;
  logic out_valid;
  logic [31:0] y;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  fp32_add dut (.clk, .rst_n, .in_valid, .a, .b, .sub, .out_valid, .y);

  localparam int N = 6000;
  logic [31:0] ea [$];
  int cyc = 0, issue_cyc [$];
  always @(posedge clk) cyc <= cyc + 1;

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
        if (cyc - ic != 5 + 1) begin  // +1: sampled one edge after it appears
          failures++;
          $display("FAIL: latency %0d", cyc - ic);
        end
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int k = 0; k < N; k++) begin
      logic [31:0] ta, tb;
      logic ts;
      ts = 1'($urandom);
      case ($urandom_range(0, 15))
        0: begin ta = rand_float(20); tb = ts ? ta : {~ta[31], ta[30:0]}; end // exact cancel
        1: begin ta = {1'($urandom), 31'd0}; tb = {1'($urandom), 31'd0}; end  // zeros
        2: begin ta = rand_float(20); tb = {1'($urandom), 31'd0}; end
        3: begin ta = {1'($urandom), 8'hFF, 23'd0}; tb = {1'($urandom), 8'hFF, 23'd0}; end
        4: begin ta = 32'h7FC0_0000; tb = rand_float(20); end
        5: begin ta = {1'($urandom), 8'hFE, 23'($urandom)}; tb = {ta[31] ^ ts, 8'hFE, 23'($urandom)}; end
        6, 7: begin   // close magnitudes: cancellation
          ta = rand_float(10);
          tb = {1'($urandom), ta[30:23], 23'($urandom)};
        end
        8, 9: begin   // nearly equal
          ta = rand_float(10);
          tb = ta + 32'($urandom_range(0, 3));
          tb[31] = ~tb[31];
        end
        10: begin ta = rand_float(40); tb = rand_float(40); end
        default: begin ta = rand_float(15); tb = rand_float(15); end
      endcase
      a <= ta; b <= tb; sub <= ts; in_valid <= 1'b1;
      ea.push_back(ts ? fsub(ta, tb) : fadd(ta, tb));
      issue_cyc.push_back(cyc);
      @(posedge clk);
      if ($urandom_range(0, 7) == 0) begin
        in_valid <= 1'b0;
        @(posedge clk);
      end
    end
    in_valid <= 1'b0;
    repeat (10) @(posedge clk);
    checks++;
    if (ea.size() != 0) begin
      failures++;
      $display("FAIL: %0d results missing", ea.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

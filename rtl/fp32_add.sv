// fp32_add -- pipelined IEEE-754 single-precision adder / subtractor.
//
// Performs the accumulation Distance += AC[i]*X[i] and the final
// Distance -= b of the SVM decision function. The paper states only that all
// data are single-precision floats; the five-stage structure is this
// design's own:
//   1  unpack, order the operands by magnitude, exponent difference
//   2  align the smaller significand (guard, round and sticky bits kept)
//   3  add or subtract the significands
//   4  normalise (carry right shift or leading-zero left shift)
//   5  round to nearest-even, pack
// Subnormal inputs are read as zero and tiny results flush to zero, overflow
// gives infinity, inf-inf and NaN inputs give the quiet NaN 0x7FC00000.
// An exact zero sum is +0 unless both operands are -0.
//
// Interface: fully pipelined, one operation per cycle; y = a + b when sub is
// 0 and a - b when sub is 1; out_valid/y appear ADD_LAT = 5 cycles after
// in_valid.
module fp32_add (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  logic [31:0] a,
  input  logic [31:0] b,
  input  logic        sub,
  output logic        out_valid,
  output logic [31:0] y
);

  localparam int unsigned STAGES = 5;

  logic [STAGES-1:0] vld;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vld <= '0;
    else        vld <= {vld[STAGES-2:0], in_valid};
  end
  assign out_valid = vld[STAGES-1];

  // ---------------- stage 1: unpack and order -------------------------------
  logic        s1_sl, s1_ss, s1_nan, s1_inf, s1_inf_sign;
  logic [7:0]  s1_el;
  logic [23:0] s1_ml, s1_ms;
  logic [7:0]  s1_diff;

  always_ff @(posedge clk) begin
    logic        sa, sb, za, zb, ia, ib, na, nb;
    logic [23:0] ma, mb;
    sa = a[31];
    sb = b[31] ^ sub;
    za = (a[30:23] == 8'd0);
    zb = (b[30:23] == 8'd0);
    ia = (a[30:23] == 8'hFF) && (a[22:0] == '0);
    ib = (b[30:23] == 8'hFF) && (b[22:0] == '0);
    na = (a[30:23] == 8'hFF) && (a[22:0] != '0);
    nb = (b[30:23] == 8'hFF) && (b[22:0] != '0);
    ma = za ? 24'd0 : {1'b1, a[22:0]};
    mb = zb ? 24'd0 : {1'b1, b[22:0]};

    s1_nan      <= na | nb | (ia & ib & (sa != sb));
    s1_inf      <= ia | ib;
    s1_inf_sign <= ia ? sa : sb;
    if (a[30:0] >= b[30:0]) begin
      s1_sl   <= sa;  s1_ss <= sb;
      s1_el   <= a[30:23];
      s1_ml   <= ma;  s1_ms <= mb;
      s1_diff <= a[30:23] - (zb ? a[30:23] : b[30:23]);
    end else begin
      s1_sl   <= sb;  s1_ss <= sa;
      s1_el   <= b[30:23];
      s1_ml   <= mb;  s1_ms <= ma;
      s1_diff <= b[30:23] - (za ? b[30:23] : a[30:23]);
    end
  end

  // ---------------- stage 2: align ------------------------------------------
  logic        s2_sl, s2_eff_sub, s2_nan, s2_inf, s2_inf_sign;
  logic [7:0]  s2_el;
  logic [26:0] s2_ml, s2_ms;   // {significand, guard, round, sticky}

  always_ff @(posedge clk) begin
    logic [50:0] wide;
    logic [26:0] shifted;
    wide = {s1_ms, 27'd0} >> ((s1_diff > 8'd27) ? 8'd27 : s1_diff);
    shifted = {wide[50:25], |wide[24:0]};
    s2_sl       <= s1_sl;
    s2_eff_sub  <= s1_sl ^ s1_ss;
    s2_nan      <= s1_nan;
    s2_inf      <= s1_inf;
    s2_inf_sign <= s1_inf_sign;
    s2_el       <= s1_el;
    s2_ml       <= {s1_ml, 3'b000};
    s2_ms       <= (s1_diff > 8'd27) ? {26'd0, |s1_ms} : shifted;
  end

  // ---------------- stage 3: add / subtract ---------------------------------
  logic        s3_sign, s3_eff_sub, s3_nan, s3_inf, s3_inf_sign;
  logic [7:0]  s3_el;
  logic [27:0] s3_sum;

  always_ff @(posedge clk) begin
    s3_sum      <= s2_eff_sub ? ({1'b0, s2_ml} - {1'b0, s2_ms})
                              : ({1'b0, s2_ml} + {1'b0, s2_ms});
    s3_sign     <= s2_sl;
    s3_eff_sub  <= s2_eff_sub;
    s3_nan      <= s2_nan;
    s3_inf      <= s2_inf;
    s3_inf_sign <= s2_inf_sign;
    s3_el       <= s2_el;
  end

  // ---------------- stage 4: normalise --------------------------------------
  logic        s4_sign, s4_zero, s4_nan, s4_inf, s4_inf_sign;
  logic signed [9:0] s4_exp;
  logic [26:0] s4_norm;

  function automatic logic [4:0] lzc27(input logic [26:0] v);
    lzc27 = 5'd27;
    for (int i = 0; i < 27; i++) begin
      if (v[i]) lzc27 = 5'(26 - i);
    end
  endfunction

  always_ff @(posedge clk) begin
    logic [4:0] lz;
    lz = lzc27(s3_sum[26:0]);
    s4_nan      <= s3_nan;
    s4_inf      <= s3_inf;
    s4_inf_sign <= s3_inf_sign;
    s4_zero     <= (s3_sum == '0);
    // exact zero: +0 for x - x, keeps the sign when both operands are zeros
    // of the same sign
    s4_sign     <= (s3_sum == '0) ? (s3_sign & ~s3_eff_sub) : s3_sign;
    if (s3_sum[27]) begin
      s4_norm <= {s3_sum[27:2], s3_sum[1] | s3_sum[0]};
      s4_exp  <= $signed({2'b00, s3_el}) + 10'sd1;
    end else begin
      s4_norm <= s3_sum[26:0] << lz;
      s4_exp  <= $signed({2'b00, s3_el}) - $signed({5'd0, lz});
    end
  end

  // ---------------- stage 5: round, pack ------------------------------------
  always_ff @(posedge clk) begin
    logic [24:0] m;
    logic        rnd;
    logic signed [9:0] e;
    rnd = s4_norm[2] & (s4_norm[1] | s4_norm[0] | s4_norm[3]);
    m   = {1'b0, s4_norm[26:3]} + {24'd0, rnd};
    e   = s4_exp;
    if (m[24]) begin
      m = m >> 1;
      e = e + 10'sd1;
    end
    if (s4_nan)                  y <= svm_pkg::FP_QNAN;
    else if (s4_inf)             y <= {s4_inf_sign, 8'hFF, 23'd0};
    else if (s4_zero)            y <= {s4_sign, 31'd0};
    else if (e >= 10'sd255)      y <= {s4_sign, 8'hFF, 23'd0};
    else if (e <= 10'sd0)        y <= {s4_sign, 31'd0};
    else                         y <= {s4_sign, e[7:0], m[22:0]};
  end

endmodule

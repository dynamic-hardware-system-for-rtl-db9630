// fp32_mul -- pipelined IEEE-754 single-precision multiplier.
//
// Forms one product AC[i] * X[i] of the SVM dot product. The paper states
// only that all data are single-precision floats; the structure here is this
// design's own: stage 1 multiplies the 24-bit significands and adds the
// exponents, stage 2 normalises, rounds to nearest-even and packs.
//
// Number handling follows the common FPGA floating-point core convention:
// subnormal inputs are read as zero and results below the normal range are
// flushed to a signed zero; overflow gives infinity; 0*inf and any NaN input
// give the quiet NaN 0x7FC00000.
//
// Interface: in_valid/a/b are sampled every cycle (fully pipelined, one
// operation per cycle); out_valid/y appear MUL_LAT = 2 cycles later.
module fp32_mul (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic        out_valid,
  output logic [31:0] y
);

  // ---------------- stage 1: unpack, significand product --------------------
  logic        s1_valid, s1_sign, s1_zero, s1_inf, s1_nan;
  logic signed [10:0] s1_exp;
  logic [47:0] s1_prod;

  logic a_zero, b_zero, a_inf, b_inf, a_nan, b_nan;
  always_comb begin
    a_zero = (a[30:23] == 8'd0);
    b_zero = (b[30:23] == 8'd0);
    a_inf  = (a[30:23] == 8'hFF) && (a[22:0] == '0);
    b_inf  = (b[30:23] == 8'hFF) && (b[22:0] == '0);
    a_nan  = (a[30:23] == 8'hFF) && (a[22:0] != '0);
    b_nan  = (b[30:23] == 8'hFF) && (b[22:0] != '0);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
    end else begin
      s1_valid <= in_valid;
    end
  end

  always_ff @(posedge clk) begin
    s1_sign <= a[31] ^ b[31];
    s1_nan  <= a_nan | b_nan | (a_inf & b_zero) | (b_inf & a_zero);
    s1_inf  <= a_inf | b_inf;
    s1_zero <= a_zero | b_zero;
    s1_exp  <= $signed({3'b000, a[30:23]}) + $signed({3'b000, b[30:23]}) - 11'sd127;
    s1_prod <= {1'b1, a[22:0]} * {1'b1, b[22:0]};
  end

  // ---------------- stage 2: normalise, round, pack -------------------------
  logic [31:0] y_c;
  always_comb begin
    logic [23:0] mant;
    logic        guard, sticky, round_up;
    logic [24:0] mant_r;
    logic signed [10:0] e;

    if (s1_prod[47]) begin
      mant   = s1_prod[47:24];
      guard  = s1_prod[23];
      sticky = |s1_prod[22:0];
      e      = s1_exp + 11'sd1;
    end else begin
      mant   = s1_prod[46:23];
      guard  = s1_prod[22];
      sticky = |s1_prod[21:0];
      e      = s1_exp;
    end
    round_up = guard & (sticky | mant[0]);
    mant_r   = {1'b0, mant} + {24'd0, round_up};
    if (mant_r[24]) begin
      mant_r = mant_r >> 1;
      e      = e + 11'sd1;
    end

    if (s1_nan)                 y_c = svm_pkg::FP_QNAN;
    else if (s1_inf)            y_c = {s1_sign, 8'hFF, 23'd0};
    else if (s1_zero)           y_c = {s1_sign, 31'd0};
    else if (e >= 11'sd255)     y_c = {s1_sign, 8'hFF, 23'd0};
    else if (e <= 11'sd0)       y_c = {s1_sign, 31'd0};
    else                        y_c = {s1_sign, e[7:0], mant_r[22:0]};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= s1_valid;
  end

  always_ff @(posedge clk) y <= y_c;

endmodule

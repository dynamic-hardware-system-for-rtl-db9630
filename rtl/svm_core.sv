// svm_core -- linear SVM decision function F(x) = sign(AC . x - b).
//
// This is the loop of the classifier IP: Distance = 0; for every element i
// Distance += AC[i] * X[i]; Distance -= b; return +1 if Distance >= 0, else
// -1 (+1 = melanoma, -1 = non-melanoma). The loop body, the order of the
// sums and the final comparison follow the paper's pseudocode; everything is
// single-precision floating point, so the accumulated value matches a
// software loop of the same order bit for bit.
//
// The loop is pipelined as far as its data dependence allows. Operand reads
// and the multiplications run ahead, but every addition needs the result of
// the previous one, so one element enters the accumulator every ADD_LAT
// cycles. Element reads are therefore issued every ADD_LAT cycles, and each
// product then arrives exactly when the previous partial sum leaves the
// adder. After the last element the bias (stored at address F of the
// coefficient memory) is subtracted in the same adder.
//
// Timing: with N_ELEMS elements, done is high
//   N_ELEMS*ADD_LAT + 1 + MUL_LAT + ADD_LAT
// cycles after the cycle in which start is accepted (148 cycles for the
// 28-element array of a 27-feature model, the pipelined latency reported in
// the paper; the unit depths that give this are this design's choice).
//
// Interface (block-level handshake in the style of an HLS ap_ctrl_hs port):
//   start   level; accepted in a cycle where idle is high
//   idle    high while no classification is running
//   done    one-cycle pulse; class_out and distance are valid in that cycle
//           and hold their values until the next done
//   x_addr/x_rdata, ac_addr/ac_rdata   read ports of the input array and the
//           coefficient memory, one cycle of read latency each
// A NaN distance compares false with zero and gives -1, as in C.
module svm_core #(
  parameter int unsigned N_ELEMS = svm_pkg::F,
  parameter int unsigned AW      = $clog2(N_ELEMS + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  output logic          idle,
  output logic          done,
  output logic [31:0]   class_out,
  output logic [31:0]   distance,
  output logic [AW-1:0] x_addr,
  input  logic [31:0]   x_rdata,
  output logic [AW-1:0] ac_addr,
  input  logic [31:0]   ac_rdata
);
  import svm_pkg::*;

  typedef enum logic {S_IDLE, S_RUN} state_e;
  state_e state;

  logic [AW-1:0] k;          // next element to issue; N_ELEMS = the bias
  logic [3:0]    tmr;        // cycles until the next issue
  logic [AW-1:0] n_sum;      // adder results received in this run
  logic          issue;

  assign idle  = (state == S_IDLE);
  assign issue = (state == S_IDLE) ? start
                                   : ((32'(k) <= N_ELEMS) && (tmr == '0));

  assign ac_addr = k;
  assign x_addr  = (32'(k) < N_ELEMS) ? k : '0;

  // ---------------- issue sequencer ------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      k     <= '0;
      tmr   <= '0;
    end else begin
      if (issue) begin
        k   <= k + 1'b1;
        tmr <= 4'(ADD_LAT - 1);
      end else if (tmr != '0) begin
        tmr <= tmr - 1'b1;
      end
      if (state == S_IDLE && start) state <= S_RUN;
      if (done) begin
        state <= S_IDLE;
        k     <= '0;
        tmr   <= '0;
      end
    end
  end

  // ---------------- read stage -----------------------------------------------
  logic          rd_v;
  logic [AW-1:0] rd_idx;
  logic [31:0]   b_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rd_v <= 1'b0;
    else        rd_v <= issue;
  end
  always_ff @(posedge clk) begin
    if (issue) rd_idx <= k;
    if (rd_v && 32'(rd_idx) == N_ELEMS) b_q <= ac_rdata;
  end

  // ---------------- multiply -------------------------------------------------
  logic        mul_iv, mul_ov;
  logic [31:0] mul_y;
  assign mul_iv = rd_v && (32'(rd_idx) < N_ELEMS);

  fp32_mul u_mul (
    .clk, .rst_n,
    .in_valid (mul_iv),
    .a        (ac_rdata),
    .b        (x_rdata),
    .out_valid(mul_ov),
    .y        (mul_y)
  );

  // ---------------- accumulate, subtract b -----------------------------------
  logic        add_iv, add_ov, add_sub, first;
  logic [31:0] add_a, add_b, add_y;
  logic        last_acc, final_res;

  assign last_acc  = add_ov && (32'(n_sum) == N_ELEMS - 1);
  assign final_res = add_ov && (32'(n_sum) == N_ELEMS);

  always_comb begin
    add_iv  = mul_ov | last_acc;
    add_sub = ~mul_ov;
    add_a   = mul_ov ? (first ? 32'd0 : add_y) : add_y;
    add_b   = mul_ov ? mul_y : b_q;
  end

  fp32_add u_add (
    .clk, .rst_n,
    .in_valid (add_iv),
    .a        (add_a),
    .b        (add_b),
    .sub      (add_sub),
    .out_valid(add_ov),
    .y        (add_y)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      first <= 1'b1;
      n_sum <= '0;
    end else begin
      if (mul_ov) first <= 1'b0;
      if (add_ov) n_sum <= n_sum + 1'b1;
      if (final_res) begin
        first <= 1'b1;
        n_sum <= '0;
      end
    end
  end

  // ---------------- result ---------------------------------------------------
  logic [31:0] dist_q, class_q, class_now;
  logic        y_nan, y_ge0;

  always_comb begin
    y_nan     = (add_y[30:23] == 8'hFF) && (add_y[22:0] != '0);
    y_ge0     = !y_nan && (!add_y[31] || add_y[30:0] == '0);
    class_now = y_ge0 ? CLASS_POS : CLASS_NEG;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dist_q  <= '0;
      class_q <= CLASS_NEG;
    end else if (final_res) begin
      dist_q  <= add_y;
      class_q <= class_now;
    end
  end

  assign done      = final_res;
  assign distance  = final_res ? add_y : dist_q;
  assign class_out = final_res ? class_now : class_q;

  // each product after the first meets the previous partial sum
  a_acc_aligned: assert property (@(posedge clk) disable iff (!rst_n)
    (mul_ov && !first) |-> add_ov)
    else $error("product arrived without its partial sum");

endmodule

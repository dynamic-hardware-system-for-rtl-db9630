// svm_hls_ip -- one SVM classifier IP (one reconfigurable module).
//
// Joins the three parts of the classifier: the AXI-lite control bus with the
// input array X, the decision core F(x) = sign(AC . x - b), and the
// coefficient memory holding AC and b. In the paper this is the unit that is
// instantiated once per classifier; in the dynamic system it is the logic of
// the reconfigurable partition, and a melanoma-sensitive and a
// benign-sensitive copy differ only in the AC and b they hold.
//
// In the paper AC and b are built into the IP as constants. Here they sit in
// a RAM with a write port (ac_we/ac_waddr/ac_wdata, address F = b) so that
// loading another reconfigurable module amounts to writing new contents;
// this is the design's model of a partial bitstream, not something the paper
// describes at this level.
//
// Timing: a classification takes 148 cycles from the cycle the core accepts
// ap_start to ap_done (28-element array), i.e. 1.48 us at 100 MHz, plus the
// AXI-lite accesses that write X and poll the result.
module svm_hls_ip #(
  parameter int unsigned N_ELEMS = svm_pkg::F,
  parameter int unsigned AW      = $clog2(N_ELEMS + 1)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  svm_pkg::axil_req_t req,
  output svm_pkg::axil_rsp_t rsp,
  input  logic               ac_we,
  input  logic [AW-1:0]      ac_waddr,
  input  logic [31:0]        ac_wdata
);

  logic          ap_start, ap_idle, ap_done;
  logic [31:0]   ap_return, distance;
  logic [AW-1:0] x_addr, ac_raddr;
  logic [31:0]   x_rdata, ac_rdata;

  svm_axil_ctrl #(.N_ELEMS(N_ELEMS), .XAW(AW)) u_ctrl (
    .clk, .rst_n, .req, .rsp,
    .ap_start, .ap_idle, .ap_done, .ap_return,
    .x_addr, .x_rdata
  );

  svm_core #(.N_ELEMS(N_ELEMS), .AW(AW)) u_core (
    .clk, .rst_n,
    .start    (ap_start),
    .idle     (ap_idle),
    .done     (ap_done),
    .class_out(ap_return),
    .distance (distance),
    .x_addr, .x_rdata,
    .ac_addr  (ac_raddr),
    .ac_rdata
  );

  ac_memory #(.DEPTH(N_ELEMS + 1), .AW(AW)) u_ac (
    .clk,
    .we   (ac_we),
    .waddr(ac_waddr),
    .wdata(ac_wdata),
    .raddr(ac_raddr),
    .rdata(ac_rdata)
  );

  // the distance is observable only inside the IP (it is what the paper
  // compared against software during co-simulation)
  logic unused_distance;
  assign unused_distance = ^distance;

endmodule

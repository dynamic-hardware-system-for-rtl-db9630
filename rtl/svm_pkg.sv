// svm_pkg -- constants and types shared by the SVM classifier IP, its
// reconfigurable partition and the static top level.
//
// The classifier evaluates the linear-kernel SVM decision function in the
// folded form F(x) = sign(AC . x - b), where AC = sum_i alpha_i*y_i*x_i is
// computed offline. The feature count (27) and the array length F =
// features + 1 follow the paper; the array keeps SVM-Light's 1-based feature
// indexing, so element 0 is a padding slot that the loop still visits.
//
// All arithmetic is IEEE-754 single precision, as in the paper. The pipeline
// depths of the floating-point units (multiplier 2 cycles, adder 5 cycles)
// are this design's choice; with them one classification takes
// F*ADD_LAT + 1 + MUL_LAT + ADD_LAT = 148 cycles, the pipelined latency the
// paper reports for 27 features.
//
// The AXI-lite register map copies the usual layout of an HLS-generated
// control bus (control word at 0x00, return value at 0x10, the input array in
// its own aligned window); the exact offsets are this design's choice.
package svm_pkg;

  // ---- model size -----------------------------------------------------------
  localparam int unsigned N_FEATURES = 27;
  localparam int unsigned F          = N_FEATURES + 1;   // array length
  localparam int unsigned FP_W       = 32;               // single precision

  // ---- floating-point pipeline depths ---------------------------------------
  localparam int unsigned MUL_LAT = 2;
  localparam int unsigned ADD_LAT = 5;

  // cycles from the cycle a start is accepted to the cycle done is high
  function automatic int unsigned core_latency(int unsigned n_elems,
                                               int unsigned mul_lat,
                                               int unsigned add_lat);
    return n_elems * add_lat + 1 + mul_lat + add_lat;
  endfunction

  // ---- fp32 constants -------------------------------------------------------
  localparam logic [31:0] FP_QNAN = 32'h7FC0_0000;

  // ---- classifier return value (C int) --------------------------------------
  localparam logic [31:0] CLASS_POS = 32'h0000_0001;   // +1, melanoma
  localparam logic [31:0] CLASS_NEG = 32'hFFFF_FFFF;   // -1, non-melanoma

  // ---- AXI-lite control bus -------------------------------------------------
  localparam int unsigned AXIL_AW = 8;
  localparam int unsigned AXIL_DW = 32;

  localparam logic [AXIL_AW-1:0] REG_CTRL   = 8'h00;   // ap_start/done/idle/ready
  localparam logic [AXIL_AW-1:0] REG_RETURN = 8'h10;   // classification +1 / -1
  localparam logic [AXIL_AW-1:0] REG_X_BASE = 8'h80;   // X[0..F-1], one word each

  localparam int unsigned CTRL_START = 0;
  localparam int unsigned CTRL_DONE  = 1;
  localparam int unsigned CTRL_IDLE  = 2;
  localparam int unsigned CTRL_READY = 3;

  typedef enum logic [1:0] {
    RESP_OKAY   = 2'b00,
    RESP_SLVERR = 2'b10
  } axil_resp_e;

  // master -> slave
  typedef struct packed {
    logic               awvalid;
    logic [AXIL_AW-1:0] awaddr;
    logic               wvalid;
    logic [AXIL_DW-1:0] wdata;
    logic [3:0]         wstrb;
    logic               bready;
    logic               arvalid;
    logic [AXIL_AW-1:0] araddr;
    logic               rready;
  } axil_req_t;

  // slave -> master
  typedef struct packed {
    logic               awready;
    logic               wready;
    logic               bvalid;
    axil_resp_e         bresp;
    logic               arready;
    logic               rvalid;
    logic [AXIL_DW-1:0] rdata;
    axil_resp_e         rresp;
  } axil_rsp_t;

  // ---- partial configuration image of one reconfigurable module -------------
  // word 0 : {CFG_MARKER, rm_id[7:0], n_words[7:0]}, n_words = F + 1
  // then   : AC[0] .. AC[F-1], b
  localparam logic [15:0] CFG_MARKER = 16'h5356;

endpackage

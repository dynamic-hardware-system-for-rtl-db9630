// svm_dpr_top -- dynamic two-stage cascade SVM classifier (static design).
//
// The cascade classifies a skin-lesion feature vector with two linear SVMs in
// turn: a melanoma-sensitive model first, and, only for an instance it calls
// non-melanoma, a benign-sensitive model as a second opinion. Instead of
// building both classifiers, the dynamic system has one reconfigurable
// partition that holds one classifier at a time; the processor swaps the
// module in the partition between the two stages.
//
// This module is the static side of that design with the partition inside:
//   u_rp      the classifier IP (svm_hls_ip), i.e. the reconfigurable
//             partition with whichever module was loaded last
//   u_loader  receives configuration images (the stand-in for partial
//             bitstreams) and writes the module's coefficients
//   u_dcpl    isolates the partition from the bus while it holds no module
// The processor system, the AXI interconnect, the cycle-count timer and the
// device configuration port (JTAG/PCAP) are vendor parts outside this RTL:
// the AXI-lite slave port s_axil_* is the one the interconnect drives, and
// the cfg_* stream is what the configuration port would deliver.
//
// Operation (by the processor's software): load the RM-M image; write the
// 28 features of X; set ap_start; poll ap_done; read RETURN. If it is +1
// the instance is melanoma. Otherwise load the RM-N image, write X again
// (the new module starts with a cleared control state and undefined X) and
// run again; RETURN then is the cascade's answer. Each classification takes
// 148 cycles of the core (about 1.5 us at 100 MHz), so a two-stage decision
// takes twice that, plus bus accesses and reconfiguration.
//
// Widths: AXI-lite with 8-bit addresses and 32-bit data; configuration words
// are 32 bits.
module svm_dpr_top #(
  parameter int unsigned N_ELEMS = svm_pkg::F,
  parameter int unsigned AW      = $clog2(N_ELEMS + 1)
) (
  input  logic               clk,
  input  logic               rst_n,
  // AXI-lite slave, from the interconnect (PS general-purpose master)
  input  svm_pkg::axil_req_t s_axil_req,
  output svm_pkg::axil_rsp_t s_axil_rsp,
  // configuration stream, from the device configuration port
  input  logic               cfg_valid,
  input  logic [31:0]        cfg_data,
  output logic               cfg_ready,
  // partition status
  output logic               rm_loaded,
  output logic [7:0]         rm_id,
  output logic               reconfiguring,
  output logic               cfg_error
);
  import svm_pkg::*;

  axil_req_t     rp_req;
  axil_rsp_t     rp_rsp;
  logic          ac_we;
  logic [AW-1:0] ac_waddr;
  logic [31:0]   ac_wdata;
  logic          rp_rst_n;

  pr_loader #(.N_ELEMS(N_ELEMS), .AW(AW)) u_loader (
    .clk, .rst_n,
    .cfg_valid, .cfg_data, .cfg_ready,
    .ac_we, .ac_waddr, .ac_wdata,
    .rm_loaded, .rm_id, .reconfiguring, .cfg_error
  );

  // the partition is held in reset whenever it holds no complete module;
  // the reset is released one cycle after loading completes
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rp_rst_n <= 1'b0;
    else        rp_rst_n <= rm_loaded;
  end

  pr_decoupler u_dcpl (
    .clk, .rst_n,
    .decouple(!rp_rst_n),
    .s_req   (s_axil_req),
    .s_rsp   (s_axil_rsp),
    .m_req   (rp_req),
    .m_rsp   (rp_rsp)
  );

  svm_hls_ip #(.N_ELEMS(N_ELEMS), .AW(AW)) u_rp (
    .clk,
    .rst_n   (rp_rst_n),
    .req     (rp_req),
    .rsp     (rp_rsp),
    .ac_we, .ac_waddr, .ac_wdata
  );

endmodule

// pr_decoupler -- isolates the reconfigurable partition from the AXI-lite bus.
//
// While the partition holds no complete module (after reset and during a
// reconfiguration) its logic is undefined, so the static side must not
// depend on it. When decouple is high this block stops forwarding requests
// to the partition and answers every access itself with SLVERR (reads return
// zero), so a processor that touches the classifier at the wrong moment gets
// an error instead of a hung bus. Once decouple is low, traffic passes
// straight through. An error response still pending when decouple falls is
// completed before the path switches back.
//
// The paper does not describe how the static design isolates the partition;
// this block and its error behaviour are this design's choice. The
// processor is expected to start a reconfiguration only with no AXI-lite
// transaction in flight to the partition.
//
// Address, data and strobe fields pass to the partition unchanged; only the
// valid and ready bits are gated.
//
// Timing: decoupled writes and reads are answered one cycle after they are
// accepted, with the same handshake as the classifier's own bus.
module pr_decoupler (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               decouple,
  input  svm_pkg::axil_req_t s_req,     // from the interconnect
  output svm_pkg::axil_rsp_t s_rsp,
  output svm_pkg::axil_req_t m_req,     // to the partition
  input  svm_pkg::axil_rsp_t m_rsp
);
  import svm_pkg::*;

  logic e_bvalid, e_rvalid, sel_err, e_wr, e_rd;

  assign sel_err = decouple || e_bvalid || e_rvalid;
  assign e_wr    = decouple && s_req.awvalid && s_req.wvalid && !e_bvalid;
  assign e_rd    = decouple && s_req.arvalid && !e_rvalid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      e_bvalid <= 1'b0;
      e_rvalid <= 1'b0;
    end else begin
      if (e_wr)              e_bvalid <= 1'b1;
      else if (s_req.bready) e_bvalid <= 1'b0;
      if (e_rd)              e_rvalid <= 1'b1;
      else if (s_req.rready) e_rvalid <= 1'b0;
    end
  end

  always_comb begin
    m_req = s_req;
    if (sel_err) begin
      m_req.awvalid = 1'b0;
      m_req.wvalid  = 1'b0;
      m_req.arvalid = 1'b0;
      m_req.bready  = 1'b0;
      m_req.rready  = 1'b0;
    end
    if (sel_err) begin
      s_rsp.awready = e_wr;
      s_rsp.wready  = e_wr;
      s_rsp.bvalid  = e_bvalid;
      s_rsp.bresp   = RESP_SLVERR;
      s_rsp.arready = e_rd;
      s_rsp.rvalid  = e_rvalid;
      s_rsp.rdata   = '0;
      s_rsp.rresp   = RESP_SLVERR;
    end else begin
      s_rsp = m_rsp;
    end
  end

endmodule

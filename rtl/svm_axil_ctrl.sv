// svm_axil_ctrl -- AXI-lite control bus of the SVM classifier IP.
//
// The processor drives the classifier only through this AXI-lite slave, as
// in the paper: it writes the features of one test instance into the input
// array X, sets ap_start, polls for ap_done and reads the returned class.
// The register layout copies the one an HLS tool generates for a function
// with an s_axilite control port and an array argument; the offsets are this
// design's choice:
//   0x00 CTRL    bit0 ap_start (write 1 to start; clears when the core takes
//                it), bit1 ap_done (sticky, cleared by reading CTRL),
//                bit2 ap_idle, bit3 ap_ready (sticky, cleared by reading CTRL)
//   0x10 RETURN  the class of the last run, +1 (melanoma) or -1, as a C int
//   0x80 X[i]    at 0x80 + 4*i, i < N_ELEMS, read/write, byte strobes honoured
// Other addresses read as zero and ignore writes; all responses are OKAY.
//
// Timing: a write is accepted when address and data are both valid and no
// write response is pending, and its response follows one cycle later. A
// read is accepted when no read data is pending; data follow one cycle
// later. The core reads X through a separate port with one cycle of latency.
module svm_axil_ctrl #(
  parameter int unsigned N_ELEMS = svm_pkg::F,
  parameter int unsigned XAW     = $clog2(N_ELEMS + 1)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  svm_pkg::axil_req_t  req,
  output svm_pkg::axil_rsp_t  rsp,
  // block-level handshake toward the core
  output logic                ap_start,
  input  logic                ap_idle,
  input  logic                ap_done,
  input  logic [31:0]         ap_return,
  // input-array read port of the core
  input  logic [XAW-1:0]      x_addr,
  output logic [31:0]         x_rdata
);
  import svm_pkg::*;

  logic [31:0] xmem [N_ELEMS];
  logic        start_q, done_q, ready_q;
  logic [31:0] ret_q;

  // ---------------- write channel --------------------------------------------
  logic wr_fire, rd_fire;
  logic [AXIL_AW-1:0] wa;
  logic [7:0]         widx;
  logic        bvalid_q, rvalid_q;
  logic [31:0] rdata_q;
  assign rsp.bvalid = bvalid_q;
  assign rsp.rvalid = rvalid_q;
  assign rsp.rdata  = rdata_q;

  assign wr_fire = req.awvalid && req.wvalid && !bvalid_q;
  assign wa      = req.awaddr;
  assign widx    = 8'((wa - REG_X_BASE) >> 2);

  assign rsp.awready = wr_fire;
  assign rsp.wready  = wr_fire;
  assign rsp.bresp   = RESP_OKAY;
  assign rsp.rresp   = RESP_OKAY;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                      bvalid_q <= 1'b0;
    else if (wr_fire)                bvalid_q <= 1'b1;
    else if (req.bready)             bvalid_q <= 1'b0;
  end

  always_ff @(posedge clk) begin
    if (wr_fire && wa >= REG_X_BASE && 32'(widx) < N_ELEMS) begin
      for (int bt = 0; bt < 4; bt++) begin
        if (req.wstrb[bt]) xmem[widx[XAW-1:0]][8*bt +: 8] <= req.wdata[8*bt +: 8];
      end
    end
  end

  // ---------------- control register -----------------------------------------
  logic ctrl_rd;
  assign rd_fire = req.arvalid && !rvalid_q;
  assign ctrl_rd = rd_fire && (req.araddr == REG_CTRL);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      start_q <= 1'b0;
      done_q  <= 1'b0;
      ready_q <= 1'b0;
      ret_q   <= '0;
    end else begin
      if (ap_start && ap_idle) start_q <= 1'b0;
      if (wr_fire && wa == REG_CTRL && req.wstrb[0] && req.wdata[CTRL_START])
        start_q <= 1'b1;
      if (ctrl_rd) begin
        done_q  <= 1'b0;
        ready_q <= 1'b0;
      end
      if (ap_done) begin
        done_q  <= 1'b1;
        ready_q <= 1'b1;
        ret_q   <= ap_return;
      end
    end
  end
  assign ap_start = start_q;

  // ---------------- read channel ---------------------------------------------
  logic [31:0] rd_word;
  logic [7:0]  ridx;
  assign ridx = 8'((req.araddr - REG_X_BASE) >> 2);

  always_comb begin
    rd_word = '0;
    if (req.araddr == REG_CTRL)
      rd_word = {28'd0, ready_q, ap_idle, done_q, start_q};
    else if (req.araddr == REG_RETURN)
      rd_word = ret_q;
    else if (req.araddr >= REG_X_BASE && 32'(ridx) < N_ELEMS)
      rd_word = xmem[ridx[XAW-1:0]];
  end

  assign rsp.arready = rd_fire;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rvalid_q <= 1'b0;
      rdata_q  <= '0;
    end else if (rd_fire) begin
      rvalid_q <= 1'b1;
      rdata_q  <= rd_word;
    end else if (req.rready) begin
      rvalid_q <= 1'b0;
    end
  end

  // ---------------- core read port -------------------------------------------
  always_ff @(posedge clk) begin
    x_rdata <= (32'(x_addr) < N_ELEMS) ? xmem[x_addr] : 32'd0;
  end

  // ---------------- AXI-lite handshake rules ---------------------------------
  a_bvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
    rsp.bvalid && !req.bready |=> rsp.bvalid)
    else $error("bvalid dropped before bready");
  a_rvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
    rsp.rvalid && !req.rready |=> rsp.rvalid && $stable(rsp.rdata))
    else $error("read data changed before rready");
  a_awvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
    req.awvalid && !rsp.awready |=> req.awvalid)
    else $error("master dropped awvalid before awready");
  a_arvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
    req.arvalid && !rsp.arready |=> req.arvalid)
    else $error("master dropped arvalid before arready");

endmodule

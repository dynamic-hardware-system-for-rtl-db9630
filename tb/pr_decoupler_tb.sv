// pr_decoupler_tb -- self-checking testbench for the partition decoupler.
//
// Behind the decoupler sits a small AXI-lite slave model that answers reads
// with a pattern derived from the address and counts the requests it sees.
// With decouple low every access must reach the model and return its data
// with OKAY; with decouple high no request may reach it and every access
// must end with SLVERR (reads return zero). Decouple is also dropped while
// an error response is still waiting for its ready, which must complete
// with SLVERR before traffic passes again.
module pr_decoupler_tb;
  import svm_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, decouple = 1'b1;
  axil_req_t s_req, m_req;
  axil_rsp_t s_rsp, m_rsp;
  int checks = 0, failures = 0;
  int slave_hits = 0;

  always #5 clk = ~clk;

  pr_decoupler dut (.clk, .rst_n, .decouple, .s_req, .s_rsp, .m_req, .m_rsp);

  // ---- simple slave model behind the decoupler ----
  logic sb, sr;
  logic [31:0] srd;
  always_comb begin
    m_rsp         = '0;
    m_rsp.awready = m_req.awvalid && m_req.wvalid && !sb;
    m_rsp.wready  = m_rsp.awready;
    m_rsp.bvalid  = sb;
    m_rsp.bresp   = RESP_OKAY;
    m_rsp.arready = m_req.arvalid && !sr;
    m_rsp.rvalid  = sr;
    m_rsp.rdata   = srd;
    m_rsp.rresp   = RESP_OKAY;
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sb <= 1'b0; sr <= 1'b0; srd <= '0;
    end else begin
      if (m_rsp.awready) begin sb <= 1'b1; slave_hits++; end
      else if (m_req.bready) sb <= 1'b0;
      if (m_rsp.arready) begin
        sr <= 1'b1; srd <= {24'hA5A5A5, m_req.araddr}; slave_hits++;
      end else if (m_req.rready) sr <= 1'b0;
    end
  end

  // ---- AXI-lite master tasks ----
  task automatic axil_write(input logic [7:0] addr, input logic [31:0] data,
                            output axil_resp_e resp);
    s_req.awvalid <= 1'b1; s_req.awaddr <= addr;
    s_req.wvalid  <= 1'b1; s_req.wdata  <= data; s_req.wstrb <= 4'hF;
    do @(posedge clk); while (!s_rsp.awready);
    s_req.awvalid <= 1'b0; s_req.wvalid <= 1'b0; s_req.bready <= 1'b1;
    do @(posedge clk); while (!s_rsp.bvalid);
    resp = s_rsp.bresp;
    s_req.bready <= 1'b0;
  endtask

  task automatic axil_read(input logic [7:0] addr, output logic [31:0] data,
                           output axil_resp_e resp);
    s_req.arvalid <= 1'b1; s_req.araddr <= addr;
    do @(posedge clk); while (!s_rsp.arready);
    s_req.arvalid <= 1'b0; s_req.rready <= 1'b1;
    do @(posedge clk); while (!s_rsp.rvalid);
    data = s_rsp.rdata; resp = s_rsp.rresp;
    s_req.rready <= 1'b0;
  endtask

  task automatic chk(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    axil_resp_e r;
    logic [31:0] d;
    int h;
    s_req = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int n = 0; n < 40; n++) begin
      logic dc;
      logic [7:0] a;
      dc = 1'($urandom);
      a  = 8'($urandom);
      decouple <= dc;
      @(posedge clk);
      h = slave_hits;
      axil_write(a, $urandom, r);
      chk("write resp", 32'(r), dc ? 32'(RESP_SLVERR) : 32'(RESP_OKAY));
      chk("write reached slave", slave_hits - h, dc ? 0 : 1);
      h = slave_hits;
      axil_read(a, d, r);
      chk("read resp", 32'(r), dc ? 32'(RESP_SLVERR) : 32'(RESP_OKAY));
      chk("read data", d, dc ? 32'd0 : {24'hA5A5A5, a});
      chk("read reached slave", slave_hits - h, dc ? 0 : 1);
    end
    // decouple falls while an error read response is pending
    decouple <= 1'b1;
    @(posedge clk);
    s_req.arvalid <= 1'b1; s_req.araddr <= 8'h10;
    do @(posedge clk); while (!s_rsp.arready);
    s_req.arvalid <= 1'b0;
    decouple <= 1'b0;
    repeat (3) @(posedge clk);
    chk("pending error held", 32'(s_rsp.rvalid), 1);
    chk("pending error resp", 32'(s_rsp.rresp), 32'(RESP_SLVERR));
    s_req.rready <= 1'b1;
    @(posedge clk);
    s_req.rready <= 1'b0;
    h = slave_hits;
    axil_read(8'h24, d, r);
    chk("after switch", d, 32'hA5A5A524);
    chk("after switch resp", 32'(r), 32'(RESP_OKAY));
    chk("after switch hit", slave_hits - h, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

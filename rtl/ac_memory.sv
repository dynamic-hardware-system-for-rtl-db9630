// ac_memory -- coefficient memory of the SVM classifier IP.
//
// Holds the F words of the accumulated support-vector array AC (equation 2
// of the method, computed offline) followed by the bias b at address F, all
// as single-precision floats. The paper keeps AC and b inside the IP and
// reports one block RAM for it; here the array is a simple dual-port RAM so
// that a new reconfigurable module (another trained model) can be written
// in through the write port when the partition is reconfigured.
//
// Interface: synchronous write (we, waddr, wdata); synchronous read with one
// cycle of latency (raddr -> rdata). The contents are not reset.
module ac_memory #(
  parameter int unsigned DEPTH = svm_pkg::F + 1,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [31:0]   wdata,
  input  logic [AW-1:0] raddr,
  output logic [31:0]   rdata
);

  logic [31:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we && (32'(waddr) < DEPTH)) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    rdata <= (32'(raddr) < DEPTH) ? mem[raddr] : 32'd0;
  end

endmodule

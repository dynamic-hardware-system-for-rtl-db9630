// ac_memory_tb -- self-checking testbench for the coefficient memory.
//
// Writes random words to every address (AC[0..F-1] and b at F), then reads
// them back in random order, checking each value and the one-cycle read
// latency, and checks that a read during a write of another address
// returns the old contents of the address read.
module ac_memory_tb;
  import svm_pkg::*;
  localparam int unsigned DEPTH = F + 1;
  localparam int unsigned AW    = $clog2(DEPTH);

  logic clk = 1'b0, we = 1'b0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic [31:0] wdata = '0, rdata;
  logic [31:0] model [DEPTH];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  ac_memory dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);

  task automatic chk(logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL: got %h expected %h", got, exp);
    end
  endtask

  initial begin
    for (int i = 0; i < DEPTH; i++) begin
      model[i] = $urandom;
      @(negedge clk);
      we = 1'b1; waddr = AW'(i); wdata = model[i];
    end
    @(negedge clk) we = 1'b0;
    for (int n = 0; n < 200; n++) begin
      int r;
      r = $urandom_range(0, DEPTH - 1);
      @(negedge clk);
      raddr = AW'(r);
      // concurrent write to a different address
      we    = 1'($urandom);
      waddr = AW'((r + 1) % DEPTH);
      wdata = $urandom;
      @(posedge clk);
      if (we) model[waddr] = wdata;
      #1 chk(rdata, model[r]);
    end
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

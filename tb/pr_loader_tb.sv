// pr_loader_tb -- self-checking testbench for the module loader.
//
// Sends configuration images with random gaps between words and checks the
// coefficient words written (address and data, one write per data word),
// the status outputs before, during and after loading (rm_loaded,
// reconfiguring, rm_id), that images with a wrong marker or length are
// refused with cfg_error without disturbing the loaded module, and that a
// second image replaces the first.
module pr_loader_tb;
  import svm_pkg::*;
  localparam int unsigned N  = F;
  localparam int unsigned AW = $clog2(N + 1);

  logic clk = 1'b0, rst_n = 1'b0;
  logic cfg_valid = 1'b0, cfg_ready;
  logic [31:0] cfg_data = '0;
  logic ac_we;
  logic [AW-1:0] ac_waddr;
  logic [31:0] ac_wdata;
  logic rm_loaded, reconfiguring, cfg_error;
  logic [7:0] rm_id;
  logic [31:0] mem [N + 1];
  int writes = 0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  pr_loader dut (.clk, .rst_n, .cfg_valid, .cfg_data, .cfg_ready, .ac_we,
                 .ac_waddr, .ac_wdata, .rm_loaded, .rm_id, .reconfiguring,
                 .cfg_error);

  always @(posedge clk) if (ac_we) begin
    mem[ac_waddr] <= ac_wdata;
    writes++;
  end

  task automatic chk(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  task automatic send(logic [31:0] w);
    while ($urandom_range(0, 3) == 0) @(negedge clk);
    @(negedge clk);
    cfg_valid = 1'b1; cfg_data = w;
    @(negedge clk);
    cfg_valid = 1'b0;
  endtask

  task automatic load(logic [7:0] id, ref logic [31:0] img [N + 1]);
    int w0;
    w0 = writes;
    send({CFG_MARKER, id, 8'(N + 1)});
    chk("reconfiguring", 32'(reconfiguring), 1);
    chk("loaded low", 32'(rm_loaded), 0);
    for (int i = 0; i <= N; i++) begin
      send(img[i]);
      if (i < N) chk("still reconfiguring", 32'(reconfiguring), 1);
    end
    @(negedge clk);
    chk("loaded", 32'(rm_loaded), 1);
    chk("done", 32'(reconfiguring), 0);
    chk("rm_id", 32'(rm_id), 32'(id));
    chk("write count", writes - w0, N + 1);
    for (int i = 0; i <= N; i++) chk("word", mem[i], img[i]);
  endtask

  logic [31:0] img_m [N + 1], img_n [N + 1];

  initial begin
    foreach (img_m[i]) begin img_m[i] = $urandom; img_n[i] = $urandom; end
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    chk("ready", 32'(cfg_ready), 1);
    chk("empty after reset", 32'(rm_loaded), 0);
    load(8'h01, img_m);
    // wrong marker
    send({16'h1234, 8'h02, 8'(N + 1)});
    chk("error marker", 32'(cfg_error), 1);
    chk("kept", 32'(rm_loaded), 1);
    chk("kept id", 32'(rm_id), 1);
    // wrong length
    send({CFG_MARKER, 8'h02, 8'(N)});
    chk("error length", 32'(cfg_error), 1);
    chk("no reconfig", 32'(reconfiguring), 0);
    chk("no writes", writes, N + 1);
    load(8'h02, img_n);
    chk("error cleared", 32'(cfg_error), 0);
    load(8'h01, img_m);
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

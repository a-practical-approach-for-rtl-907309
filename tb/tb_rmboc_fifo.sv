// tb_rmboc_fifo: self-checking test of the command FIFO. A queue in the
// testbench is the reference model. Checks: first-in first-out order,
// one-cycle registered read latency (dout_valid), count/empty/full flags,
// dropping of writes into a full FIFO with a one-cycle overflow pulse,
// simultaneous read and write when full, and a random mix of traffic.
module tb_rmboc_fifo;
  localparam int WIDTH = 9;
  localparam int DEPTH = 6;   // not a power of two on purpose

  logic clk = 0, rst_n = 0;
  logic wr_en = 0, rd_en = 0;
  logic [WIDTH-1:0] din = '0;
  logic full, overflow, dout_valid, empty;
  logic [WIDTH-1:0] dout;
  logic [$clog2(DEPTH+1)-1:0] count;
  int checks = 0, failures = 0;
  logic [WIDTH-1:0] model [$];
  logic             exp_valid;
  logic [WIDTH-1:0] exp_data;

  rmboc_fifo #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s (t=%0t)", what, $time);
    end
  endtask

  // One clock cycle with the given inputs; the model is updated alongside
  // and the outputs are compared after the edge.
  task automatic step(input logic w, input logic [WIDTH-1:0] d, input logic r);
    logic exp_ovf;
    wr_en = w; din = d; rd_en = r;
    check(count == $bits(count)'(model.size()), "count before edge");
    check(empty == (model.size() == 0), "empty flag");
    check(full == (model.size() == DEPTH), "full flag");
    exp_valid = r && model.size() > 0;
    exp_ovf   = w && model.size() == DEPTH && !exp_valid;
    if (exp_valid) exp_data = model.pop_front();
    if (w && !exp_ovf) model.push_back(d);
    @(posedge clk); #1;
    check(dout_valid == exp_valid, "dout_valid");
    if (exp_valid) check(dout == exp_data, "dout data");
    check(overflow == exp_ovf, "overflow pulse");
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1; #1;
    check(empty && count == 0, "empty after reset");
    // fill beyond capacity: the extra writes are dropped
    for (int i = 0; i < DEPTH + 3; i++) step(1, WIDTH'(i + 10), 0);
    check(full, "full after filling");
    // read and write together while full: both take effect
    step(1, 9'h1AA, 1);
    // drain everything
    for (int i = 0; i < DEPTH + 2; i++) step(0, '0, 1);
    check(empty, "empty after draining");
    // random traffic
    for (int i = 0; i < 2000; i++)
      step(1'($urandom_range(0, 1)), WIDTH'($urandom), 1'($urandom_range(0, 1)));
    // reset empties the FIFO
    step(1, 9'h055, 0);
    rst_n = 0; @(posedge clk); #1; rst_n = 1;
    model.delete();
    check(empty && count == 0 && !dout_valid, "reset empties");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

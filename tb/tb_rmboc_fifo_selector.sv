// tb_rmboc_fifo_selector: self-checking test of the FIFO selector. The three
// input FIFOs and the main FIFO are modelled in the testbench (queues with
// a one-cycle registered read), so only the selector is under test.
// Checks: every command reaches the main FIFO once and in per-source order;
// service is round-robin LEFT, RIGHT, PE whenever all three are busy; one
// transfer takes 4 cycles (read 2 + write 2), so the main FIFO is written
// exactly every 4 cycles under load and 4 cycles after the first read;
// nothing is transferred while the main FIFO reports full.
module tb_rmboc_fifo_selector;
  localparam int WIDTH = 8;
  logic clk = 0, rst_n = 0;
  logic [2:0] in_empty, in_rd, in_dout_valid;
  logic [WIDTH-1:0] in_dout [3];
  logic mf_full, mf_wr;
  logic [WIDTH-1:0] mf_din;
  logic [1:0] grant;
  int checks = 0, failures = 0;

  rmboc_fifo_selector #(.WIDTH(WIDTH)) dut (.*);
  always #5 clk = ~clk;

  logic [WIDTH-1:0] q [3][$];
  logic [WIDTH-1:0] got [$];
  int  last_wr_cycle = -1, cycle = 0, n_wr = 0, first_rd_cycle = -1;
  logic hold_full = 0;

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s (cycle %0d)", what, cycle);
    end
  endtask

  always_comb begin
    for (int i = 0; i < 3; i++) in_empty[i] = (q[i].size() == 0);
    mf_full = hold_full;
  end

  // input FIFO models: registered read
  always @(posedge clk) begin
    cycle <= cycle + 1;
    for (int i = 0; i < 3; i++) begin
      in_dout_valid[i] <= 1'b0;
      if (in_rd[i]) begin
        check(q[i].size() > 0, "read of an empty FIFO");
        if (first_rd_cycle < 0) first_rd_cycle = cycle;
        in_dout[i]       <= q[i].pop_front();
        in_dout_valid[i] <= 1'b1;
      end
    end
    if (mf_wr) begin
      got.push_back(mf_din);
      if (last_wr_cycle >= 0) check(cycle - last_wr_cycle == 4, "4-cycle transfer period");
      else check(cycle - first_rd_cycle == 3, "first write 3 cycles after read strobe");
      last_wr_cycle = cycle;
      n_wr++;
    end
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_dout_valid = '0;
    for (int i = 0; i < 3; i++) in_dout[i] = '0;
    // source i, sequence s encoded as {i[1:0], s[5:0]}
    for (int s = 0; s < 5; s++)
      for (int i = 0; i < 3; i++) q[i].push_back(WIDTH'((i << 6) | s));
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (n_wr == 15);
    @(posedge clk);
    check(got.size() == 15, "all 15 commands transferred");
    // round robin: L, R, PE, L, R, PE ...
    for (int k = 0; k < got.size(); k++) begin
      check(got[k][7:6] == 2'(k % 3), "round-robin order L,R,PE");
      check(got[k][5:0] == 6'(k / 3), "per-source FIFO order");
    end
    // unequal load: only RIGHT and PE
    got.delete();
    last_wr_cycle = -1; first_rd_cycle = -1; n_wr = 0;
    q[1].push_back(8'h41); q[2].push_back(8'h81); q[1].push_back(8'h42);
    wait (n_wr == 3);
    @(posedge clk);
    check(got.size() == 3 && got[0] == 8'h41 && got[1] == 8'h81 && got[2] == 8'h42,
          "round robin skips empty FIFOs");
    // main FIFO full: no transfer
    hold_full = 1;
    q[0].push_back(8'h07);
    repeat (20) @(posedge clk);
    check(n_wr == 3 && q[0].size() == 1, "stalls while main FIFO full");
    hold_full = 0;
    last_wr_cycle = -1; first_rd_cycle = -1;
    wait (n_wr == 4);
    @(posedge clk);
    check(got[3] == 8'h07, "resumes after main FIFO drains");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_rmboc_tradeoff: the five configurations of the segment-count versus
// segment-width trade-off with a fixed total bus width k*w = 32 and four PEs:
// 32 x 1, 16 x 2, 8 x 4, 4 x 8 and 2 x 16 bits. Each runs in its own
// rmboc_tradeoff_case instance at the same time: the REQUEST latency must not
// depend on k or w, configurations with at least four segments must carry
// all twelve channels of the fully connected pattern, and the two-segment one
// must refuse a channel that needs a third segment.
module tb_rmboc_tradeoff;
  logic clk = 0;
  int checks, failures;
  int c_n [5], f_n [5];
  logic d [5];

  always #5 clk = ~clk;

  rmboc_tradeoff_case #(.K(32), .W(1))  u_32x1  (.clk, .n_checks(c_n[0]), .n_failures(f_n[0]), .done(d[0]));
  rmboc_tradeoff_case #(.K(16), .W(2))  u_16x2  (.clk, .n_checks(c_n[1]), .n_failures(f_n[1]), .done(d[1]));
  rmboc_tradeoff_case #(.K(8),  .W(4))  u_8x4   (.clk, .n_checks(c_n[2]), .n_failures(f_n[2]), .done(d[2]));
  rmboc_tradeoff_case #(.K(4),  .W(8))  u_4x8   (.clk, .n_checks(c_n[3]), .n_failures(f_n[3]), .done(d[3]));
  rmboc_tradeoff_case #(.K(2),  .W(16)) u_2x16  (.clk, .n_checks(c_n[4]), .n_failures(f_n[4]), .done(d[4]));

  function automatic void total();
    checks = 0; failures = 0;
    for (int i = 0; i < 5; i++) begin checks += c_n[i]; failures += f_n[i]; end
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    total();
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20;
    wait (d[0] && d[1] && d[2] && d[3] && d[4]);
    total();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

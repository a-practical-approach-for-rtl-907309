// tb_rmboc_vga: the video case study on the 1-D RMBoC at its default size.
// A VGA controller (VC, on PE 0) sends the X and Y coordinate of every pixel
// of a 640 x 480 frame to a colour generator (CG, on PE 2); the CG computes
// a 24-bit colour from them and sends it back. X and Y are 12 bits and the
// colour 24 bits; on 16-bit segments each direction therefore takes two
// words per pixel, so the network clock runs at twice the 25 MHz pixel clock
// (one pixel every two cycles). Framing: bit 14 marks a word that carries
// data (an idle segment reads 0), bit 15 the first word of a pixel (X, or
// the upper 12 colour bits). Both channels are opened with
// REQUEST/REPLY first; the VC checks every returned colour against its own
// computation of the same function. To keep the run short the frame is cut
// to its first LINES lines.
module tb_rmboc_vga;
  import rmboc_pkg::*;
  localparam int N = 4, K = 4, W = 16;
  localparam int AW = 2, SW = 2, CW = 3 + 2 * AW + SW;
  localparam int VC = 0, CG = 2;
  localparam int XRES = 640, LINES = 4;

  logic clk = 0, rst_n = 0;
  logic          pe_cmd_in_valid  [N];
  logic [CW-1:0] pe_cmd_in        [N];
  logic          pe_cmd_out_rd    [N];
  logic [CW-1:0] pe_cmd_out       [N];
  logic          pe_cmd_out_valid [N];
  logic          pe_cmd_out_empty [N];
  logic [W-1:0]  pe_tx_data  [N];
  logic [AW-1:0] pe_rx_src   [N];
  logic [W-1:0]  pe_rx_data  [N];
  logic          pe_rx_valid [N];
  logic [3:0]    overflow [N];
  logic [4:0]    ev       [N];
  int checks = 0, failures = 0, cycle = 0;

  rmboc_1d dut (.*);

  for (genvar i = 0; i < N; i++) begin : g_pe
    rmboc_pe_model #(.N(N), .AW(AW), .SW(SW)) u_pe (
      .clk, .rst_n, .my_id(AW'(i)),
      .cmd_valid(pe_cmd_in_valid[i]), .cmd(pe_cmd_in[i]),
      .out_rd(pe_cmd_out_rd[i]), .out_cmd(pe_cmd_out[i]),
      .out_valid(pe_cmd_out_valid[i]), .out_empty(pe_cmd_out_empty[i]));
  end

  always #5 clk = ~clk;
  always_ff @(posedge clk) cycle <= cycle + 1;

  function automatic logic [23:0] colour(logic [11:0] x, logic [11:0] y);
    return {x[7:0], y[7:0], x[7:0] ^ y[7:0]};
  endfunction

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (cycle %0d)", what, cycle); end
  endtask

  // ---- VGA controller: coordinate generator and colour checker
  logic        run = 0;
  logic [15:0] vc_tx = '0;
  logic        vc_phase = 0;
  logic [11:0] px = '0, py = '0;
  logic [11:0] vc_hi = '0;
  logic [23:0] expq [$];
  int pixels_sent = 0, pixels_back = 0;

  always @(posedge clk) begin
    if (run && pixels_sent < XRES * LINES) begin
      vc_phase <= !vc_phase;
      if (!vc_phase) vc_tx <= {2'b11, 2'b0, px};
      else begin
        vc_tx <= {2'b01, 2'b0, py};
        expq.push_back(colour(px, py));
        pixels_sent <= pixels_sent + 1;
        if (px == 12'(XRES - 1)) begin px <= '0; py <= py + 1; end
        else px <= px + 1;
      end
    end else vc_tx <= '0;
    // colour words returning from the CG
    if (run && pe_rx_valid[VC]) begin
      if (pe_rx_data[VC][15:14] == 2'b11) vc_hi <= pe_rx_data[VC][11:0];
      else if (pe_rx_data[VC][15:14] == 2'b01) begin
        if (expq.size() == 0) check(1'b0, "colour returned for a pixel never sent");
        else begin
          logic [23:0] e;
          e = expq.pop_front();
          check({vc_hi, pe_rx_data[VC][11:0]} == e, $sformatf("colour of pixel %0d", pixels_back));
          pixels_back <= pixels_back + 1;
        end
      end
    end
  end

  // ---- colour generator
  logic [15:0] cg_tx = '0;
  logic [11:0] cg_x = '0, cg_lo = '0;
  logic        cg_second = 0;
  always @(posedge clk) begin
    cg_second <= 1'b0;
    cg_tx <= cg_second ? {2'b01, 2'b0, cg_lo} : '0;
    if (run && pe_rx_valid[CG]) begin
      if (pe_rx_data[CG][15:14] == 2'b11) cg_x <= pe_rx_data[CG][11:0];
      else if (pe_rx_data[CG][15:14] == 2'b01) begin : y_word
        logic [23:0] c;
        c = colour(cg_x, pe_rx_data[CG][11:0]);
        cg_tx     <= {2'b11, 2'b0, c[23:12]};
        cg_lo     <= c[11:0];
        cg_second <= 1'b1;
      end
    end
  end

  always_comb begin
    for (int i = 0; i < N; i++) pe_tx_data[i] = '0;
    pe_tx_data[VC] = vc_tx;
    pe_tx_data[CG] = cg_tx;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) pe_rx_src[i] = '0;
    pe_rx_src[VC] = AW'(CG);
    pe_rx_src[CG] = AW'(VC);
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    g_pe[VC].u_pe.open_chan(CG);
    g_pe[CG].u_pe.open_chan(VC);
    repeat (300) @(posedge clk);
    check(g_pe[VC].u_pe.chan_up[CG] && g_pe[CG].u_pe.chan_up[VC], "both channels up");
    check(pe_rx_valid[VC] && pe_rx_valid[CG], "both ends receive");
    run = 1;
    wait (pixels_back == XRES * LINES);
    repeat (4) @(posedge clk);
    check(pixels_back == XRES * LINES, "every pixel came back");
    check(expq.size() == 0, "no pixel left unanswered");
    $display("VGA: %0d pixels in %0d cycles", pixels_back, cycle);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// rmboc_fifo: command FIFO of an RMBoC crosspoint. One instance each buffers
// the commands arriving from the LEFT, RIGHT and PE sides, one is the main
// FIFO in front of the controller, and one holds commands for the PE.
//
// Operation: a synchronous single-clock FIFO with a registered read port,
// as a Block RAM or LUT RAM FIFO on an FPGA would have. rd_en in one cycle
// (ignored when empty) makes the head word appear on dout in the next
// cycle, flagged by dout_valid. A write to a full FIFO is dropped and
// pulses overflow for one cycle: the network has no back-pressure between
// crosspoints, and a lost command is re-sent by its source after a
// time-out, as the paper describes for FIFOs shallower than the number of
// commands that can be in flight. Reset (active low, synchronous) empties
// the FIFO. DEPTH need not be a power of two.
module rmboc_fifo #(
  parameter int WIDTH = 8,
  parameter int DEPTH = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             wr_en,
  input  logic [WIDTH-1:0] din,
  output logic             full,
  output logic             overflow,
  input  logic             rd_en,
  output logic [WIDTH-1:0] dout,
  output logic             dout_valid,
  output logic             empty,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [PW-1:0]    wr_ptr, rd_ptr;
  logic             do_wr, do_rd;

  assign empty = (count == 0);
  assign full  = (count == ($clog2(DEPTH+1))'(DEPTH));
  assign do_rd = rd_en && !empty;
  assign do_wr = wr_en && (!full || do_rd);

  function automatic logic [PW-1:0] next_ptr(logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (do_wr) mem[wr_ptr] <= din;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wr_ptr     <= '0;
      rd_ptr     <= '0;
      count      <= '0;
      dout       <= '0;
      dout_valid <= 1'b0;
      overflow   <= 1'b0;
    end else begin
      overflow   <= wr_en && !do_wr;
      dout_valid <= do_rd;
      if (do_rd) begin
        dout   <= mem[rd_ptr];
        rd_ptr <= next_ptr(rd_ptr);
      end
      if (do_wr) wr_ptr <= next_ptr(wr_ptr);
      case ({do_wr, do_rd})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: count <= count;
      endcase
    end
  end

  a_count_in_range: assert property (@(posedge clk) disable iff (!rst_n)
    count <= ($clog2(DEPTH+1))'(DEPTH));
endmodule

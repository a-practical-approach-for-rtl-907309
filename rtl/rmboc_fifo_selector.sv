// rmboc_fifo_selector: moves commands from the three input FIFOs of a
// crosspoint (LEFT, RIGHT, PE) into the single main FIFO, so that one
// controller can serve all three directions.
//
// Arbitration is round-robin in the order LEFT, RIGHT, PE: the search for
// the next non-empty FIFO starts at the one after the last served. One
// command is moved every four cycles, in two steps of two cycles each, the
// step timing the paper gives for "read from the side FIFO" and "write into
// the main FIFO":
//   SEL  pick a non-empty input FIFO and pulse its rd_en
//   CAP  latch the word the FIFO presents (dout_valid)
//   WR   register the write to the main FIFO
//   PUT  mf_wr is high: the main FIFO takes the word at the end of this cycle
// The selector does not start a transfer while the main FIFO is full, so no
// command is lost between the input FIFOs and the main FIFO; the input FIFOs
// themselves drop what arrives while they are full. The state encoding and
// the full-check are this design's choices.
module rmboc_fifo_selector #(
  parameter int WIDTH = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  // input FIFOs, index 0 = LEFT, 1 = RIGHT, 2 = PE
  input  logic [2:0]       in_empty,
  output logic [2:0]       in_rd,
  input  logic [WIDTH-1:0] in_dout [3],
  input  logic [2:0]       in_dout_valid,
  // main FIFO write side
  input  logic             mf_full,
  output logic             mf_wr,
  output logic [WIDTH-1:0] mf_din,
  // index of the FIFO served by the transfer in progress (for observation)
  output logic [1:0]       grant
);
  typedef enum logic [1:0] {S_SEL, S_CAP, S_WR, S_PUT} state_e;
  state_e           state;
  logic [1:0]       last;   // last FIFO served
  logic [1:0]       pick;
  logic             any;
  logic [WIDTH-1:0] hold;

  // Round-robin choice: first non-empty FIFO after `last`.
  always_comb begin
    pick = last;
    any  = 1'b0;
    for (int i = 1; i <= 3; i++) begin
      automatic logic [1:0] c = 2'((int'(last) + i) % 3);
      if (!any && !in_empty[c]) begin
        pick = c;
        any  = 1'b1;
      end
    end
  end

  always_comb begin
    in_rd = '0;
    if (rst_n && state == S_SEL && any && !mf_full) in_rd[pick] = 1'b1;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state  <= S_SEL;
      last   <= 2'd2;          // so that LEFT is served first after reset
      grant  <= 2'd0;
      hold   <= '0;
      mf_wr  <= 1'b0;
      mf_din <= '0;
    end else begin
      mf_wr <= 1'b0;
      unique case (state)
        S_SEL: if (any && !mf_full) begin
          grant <= pick;
          last  <= pick;
          state <= S_CAP;
        end
        S_CAP: begin
          hold  <= in_dout[grant];
          state <= S_WR;
        end
        S_WR: begin
          mf_wr  <= 1'b1;
          mf_din <= hold;
          state  <= S_PUT;
        end
        S_PUT: state <= S_SEL;
      endcase
    end
  end

  a_capture_valid: assert property (@(posedge clk) disable iff (!rst_n)
    state == S_CAP |-> in_dout_valid[grant]);
  a_one_read: assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0(in_rd));
endmodule

// onesa_l2_feed: an L2 input or L2 weight buffer.
//
// The L2 buffers of the rows (input side) and of the columns (weight side)
// each form a daisy chain fed by an L3 buffer. A beat on the chain carries a
// destination index; the buffer whose IDX matches stores the vector at its
// next free address, every other beat is passed on combinationally to the
// next buffer. Capture is enabled only while load_en is high, and clear resets
// the write address at the start of a tile. count tells the controller how
// many vectors are held.
//
// When the controller issues a read (rd_en, rd_addr, rd_ctrl, the same in
// every L2 buffer and cycle), the stored vector and its control go through a
// SKEW-stage delay line onto bus, the edge of the PE array. Row i and
// column j are delayed by i and j cycles, so input and weight meet in PE
// (i,j) on the same cycle. Read-to-bus latency is SKEW+1 cycles. DEPTH
// vectors of 16 INT16 (0.5 KB) as in the paper's buffer table; the chain
// addressing, the skew placement here and the absence of ping-pong
// buffering are this design's choices.
module onesa_l2_feed
  import onesa_pkg::*;
#(
  parameter int unsigned IDX   = 0,
  parameter int unsigned DEPTH = 16,
  parameter int unsigned SKEW  = 0
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             load_en,
  input  logic             ch_in_valid,
  output logic             ch_in_ready,
  input  beat_t            ch_in_data,
  output logic             ch_out_valid,
  input  logic             ch_out_ready,
  output beat_t            ch_out_data,
  input  logic             rd_en,
  input  logic [ENT_W-1:0] rd_addr,
  input  ctrl_t            rd_ctrl,
  output sa_bus_t          bus,
  output logic [ENT_W-1:0] count
);
  vec_t mem [DEPTH];
  logic mine, cap;

  assign mine         = (ch_in_data.dest == IDX_W'(IDX));
  assign ch_out_valid = ch_in_valid && !mine;
  assign ch_out_data  = ch_in_data;
  assign ch_in_ready  = mine ? (load_en && count < ENT_W'(DEPTH)) : ch_out_ready;
  assign cap          = ch_in_valid && ch_in_ready && mine;

  always_ff @(posedge clk) begin
    if (!rst_n || clear) count <= '0;
    else if (cap)        count <= count + 1'b1;
    if (cap) mem[count[$clog2(DEPTH)-1:0]] <= ch_in_data.data;
  end

  // read stage followed by the skew delay line
  sa_bus_t pipe [SKEW+1];
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int s = 0; s <= SKEW; s++) pipe[s].valid <= 1'b0;
    end else begin
      pipe[0].valid <= rd_en;
      for (int s = 1; s <= SKEW; s++) pipe[s].valid <= pipe[s-1].valid;
    end
    pipe[0].ctrl <= rd_ctrl;
    pipe[0].data <= mem[rd_addr[$clog2(DEPTH)-1:0]];
    for (int s = 1; s <= SKEW; s++) begin
      pipe[s].ctrl <= pipe[s-1].ctrl;
      pipe[s].data <= pipe[s-1].data;
    end
  end
  assign bus = pipe[SKEW];

  rd_in_range: assert property (@(posedge clk) disable iff (!rst_n)
    rd_en |-> (rd_addr < count));

endmodule

// onesa_l3_in: L3 input or L3 weight buffer.
//
// The paper's L3 input and L3 weight buffers each hold a data rearrange unit
// followed by an Input FIFO; this module chains the two: beats from DRAM
// enter onesa_rearrange (pass-through in GEMM mode, interleaving in MHP
// mode) and the resulting vectors wait in a FIFO of FIFO_DEPTH vectors
// (0.28 KB of INT16 in the paper's buffer table) until the first L2 buffer
// of the chain takes them. valid/ready on both sides; at least two cycles
// from input to output.
module onesa_l3_in
  import onesa_pkg::*;
#(
  parameter bit          IS_WEIGHT  = 1'b0,
  parameter int unsigned FIFO_DEPTH = 9
) (
  input  logic  clk,
  input  logic  rst_n,
  input  mode_e mode,
  input  logic  in_valid,
  output logic  in_ready,
  input  beat_t in_data,
  output logic  out_valid,
  input  logic  out_ready,
  output beat_t out_data,
  output logic [$clog2(FIFO_DEPTH+1)-1:0] fifo_count
);
  logic  r_valid, r_ready;
  beat_t r_data;

  onesa_rearrange #(.IS_WEIGHT(IS_WEIGHT)) u_rearrange (
    .clk      (clk),
    .rst_n    (rst_n),
    .mode     (mode),
    .in_valid (in_valid),
    .in_ready (in_ready),
    .in_data  (in_data),
    .out_valid(r_valid),
    .out_ready(r_ready),
    .out_data (r_data)
  );

  onesa_sync_fifo #(.T(beat_t), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (r_valid),
    .in_ready (r_ready),
    .in_data  (r_data),
    .out_valid(out_valid),
    .out_ready(out_ready),
    .out_data (out_data),
    .count    (fifo_count)
  );

endmodule

// onesa_drain_node: one buffer of the result drain chain (L1 or L2 output).
//
// Results leave the array along a chain: the L1 buffer of each PE takes the
// PE's finished entries and those coming from the L1 to its left and passes
// them right; at the end of a row the L2 output buffer takes the row's stream
// and the stream from the L2 output above it and passes it down; the last L2
// output feeds the L3 output buffer. This module is one such node: a FIFO of
// DEPTH tagged entries (onesa_sync_fifo) with two inputs. When both inputs
// offer an entry in the same cycle the upstream one is taken and the local
// one waits (valid/ready, nothing is lost). Throughput one entry per cycle;
// latency one cycle. The chain topology follows the paper's figures; FIFO
// depth in entries, the arbitration and the handshake are this design's.
module onesa_drain_node
  import onesa_pkg::*;
#(
  parameter int unsigned DEPTH = 2
) (
  input  logic clk,
  input  logic rst_n,
  input  logic loc_valid,
  output logic loc_ready,
  input  out_t loc_data,
  input  logic up_valid,
  output logic up_ready,
  input  out_t up_data,
  output logic dn_valid,
  input  logic dn_ready,
  output out_t dn_data
);
  logic f_ready;
  out_t f_data;
  logic [$clog2(DEPTH+1)-1:0] f_count;

  assign up_ready  = f_ready;
  assign loc_ready = f_ready && !up_valid;
  assign f_data    = up_valid ? up_data : loc_data;

  onesa_sync_fifo #(.T(out_t), .DEPTH(DEPTH)) u_fifo (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (up_valid || loc_valid),
    .in_ready (f_ready),
    .in_data  (f_data),
    .out_valid(dn_valid),
    .out_ready(dn_ready),
    .out_data (dn_data),
    .count    (f_count)
  );

  count_bound: assert property (@(posedge clk) disable iff (!rst_n) 32'(f_count) <= DEPTH)
    else $error("drain node FIFO count beyond its depth");

endmodule

// onesa_sync_fifo: synchronous FIFO with valid/ready on both sides.
//
// Storage is a register array of DEPTH entries of type T with a wrap-around
// read and write pointer and an occupancy counter. in_ready is high while an
// entry is free; out_valid while one is held. Push and pop may happen in the
// same cycle. Data appears at the output one cycle after it is pushed (no
// fall-through). Synchronous active-low reset empties the FIFO; the contents
// are not reset. Used for the Input FIFOs of the L3 input and weight buffers,
// the three FIFOs of the L3 output buffer and the drain-chain buffers.
module onesa_sync_fifo #(
  parameter type         T     = logic [7:0],
  parameter int unsigned DEPTH = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  T     in_data,
  output logic out_valid,
  input  logic out_ready,
  output T     out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  T mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic push, pop;

  assign in_ready  = (count < ($clog2(DEPTH+1))'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rp];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  function automatic logic [AW-1:0] inc(logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (push) begin
        mem[wp] <= in_data;
        wp      <= inc(wp);
      end
      if (pop) rp <= inc(rp);
      if (push && !pop)      count <= count + 1'b1;
      else if (pop && !push) count <= count - 1'b1;
    end
  end

endmodule

// onesa_pe: ONE-SA processing element with 16 MACs and two control switches.
//
// Data path: the input vector arrives from the left into Reg input, the weight
// vector from above into Reg weight. Switch C1 decides whether the registered
// vectors are forwarded to the right and downward neighbours; switch C2
// decides whether they enter the 16 multipliers. The products go to the
// multi-layer accumulator (onesa_accum_tree), whose result is written to the
// output buffer.
//
//   mode      PE position   C1  C2  behaviour
//   GEMM      any           on  on  conventional PE: forward and multiply-accumulate
//   MHP       diagonal      off on  computation PE: compute locally, forward nothing
//   MHP       off-diagonal  on  off transmission PE: forward only, no compute
//
// GEMM: the full tree sum of the 16 products is added to output-buffer entry
// ctrl.slot (cleared first when ctrl.first). MHP: the eight first-layer sums
// k*x + 1*b are written to the eight lanes of entry ctrl.slot, no
// accumulation. This follows the paper. When ctrl.last is seen the entry is
// marked full; full entries leave in slot order through the o_* valid/ready
// port, rescaled to INT16 (>>> FRAC, saturated), tagged {ROW, COL, slot}.
// GEMM entries carry their result in lane 0 and zero elsewhere.
//
// Timing: one register per hop (a_out/w_out are the registered vectors), the
// compute result is written in the cycle after the vectors are registered,
// and a completed entry is offered on o_* the cycle after that. clear marks
// every output-buffer entry empty at the start of a tile; the sums themselves
// are kept, so a sum held over from the previous operation can be continued. The output-stationary dataflow,
// the slot/first/last control, the fixed-point format and the drain handshake
// are this design's choices. Reset is synchronous, active low.
module onesa_pe
  import onesa_pkg::*;
#(
  parameter int unsigned ROW        = 0,
  parameter int unsigned COL        = 0,
  parameter int unsigned OBUF_DEPTH = 6
) (
  input  logic    clk,
  input  logic    rst_n,
  input  mode_e   mode,
  input  logic    clear,
  input  sa_bus_t a_in,
  input  sa_bus_t w_in,
  output sa_bus_t a_out,
  output sa_bus_t w_out,
  output logic    o_valid,
  input  logic    o_ready,
  output out_t    o_data
);
  localparam bit DIAG = (ROW == COL);

  logic c1, c2;
  assign c1 = (mode == MODE_GEMM) || !DIAG;
  assign c2 = (mode == MODE_GEMM) ||  DIAG;

  // Reg input / Reg weight
  sa_bus_t a_reg, w_reg;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      a_reg.valid <= 1'b0;
      w_reg.valid <= 1'b0;
    end else begin
      a_reg.valid <= a_in.valid;
      w_reg.valid <= w_in.valid;
    end
    a_reg.ctrl <= a_in.ctrl;
    a_reg.data <= a_in.data;
    w_reg.ctrl <= w_in.ctrl;
    w_reg.data <= w_in.data;
  end

  // C1: forwarding switch
  always_comb begin
    a_out       = a_reg;
    w_out       = w_reg;
    a_out.valid = a_reg.valid && c1;
    w_out.valid = w_reg.valid && c1;
  end

  // C2: multipliers and accumulator
  logic fire;
  assign fire = c2 && a_reg.valid && w_reg.valid;

  acc_t prod [SIMD];
  acc_t pair [LANES];
  acc_t total;
  always_comb
    for (int m = 0; m < SIMD; m++)
      prod[m] = acc_t'(a_reg.data[m]) * acc_t'(w_reg.data[m]);

  onesa_accum_tree #(.N(SIMD), .W(ACCW)) u_tree (
    .prod (prod),
    .pair (pair),
    .total(total)
  );

  // Output buffer
  acc_t obuf [OBUF_DEPTH][LANES];
  logic [OBUF_DEPTH-1:0] full;
  logic [SLOT_W-1:0]     dptr;
  logic                  drain;

  assign drain = o_valid && o_ready;

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      full <= '0;
      dptr <= '0;
    end else begin
      if (fire && a_reg.ctrl.last) full[a_reg.ctrl.slot] <= 1'b1;
      if (drain) begin
        full[dptr] <= 1'b0;
        dptr       <= (dptr == SLOT_W'(OBUF_DEPTH - 1)) ? '0 : dptr + 1'b1;
      end
    end
    if (fire) begin
      if (mode == MODE_GEMM) begin
        obuf[a_reg.ctrl.slot][0] <= (a_reg.ctrl.first ? acc_t'(0) : obuf[a_reg.ctrl.slot][0]) + total;
        for (int l = 1; l < LANES; l++) obuf[a_reg.ctrl.slot][l] <= '0;
      end else begin
        for (int l = 0; l < LANES; l++) obuf[a_reg.ctrl.slot][l] <= pair[l];
      end
    end
  end

  assign o_valid     = full[dptr];
  assign o_data.row  = IDX_W'(ROW);
  assign o_data.col  = IDX_W'(COL);
  assign o_data.slot = dptr;
  always_comb
    for (int l = 0; l < LANES; l++) o_data.data[l] = requant(obuf[dptr][l]);

  // A computing PE must see input and weight together.
  a_w_aligned: assert property (@(posedge clk) disable iff (!rst_n)
    (c2 && (a_reg.valid || w_reg.valid)) |-> (a_reg.valid == w_reg.valid));
  // A slot is never overwritten before it has been drained.
  no_overwrite: assert property (@(posedge clk) disable iff (!rst_n || clear)
    (fire && a_reg.ctrl.first) |-> !full[a_reg.ctrl.slot]);

endmodule

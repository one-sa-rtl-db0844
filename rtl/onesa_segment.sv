// onesa_segment: data shift and scale module of the data addressing unit.
//
// Computes the segment number of one element for the capped piecewise-linear
// approximation. Because segment lengths are powers of two, the division by
// the segment length is an arithmetic right shift by `shift` bits of the
// INT16 fixed-point value (the paper's figure marks this with a shift symbol).
// Adding `offset` moves the segment that starts at 0 to number `offset`, so
// negative inputs get non-negative numbers. The scale step caps the result,
// s = max(min(s, smax), smin), so an input outside the approximated range
// uses the boundary segment; `capped` reports that this happened.
// Example (the paper's GELU figure, segment length 1.0, four segments):
// shift = FRAC, offset = 2, smin = 0, smax = 3. Combinational. The shift
// direction, the offset and the port widths are this design's reading.
module onesa_segment
  import onesa_pkg::*;
(
  input  elem_t              x,
  input  logic [3:0]         shift,
  input  logic [SEG_W-1:0]   offset,
  input  logic [SEG_W-1:0]   smin,
  input  logic [SEG_W-1:0]   smax,
  output logic [SEG_W-1:0]   s,
  output logic               capped
);
  logic signed [DW:0] raw;   // one extra bit for the offset addition

  always_comb begin
    raw = (DW+1)'(x >>> shift) + (DW+1)'(signed'({1'b0, offset}));
    if (raw > (DW+1)'(signed'({1'b0, smax}))) begin
      s      = smax;
      capped = 1'b1;
    end else if (raw < (DW+1)'(signed'({1'b0, smin}))) begin
      s      = smin;
      capped = 1'b1;
    end else begin
      s      = raw[SEG_W-1:0];
      capped = 1'b0;
    end
  end

endmodule

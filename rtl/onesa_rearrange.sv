// onesa_rearrange: data rearrange unit of the L3 input / L3 weight buffer.
//
// A PE has only two operand channels, but y = k*x + b needs three matrices.
// In MHP mode this unit merges them into two streams, as in the paper:
//   input side  (IS_WEIGHT=0): X          -> [x0, 1, x1, 1, ..., x7, 1]
//   weight side (IS_WEIGHT=1): K and B    -> [k0, b0, k1, b1, ..., k7, b7]
// so that multiplier 2l computes k*x and multiplier 2l+1 computes 1*b, and
// the accumulator's first layer adds them. "1" is the fixed-point ONE.
//
// Framing (this design's choice): a beat carries 16 elements. On the input
// side one X beat gives two output vectors (elements 0-7, then 8-15). On the
// weight side a K beat is held, the following B beat completes the pair, and
// two output vectors follow (elements 0-7, then 8-15); both keep the dest of
// the K beat. In GEMM mode beats pass unchanged. valid/ready on both sides;
// each output vector is registered (one cycle latency). mode must not change
// while a beat is half processed.
module onesa_rearrange
  import onesa_pkg::*;
#(
  parameter bit IS_WEIGHT = 1'b0
) (
  input  logic  clk,
  input  logic  rst_n,
  input  mode_e mode,
  input  logic  in_valid,
  output logic  in_ready,
  input  beat_t in_data,
  output logic  out_valid,
  input  logic  out_ready,
  output beat_t out_data
);
  typedef enum logic [1:0] {S_IDLE, S_HAVE_K, S_HALF0, S_HALF1} state_e;

  state_e state;
  beat_t  held_a;      // X beat, or K beat
  vec_t   held_b;      // B beat
  logic   out_free;

  assign out_free = !out_valid || out_ready;

  function automatic vec_t merge(vec_t a, vec_t b, logic half, logic weight);
    vec_t v;
    for (int l = 0; l < LANES; l++) begin
      v[2*l]   = a[LANES*half + l];
      v[2*l+1] = weight ? b[LANES*half + l] : ONE;
    end
    return v;
  endfunction

  always_comb begin
    in_ready = 1'b0;
    if (mode == MODE_GEMM) in_ready = out_free && (state == S_IDLE);
    else case (state)
      S_IDLE:   in_ready = IS_WEIGHT ? 1'b1 : out_free;
      S_HAVE_K: in_ready = out_free;
      default:  in_ready = 1'b0;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      out_valid <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      case (state)
        S_IDLE: if (in_valid && in_ready) begin
          if (mode == MODE_GEMM) begin
            out_data  <= in_data;
            out_valid <= 1'b1;
          end else if (IS_WEIGHT) begin
            held_a <= in_data;
            state  <= S_HAVE_K;
          end else begin
            held_a        <= in_data;
            out_data.dest <= in_data.dest;
            out_data.data <= merge(in_data.data, '0, 1'b0, 1'b0);
            out_valid     <= 1'b1;
            state         <= S_HALF1;
          end
        end
        S_HAVE_K: if (in_valid && in_ready) begin
          held_b        <= in_data.data;
          out_data.dest <= held_a.dest;
          out_data.data <= merge(held_a.data, in_data.data, 1'b0, 1'b1);
          out_valid     <= 1'b1;
          state         <= S_HALF1;
        end
        S_HALF1: if (out_free) begin
          out_data.dest <= held_a.dest;
          out_data.data <= merge(held_a.data, held_b, 1'b1, IS_WEIGHT);
          out_valid     <= 1'b1;
          state         <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule

// onesa_pkg: types and constants shared by the ONE-SA core.
//
// Numbers: every operand is a signed 16-bit fixed-point value with FRAC
// fraction bits (Q7.8 by default). The paper quantizes networks and array to
// INT16; the position of the binary point is this design's choice. ONE is the
// constant "1" that the data rearrange unit pairs with each x so that a
// multiplier computes 1*b next to the multiplier that computes k*x.
//
// A PE holds SIMD = 16 multipliers (the paper's main configuration: 16 MACs
// per PE). In MHP mode a 16-element vector carries LANES = 8 (x,1) or (k,b)
// pairs, so a computation PE produces 8 results per vector.
package onesa_pkg;

  localparam int unsigned DW     = 16;          // element width (INT16)
  localparam int unsigned FRAC   = 8;           // fraction bits
  localparam int unsigned SIMD   = 16;          // MACs per PE
  localparam int unsigned LANES  = SIMD / 2;    // MHP results per vector
  localparam int unsigned ACCW   = 40;          // accumulator width
  localparam int unsigned SLOT_W = 3;           // output-buffer slot index
  localparam int unsigned IDX_W  = 4;           // row / column index (up to 16)
  localparam int unsigned ENT_W  = 5;           // entry counter (up to 31)
  localparam int unsigned SEG_W  = 6;           // segment number
  localparam int unsigned CYC_W  = 32;

  localparam logic signed [DW-1:0] ONE = 16'sd1 <<< FRAC;

  typedef enum logic [0:0] {
    MODE_GEMM = 1'b0,   // general matrix multiply: every PE computes and forwards
    MODE_MHP  = 1'b1    // matrix Hadamard product: diagonal PEs compute, others forward
  } mode_e;

  typedef logic signed [DW-1:0]   elem_t;
  typedef elem_t [SIMD-1:0]       vec_t;      // one PE operand vector
  typedef elem_t [LANES-1:0]      ovec_t;     // one output-buffer entry, rescaled
  typedef logic signed [ACCW-1:0] acc_t;

  // Control that travels with the input vector along a row.
  typedef struct packed {
    logic [SLOT_W-1:0] slot;    // output-buffer entry this vector contributes to
    logic              first;   // start a new accumulation
    logic              last;    // entry complete after this vector
  } ctrl_t;

  // Systolic bus between neighbouring PEs (used in both directions).
  typedef struct packed {
    logic  valid;
    ctrl_t ctrl;                // meaningful on the horizontal (input) bus only
    vec_t  data;
  } sa_bus_t;

  // A vector on its way from an L3 buffer to the L2 buffer of row/column dest.
  typedef struct packed {
    logic [IDX_W-1:0] dest;
    vec_t             data;
  } beat_t;

  // A finished output-buffer entry, tagged with where it came from.
  typedef struct packed {
    logic [IDX_W-1:0]  row;
    logic [IDX_W-1:0]  col;
    logic [SLOT_W-1:0] slot;
    ovec_t             data;
  } out_t;

  // What the L3 output buffer sends to DRAM: C with its k and b.
  typedef struct packed {
    out_t  c;
    ovec_t k;
    ovec_t b;
  } addr_out_t;

  // Configuration of one operation.
  typedef struct packed {
    mode_e            mode;
    logic [ENT_W-1:0] n_entries;   // vectors per L2 buffer in this tile
    logic [ENT_W-1:0] kchunks;     // vectors accumulated per output (GEMM)
    logic             cont;        // GEMM: continue the sums left by the previous operation
    logic             hold;        // GEMM: keep the sums in the PEs, do not drain them
  } cfg_t;

  // Rescale an accumulator (2*FRAC fraction bits) to an INT16 Q.FRAC value.
  function automatic elem_t requant(acc_t a);
    acc_t s;
    s = a >>> FRAC;
    if (s > acc_t'(32767))       return elem_t'(16'sh7fff);
    else if (s < -acc_t'(32768)) return elem_t'(16'sh8000);
    else                         return elem_t'(s[DW-1:0]);
  endfunction

endpackage

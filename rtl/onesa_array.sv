// onesa_array: the ONE-SA PE array with its result drain chain.
//
// ROWS x COLS onesa_pe instances. Input vectors enter row r at the left
// (a_in[r]) and move right one PE per cycle; weight vectors enter column c
// at the top (w_in[c]) and move down. The caller skews them (row r and
// column c delayed by r and c cycles) so that PE (r,c) sees matching
// vectors together. In GEMM mode every PE multiplies and forwards; in MHP
// mode only the diagonal PEs (r == c) compute and the others act as
// registers, so row r's data reaches PE (r,r) after r hops and stops there.
//
// Results: each PE has an L1 buffer (onesa_drain_node, L1_DEPTH entries).
// The L1 buffers of a row form a chain to the right that ends in the row's
// L2 output buffer (L2O_DEPTH entries); the L2 output buffers form a chain
// downward whose end is out_*, towards the L3 output buffer. Entries are
// tagged {row, col, slot}, so their arrival order is irrelevant. This
// layout follows the paper's architecture figure; buffer depths come from
// its buffer table (8 lanes x INT16 per entry).
module onesa_array
  import onesa_pkg::*;
#(
  parameter int unsigned ROWS       = 8,
  parameter int unsigned COLS       = 8,
  parameter int unsigned OBUF_DEPTH = 6,
  parameter int unsigned L1_DEPTH   = 2,
  parameter int unsigned L2O_DEPTH  = 32
) (
  input  logic    clk,
  input  logic    rst_n,
  input  mode_e   mode,
  input  logic    clear,
  input  sa_bus_t a_in [ROWS],
  input  sa_bus_t w_in [COLS],
  output logic    out_valid,
  input  logic    out_ready,
  output out_t    out_data
);
  sa_bus_t a_h [ROWS][COLS+1];
  sa_bus_t w_v [ROWS+1][COLS];

  // PE -> L1
  logic pe_v [ROWS][COLS];
  logic pe_r [ROWS][COLS];
  out_t pe_d [ROWS][COLS];
  // L1 chain: l1_* [r][c] is the output of L1 (r,c-1); index 0 is empty
  logic l1_v [ROWS][COLS+1];
  logic l1_r [ROWS][COLS+1];
  out_t l1_d [ROWS][COLS+1];
  // L2 output chain: l2_* [r] is the output of L2 output r-1; index 0 is empty
  logic l2_v [ROWS+1];
  logic l2_r [ROWS+1];
  out_t l2_d [ROWS+1];

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    assign a_h[r][0] = a_in[r];
    assign l1_v[r][0] = 1'b0;
    assign l1_d[r][0] = '0;
    for (genvar c = 0; c < COLS; c++) begin : g_col
      if (r == 0) begin : g_top
        assign w_v[0][c] = w_in[c];
      end
      onesa_pe #(.ROW(r), .COL(c), .OBUF_DEPTH(OBUF_DEPTH)) u_pe (
        .clk    (clk),
        .rst_n  (rst_n),
        .mode   (mode),
        .clear  (clear),
        .a_in   (a_h[r][c]),
        .w_in   (w_v[r][c]),
        .a_out  (a_h[r][c+1]),
        .w_out  (w_v[r+1][c]),
        .o_valid(pe_v[r][c]),
        .o_ready(pe_r[r][c]),
        .o_data (pe_d[r][c])
      );
      onesa_drain_node #(.DEPTH(L1_DEPTH)) u_l1 (
        .clk      (clk),
        .rst_n    (rst_n),
        .loc_valid(pe_v[r][c]),
        .loc_ready(pe_r[r][c]),
        .loc_data (pe_d[r][c]),
        .up_valid (l1_v[r][c]),
        .up_ready (l1_r[r][c]),
        .up_data  (l1_d[r][c]),
        .dn_valid (l1_v[r][c+1]),
        .dn_ready (l1_r[r][c+1]),
        .dn_data  (l1_d[r][c+1])
      );
    end
    onesa_drain_node #(.DEPTH(L2O_DEPTH)) u_l2o (
      .clk      (clk),
      .rst_n    (rst_n),
      .loc_valid(l1_v[r][COLS]),
      .loc_ready(l1_r[r][COLS]),
      .loc_data (l1_d[r][COLS]),
      .up_valid (l2_v[r]),
      .up_ready (l2_r[r]),
      .up_data  (l2_d[r]),
      .dn_valid (l2_v[r+1]),
      .dn_ready (l2_r[r+1]),
      .dn_data  (l2_d[r+1])
    );
  end
  assign l2_v[0]      = 1'b0;
  assign l2_d[0]      = '0;
  assign out_valid    = l2_v[ROWS];
  assign out_data     = l2_d[ROWS];
  assign l2_r[ROWS]   = out_ready;

endmodule

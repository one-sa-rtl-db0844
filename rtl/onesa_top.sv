// onesa_top: ONE-SA core, a systolic array that runs both matrix multiply
// and capped piecewise-linear nonlinear functions.
//
// Blocks and connections (after the paper's architecture figure):
//   x_*  -> L3 input buffer (data rearrange + Input FIFO) -> chain of ROWS
//           L2 input buffers -> rows of the PE array
//   w_*  -> L3 weight buffer (data rearrange + Input FIFO) -> chain of COLS
//           L2 weight buffers -> columns of the PE array
//   PE array -> L1 / L2 output drain chain -> L3 output buffer (data
//           addressing + C, k and Reg FIFOs) -> o_*
//   onesa_ctrl sequences one operation: load, compute, drain.
//
// A nonlinear function y = f(x) is run in two operations. (1) Intermediate
// parameter fetching: with ipf_en set, every element that reaches the L3
// output (the result of a GEMM, or X loaded straight from DRAM through ext_*
// with ext_sel set) is mapped to its segment, and the segment's slope k and
// intercept b, preloaded through tbl_*, leave on o_* next to it. (2) Matrix
// Hadamard product: X streamed on x_* and K, B on w_* (K beat then B beat)
// are interleaved by the rearrange units, and the diagonal PEs compute
// Y = X (.) K + B, eight elements per vector.
//
// Interfaces are valid/ready streams. cfg is latched at start; the x_* and
// w_* beats of the operation are taken after start, each beat's dest being
// the row (column) it is for. done pulses when all results have been
// accepted by the L3 output buffer; results may still sit in its FIFOs,
// which drain through o_*. cycles is the length of the last operation.
// x_level / w_level report how full the L3 Input and Weight FIFOs are.
// Reset is synchronous, active low. DRAM is outside this core.
module onesa_top
  import onesa_pkg::*;
#(
  parameter int unsigned ROWS        = 8,
  parameter int unsigned COLS        = 8,
  parameter int unsigned OBUF_DEPTH  = 6,
  parameter int unsigned L1_DEPTH    = 2,
  parameter int unsigned L2_DEPTH    = 16,
  parameter int unsigned L2O_DEPTH   = 32,
  parameter int unsigned L3_DEPTH    = 9,
  parameter int unsigned NSEG        = 32,
  parameter int unsigned OFIFO_DEPTH = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  // operation
  input  logic             start,
  input  cfg_t             cfg,
  output logic             busy,
  output logic             done,
  output logic [CYC_W-1:0] cycles,
  // input and weight streams from DRAM
  input  logic             x_valid,
  output logic             x_ready,
  input  beat_t            x_data,
  input  logic             w_valid,
  output logic             w_ready,
  input  beat_t            w_data,
  // fill level of the L3 Input and Weight FIFOs, as status for the host
  output logic [$clog2(L3_DEPTH+1)-1:0] x_level,
  output logic [$clog2(L3_DEPTH+1)-1:0] w_level,
  // X loaded straight into the L3 output buffer for parameter fetching
  input  logic             ext_sel,
  input  logic             ext_valid,
  output logic             ext_ready,
  input  out_t             ext_data,
  // data addressing configuration and k/b buffer preload
  input  logic             ipf_en,
  input  logic [3:0]       seg_shift,
  input  logic [SEG_W-1:0] seg_offset,
  input  logic [SEG_W-1:0] seg_smin,
  input  logic [SEG_W-1:0] seg_smax,
  input  logic             tbl_we,
  input  logic [SEG_W-1:0] tbl_addr,
  input  elem_t            tbl_k,
  input  elem_t            tbl_b,
  output logic [CYC_W-1:0] n_capped,
  // results towards DRAM
  output logic             o_valid,
  input  logic             o_ready,
  output addr_out_t        o_data
);
  mode_e            mode;
  logic [ENT_W-1:0] n_entries;
  logic             clear, load_en, rd_en;
  logic [ENT_W-1:0] rd_addr;
  ctrl_t            rd_ctrl;

  // ---------------- L3 input / weight ----------------
  logic  xi_v, xi_r, wi_v, wi_r;
  beat_t xi_d, wi_d;

  onesa_l3_in #(.IS_WEIGHT(1'b0), .FIFO_DEPTH(L3_DEPTH)) u_l3_input (
    .clk(clk), .rst_n(rst_n), .mode(mode),
    .in_valid(x_valid), .in_ready(x_ready), .in_data(x_data),
    .out_valid(xi_v), .out_ready(xi_r), .out_data(xi_d), .fifo_count(x_level));
  onesa_l3_in #(.IS_WEIGHT(1'b1), .FIFO_DEPTH(L3_DEPTH)) u_l3_weight (
    .clk(clk), .rst_n(rst_n), .mode(mode),
    .in_valid(w_valid), .in_ready(w_ready), .in_data(w_data),
    .out_valid(wi_v), .out_ready(wi_r), .out_data(wi_d), .fifo_count(w_level));

  // ---------------- L2 input / weight chains ----------------
  logic  xc_v [ROWS+1];
  logic  xc_r [ROWS+1];
  beat_t xc_d [ROWS+1];
  logic  wc_v [COLS+1];
  logic  wc_r [COLS+1];
  beat_t wc_d [COLS+1];
  sa_bus_t a_bus [ROWS];
  sa_bus_t w_bus [COLS];
  logic [ENT_W-1:0] x_l2cnt [ROWS];
  logic [ENT_W-1:0] w_l2cnt [COLS];
  logic [ROWS-1:0]  x_full;
  logic [COLS-1:0]  w_full;

  assign xc_v[0] = xi_v;
  assign xc_d[0] = xi_d;
  assign xi_r    = xc_r[0];
  assign xc_r[ROWS] = 1'b0;   // beats for rows that do not exist stall the chain
  assign wc_v[0] = wi_v;
  assign wc_d[0] = wi_d;
  assign wi_r    = wc_r[0];
  assign wc_r[COLS] = 1'b0;

  for (genvar r = 0; r < ROWS; r++) begin : g_l2_in
    onesa_l2_feed #(.IDX(r), .DEPTH(L2_DEPTH), .SKEW(r)) u_l2 (
      .clk(clk), .rst_n(rst_n), .clear(clear), .load_en(load_en),
      .ch_in_valid(xc_v[r]), .ch_in_ready(xc_r[r]), .ch_in_data(xc_d[r]),
      .ch_out_valid(xc_v[r+1]), .ch_out_ready(xc_r[r+1]), .ch_out_data(xc_d[r+1]),
      .rd_en(rd_en), .rd_addr(rd_addr), .rd_ctrl(rd_ctrl),
      .bus(a_bus[r]), .count(x_l2cnt[r]));
    assign x_full[r] = (x_l2cnt[r] == n_entries);
  end
  for (genvar c = 0; c < COLS; c++) begin : g_l2_w
    onesa_l2_feed #(.IDX(c), .DEPTH(L2_DEPTH), .SKEW(c)) u_l2 (
      .clk(clk), .rst_n(rst_n), .clear(clear), .load_en(load_en),
      .ch_in_valid(wc_v[c]), .ch_in_ready(wc_r[c]), .ch_in_data(wc_d[c]),
      .ch_out_valid(wc_v[c+1]), .ch_out_ready(wc_r[c+1]), .ch_out_data(wc_d[c+1]),
      .rd_en(rd_en), .rd_addr(rd_addr), .rd_ctrl(rd_ctrl),
      .bus(w_bus[c]), .count(w_l2cnt[c]));
    assign w_full[c] = (w_l2cnt[c] == n_entries);
  end

  // ---------------- PE array ----------------
  logic arr_v, arr_r;
  out_t arr_d;

  onesa_array #(.ROWS(ROWS), .COLS(COLS), .OBUF_DEPTH(OBUF_DEPTH),
                .L1_DEPTH(L1_DEPTH), .L2O_DEPTH(L2O_DEPTH)) u_array (
    .clk(clk), .rst_n(rst_n), .mode(mode), .clear(clear),
    .a_in(a_bus), .w_in(w_bus),
    .out_valid(arr_v), .out_ready(arr_r), .out_data(arr_d));

  // ---------------- L3 output with data addressing ----------------
  logic da_v, da_r;
  out_t da_d;

  assign da_v      = ext_sel ? ext_valid : arr_v;
  assign da_d      = ext_sel ? ext_data  : arr_d;
  assign arr_r     = !ext_sel && da_r;
  assign ext_ready =  ext_sel && da_r;

  onesa_data_addr #(.NSEG(NSEG), .FIFO_DEPTH(OFIFO_DEPTH)) u_l3_output (
    .clk(clk), .rst_n(rst_n), .ipf_en(ipf_en),
    .shift(seg_shift), .offset(seg_offset), .smin(seg_smin), .smax(seg_smax),
    .tbl_we(tbl_we), .tbl_addr(tbl_addr), .tbl_k(tbl_k), .tbl_b(tbl_b),
    .in_valid(da_v), .in_ready(da_r), .in_data(da_d),
    .out_valid(o_valid), .out_ready(o_ready), .out_data(o_data),
    .n_capped(n_capped));

  // ---------------- controller ----------------
  onesa_ctrl #(.ROWS(ROWS), .COLS(COLS), .L2_DEPTH(L2_DEPTH), .OBUF_DEPTH(OBUF_DEPTH)) u_ctrl (
    .clk(clk), .rst_n(rst_n), .start(start), .cfg(cfg),
    .all_loaded_in(&x_full), .all_loaded_w(&w_full),
    .out_fire(arr_v && arr_r),
    .mode(mode), .n_entries(n_entries), .clear(clear), .load_en(load_en),
    .rd_en(rd_en), .rd_addr(rd_addr), .rd_ctrl(rd_ctrl),
    .busy(busy), .done(done), .cycles(cycles));

endmodule

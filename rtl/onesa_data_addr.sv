// onesa_data_addr: L3 output buffer with data addressing (intermediate
// parameter fetching).
//
// Every output entry (eight INT16 lanes, tagged) that reaches the L3 output
// is pushed into the C FIFO. With ipf_en set, each lane is also sent through
// the data shift and scale module (onesa_segment), and the capped segment
// number addresses the k buffer and the b buffer; the fetched slopes go into
// the k FIFO and the intercepts into the Reg FIFO. The three FIFOs are
// pushed and popped together, so each output beat carries an element of C
// together with its k and b, ready to be written back to DRAM as matrices K
// and B for the following Hadamard product. With ipf_en clear, k and b are
// zero. The structure (shift, cap, two parameter buffers, three FIFOs)
// follows the paper; the register-array buffers with one read port per lane,
// the joint FIFO handshake and the preload port are this design's.
//
// Interface: in_* accepts an entry when all FIFOs have room; out_* offers the
// oldest triple. tbl_we writes k and b of segment tbl_addr (the paper loads
// them together with X before the operation). Latency input to output: one
// cycle. n_capped counts lanes whose segment was capped (IPF only).
module onesa_data_addr
  import onesa_pkg::*;
#(
  parameter int unsigned NSEG       = 32,
  parameter int unsigned FIFO_DEPTH = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             ipf_en,
  input  logic [3:0]       shift,
  input  logic [SEG_W-1:0] offset,
  input  logic [SEG_W-1:0] smin,
  input  logic [SEG_W-1:0] smax,
  input  logic             tbl_we,
  input  logic [SEG_W-1:0] tbl_addr,
  input  elem_t            tbl_k,
  input  elem_t            tbl_b,
  input  logic             in_valid,
  output logic             in_ready,
  input  out_t             in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output addr_out_t        out_data,
  output logic [CYC_W-1:0] n_capped
);
  localparam int unsigned TAW = $clog2(NSEG);

  // k buffer and b buffer
  elem_t kbuf [NSEG];
  elem_t bbuf [NSEG];
  always_ff @(posedge clk)
    if (tbl_we && int'(tbl_addr) < NSEG) begin   // writes past the table are dropped
      kbuf[tbl_addr[TAW-1:0]] <= tbl_k;
      bbuf[tbl_addr[TAW-1:0]] <= tbl_b;
    end

  // shift + scale, then fetch
  logic [SEG_W-1:0] seg    [LANES];
  logic             capped [LANES];
  ovec_t            k_v, b_v;
  for (genvar l = 0; l < LANES; l++) begin : g_lane
    onesa_segment u_seg (
      .x     (in_data.data[l]),
      .shift (shift),
      .offset(offset),
      .smin  (smin),
      .smax  (smax),
      .s     (seg[l]),
      .capped(capped[l])
    );
    assign k_v[l] = ipf_en ? kbuf[seg[l][TAW-1:0]] : '0;
    assign b_v[l] = ipf_en ? bbuf[seg[l][TAW-1:0]] : '0;
  end

  // C FIFO, k FIFO and Reg FIFO
  logic push, pop;
  logic c_rdy, k_rdy, b_rdy, c_vld, k_vld, b_vld;
  logic [$clog2(FIFO_DEPTH+1)-1:0] c_cnt, k_cnt, b_cnt;

  assign in_ready  = c_rdy && k_rdy && b_rdy;
  assign push      = in_valid && in_ready;
  assign out_valid = c_vld && k_vld && b_vld;
  assign pop       = out_valid && out_ready;

  onesa_sync_fifo #(.T(out_t), .DEPTH(FIFO_DEPTH)) u_c_fifo (
    .clk(clk), .rst_n(rst_n), .in_valid(push), .in_ready(c_rdy), .in_data(in_data),
    .out_valid(c_vld), .out_ready(pop), .out_data(out_data.c), .count(c_cnt));
  onesa_sync_fifo #(.T(ovec_t), .DEPTH(FIFO_DEPTH)) u_k_fifo (
    .clk(clk), .rst_n(rst_n), .in_valid(push), .in_ready(k_rdy), .in_data(k_v),
    .out_valid(k_vld), .out_ready(pop), .out_data(out_data.k), .count(k_cnt));
  onesa_sync_fifo #(.T(ovec_t), .DEPTH(FIFO_DEPTH)) u_reg_fifo (
    .clk(clk), .rst_n(rst_n), .in_valid(push), .in_ready(b_rdy), .in_data(b_v),
    .out_valid(b_vld), .out_ready(pop), .out_data(out_data.b), .count(b_cnt));

  always_ff @(posedge clk) begin
    if (!rst_n) n_capped <= '0;
    else if (push && ipf_en) begin
      automatic logic [CYC_W-1:0] n = '0;
      for (int l = 0; l < LANES; l++) n += CYC_W'(capped[l]);
      n_capped <= n_capped + n;
    end
  end

  fifos_in_step: assert property (@(posedge clk) disable iff (!rst_n)
    (c_cnt == k_cnt) && (k_cnt == b_cnt));

endmodule

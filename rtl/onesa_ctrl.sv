// onesa_ctrl: operation controller of the ONE-SA core.
//
// Runs one tile operation in four phases:
//   IDLE     wait for start; latch cfg (mode, n_entries, kchunks, cont, hold)
//   LOAD     one cycle of clear, then let the L2 buffers capture vectors
//            from the L3 chains until every L2 buffer holds n_entries
//   COMPUTE  n_entries cycles: read entry e of every L2 buffer at once,
//            with control slot = e / kchunks, first/last at the chunk
//            boundaries (kchunks is 1 in MHP mode)
//   DRAIN    wait until the L3 output buffer has accepted every result:
//            ROWS*COLS entries per slot in GEMM, one per diagonal PE and
//            vector in MHP
// then wait FLUSH cycles for the array to empty and pulse done.
// Long dot products: with cfg.cont set the first vector of each slot adds to
// the sum the PE already holds instead of starting a new one, and with
// cfg.hold set no slot is closed, so nothing is drained and the sums stay
// in the output buffers. A reduction over K = m * 16 * kchunks terms is then
// m GEMM operations: the first with hold, the middle ones with cont and hold,
// the last with cont. Both flags are ignored in MHP mode. The latched mode
// drives the whole core during the operation, so switching between GEMM and
// MHP happens between operations.
// cycles counts the cycles of the last operation, start to done. The paper
// leaves the control units to the HLS framework it builds on; this phase
// sequence is this design's. cfg must satisfy 1 <= n_entries <= L2_DEPTH,
// n_entries a multiple of kchunks and at most OBUF_DEPTH slots.
module onesa_ctrl
  import onesa_pkg::*;
#(
  parameter int unsigned ROWS       = 8,
  parameter int unsigned COLS       = 8,
  parameter int unsigned L2_DEPTH   = 16,
  parameter int unsigned OBUF_DEPTH = 6
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  cfg_t             cfg,
  input  logic             all_loaded_in,   // every L2 input buffer holds n_entries
  input  logic             all_loaded_w,    // every L2 weight buffer holds n_entries
  input  logic             out_fire,        // one result accepted by the L3 output
  output mode_e            mode,
  output logic [ENT_W-1:0] n_entries,
  output logic             clear,
  output logic             load_en,
  output logic             rd_en,
  output logic [ENT_W-1:0] rd_addr,
  output ctrl_t            rd_ctrl,
  output logic             busy,
  output logic             done,
  output logic [CYC_W-1:0] cycles
);
  typedef enum logic [1:0] {S_IDLE, S_LOAD, S_COMPUTE, S_DRAIN} state_e;
  localparam int unsigned NDIAG = (ROWS < COLS) ? ROWS : COLS;

  localparam int unsigned FLUSH = ROWS + COLS + 4;

  state_e           state;
  logic             cont, hold;
  logic [7:0]       flush;
  logic [ENT_W-1:0] kchunks, chunk;
  logic [SLOT_W-1:0] slot;
  logic [CYC_W-1:0] expected, received;

  assign busy          = (state != S_IDLE);
  assign load_en       = (state == S_LOAD) && !clear;
  assign rd_en         = (state == S_COMPUTE);
  assign rd_ctrl.slot  = slot;
  assign rd_ctrl.first = (chunk == '0) && !cont;
  assign rd_ctrl.last  = (chunk == kchunks - 1'b1) && !hold;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      clear     <= 1'b0;
      done      <= 1'b0;
      mode      <= MODE_GEMM;
      n_entries <= '0;
      kchunks   <= 5'd1;
      cont      <= 1'b0;
      hold      <= 1'b0;
      cycles    <= '0;
    end else begin
      done  <= 1'b0;
      clear <= 1'b0;
      if (busy) cycles <= cycles + 1'b1;
      if (busy && out_fire) received <= received + 1'b1;
      case (state)
        S_IDLE: if (start) begin
          mode      <= cfg.mode;
          n_entries <= cfg.n_entries;
          kchunks   <= (cfg.mode == MODE_MHP) ? ENT_W'(1) : cfg.kchunks;
          cont      <= (cfg.mode == MODE_GEMM) && cfg.cont;
          hold      <= (cfg.mode == MODE_GEMM) && cfg.hold;
          clear     <= 1'b1;
          cycles    <= '0;
          received  <= '0;
          expected  <= '0;
          state     <= S_LOAD;
        end
        S_LOAD: if (!clear && all_loaded_in && all_loaded_w) begin
          rd_addr <= '0;
          chunk   <= '0;
          slot    <= '0;
          state   <= S_COMPUTE;
        end
        S_COMPUTE: begin
          if (chunk == kchunks - 1'b1) begin
            if (!hold) expected <= expected + CYC_W'((mode == MODE_GEMM) ? ROWS*COLS : NDIAG);
            chunk    <= '0;
            slot     <= slot + 1'b1;
          end else begin
            chunk <= chunk + 1'b1;
          end
          rd_addr <= rd_addr + 1'b1;
          flush   <= '0;
          if (rd_addr == n_entries - 1'b1) state <= S_DRAIN;
        end
        S_DRAIN: begin
          if (flush != 8'(FLUSH)) flush <= flush + 1'b1;
          if (received == expected && flush == 8'(FLUSH)) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  cfg_legal: assert property (@(posedge clk) disable iff (!rst_n)
    (start && state == S_IDLE) |-> (cfg.n_entries != 0 && cfg.n_entries <= ENT_W'(L2_DEPTH) &&
      (cfg.mode == MODE_MHP || (cfg.kchunks != 0 && (cfg.n_entries % cfg.kchunks) == 0 &&
        (cfg.n_entries / cfg.kchunks) <= ENT_W'(OBUF_DEPTH))) &&
      (cfg.mode == MODE_GEMM || cfg.n_entries <= ENT_W'(OBUF_DEPTH))));

endmodule

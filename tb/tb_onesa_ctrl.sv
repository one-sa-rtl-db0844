// tb_onesa_ctrl: runs the controller through a GEMM operation (12 entries,
// 4 chunks per output) and an MHP operation (5 entries). Checks the clear
// pulse, that load_en stays high until both load flags are set, the read
// sequence (address, slot, first, last) on consecutive cycles, that done
// waits for exactly ROWS*COLS*slots (GEMM) or min(ROWS,COLS)*entries (MHP)
// accepted results, the flush wait before done, the cont/hold flags that
// suppress first/last (GEMM only), and the reported cycle count.
module tb_onesa_ctrl;
  import onesa_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  cfg_t cfg;
  logic li = 0, lw = 0, fire = 0;
  mode_e mode;
  logic [ENT_W-1:0] n_entries, rd_addr;
  logic clear, load_en, rd_en, busy, done;
  ctrl_t rd_ctrl;
  logic [CYC_W-1:0] cycles;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  onesa_ctrl #(.ROWS(8), .COLS(8)) dut (.clk, .rst_n, .start, .cfg, .all_loaded_in(li), .all_loaded_w(lw),
    .out_fire(fire), .mode, .n_entries, .clear, .load_en, .rd_en, .rd_addr, .rd_ctrl, .busy, .done, .cycles);

  initial begin
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit c, string s);
    checks++;
    if (!c) begin failures++; $display("FAIL %s at %0t", s, $time); end
  endtask

  task automatic op(mode_e m, int n, int k, bit cont, bit hold, int exp_out);
    int t0, reads, fires, tl, g;
    bit ec, eh;
    cfg = '{mode: m, n_entries: ENT_W'(n), kchunks: ENT_W'(k), cont: cont, hold: hold};
    ec = cont && m == MODE_GEMM;
    eh = hold && m == MODE_GEMM;
    start = 1; @(posedge clk); #1 start = 0;
    t0 = 1;
    chk(clear && busy && mode == m, "clear pulse and mode latched");
    @(posedge clk); #1; t0++;
    chk(!clear && load_en, "load phase");
    repeat (5) begin @(posedge clk); #1; t0++; chk(load_en && !rd_en, "waits for loads"); end
    li = 1; @(posedge clk); #1; t0++;
    chk(load_en, "waits for both");
    lw = 1; @(posedge clk); #1; t0++;
    li = 0; lw = 0;
    reads = 0;
    while (rd_en) begin
      int kk;
      kk = (m == MODE_MHP) ? 1 : k;
      chk(rd_addr == ENT_W'(reads) && rd_ctrl.slot == SLOT_W'(reads / kk) &&
          rd_ctrl.first == (reads % kk == 0 && !ec) && rd_ctrl.last == (reads % kk == kk - 1 && !eh), "read sequence");
      reads++;
      @(posedge clk); #1; t0++;
    end
    chk(reads == n, "read count");
    tl = t0;
    fires = 0;
    while (fires < exp_out) begin
      chk(!done && busy, "not done before all results");
      fire = ($urandom_range(0, 1) == 1);
      if (fire) fires++;
      @(posedge clk); #1; t0++;
      fire = 0;
    end
    g = 0;
    while (!done && g < 100) begin
      @(posedge clk); #1; t0++; g++;
    end
    chk(done && !busy, "done after last result");
    chk(t0 - tl >= 8 + 8 + 4, "done waits for the array to flush");
    chk(cycles == CYC_W'(t0 - 1), "cycle count");
    if (cycles != CYC_W'(t0 - 1)) $display("cycles %0d exp %0d", cycles, t0 - 1);
    @(posedge clk); #1;
    chk(!done, "done is a pulse");
  endtask

  initial begin
    cfg = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;
    chk(!busy && !rd_en, "idle after reset");
    op(MODE_GEMM, 12, 4, 0, 0, 64 * 3);
    op(MODE_MHP, 5, 3, 1, 1, 8 * 5);
    op(MODE_GEMM, 16, 16, 0, 1, 0);
    op(MODE_GEMM, 16, 16, 1, 1, 0);
    op(MODE_GEMM, 16, 16, 1, 0, 64);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_onesa_top: end-to-end test of the ONE-SA core at its full size (8x8
// PEs, 16 MACs each; no parameter is overridden). The testbench acts as the
// DRAM side and runs a GELU layer the way the architecture intends:
//
//   op 1  GEMM, n_entries 6, kchunks 3 (two output slots of 48-term dot
//         products per PE). With ipf_en set, the L3 output buffer fetches k
//         and b of each result from a preloaded 32-segment GELU table
//         (granularity 0.25 on [-4, 4)). Checks all 128 results and their k, b.
//   op 2  MHP on the same data: X = the GEMM results, K and B = the fetched
//         parameters, sent through the rearrange units; the diagonal PEs
//         return Y = X (.) K + B. Checks every y against an integer model and
//         against the real GELU (error bound inside the table range).
//   op 3  GEMM again (mode switch back) as three operations (hold, cont+hold,
//         cont) so each result is a 144-term dot product; then X loaded straight into the L3
//         output (ext_*) for parameter fetching, with values beyond the
//         table range so the segment cap is used.
//
// Mechanisms counted, each must occur: GEMM ops, MHP ops, mode switches,
// capped segments, output back-pressure, input-chain back-pressure, direct
// X loads. The watchdog stops the run after 200000 cycles.
module tb_onesa_top;
  import onesa_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  cfg_t cfg = '0;
  logic busy, done;
  logic [CYC_W-1:0] cycles, n_capped;
  logic x_valid = 0, x_ready, w_valid = 0, w_ready;
  beat_t x_data = '0, w_data = '0;
  logic [3:0] x_level, w_level;
  logic ext_sel = 0, ext_valid = 0, ext_ready;
  out_t ext_data = '0;
  logic ipf_en = 0, tbl_we = 0;
  logic [SEG_W-1:0] tbl_addr = '0;
  elem_t tbl_k = '0, tbl_b = '0;
  logic o_valid, o_ready = 0;
  addr_out_t o_data;
  int checks = 0, failures = 0;
  int n_hold = 0, n_gemm = 0, n_mhp = 0, n_switch = 0, n_ostall = 0, n_xstall = 0, n_ext = 0;
  always #5 clk = ~clk;

  onesa_top dut (.clk, .rst_n, .start, .cfg, .busy, .done, .cycles,
    .x_valid, .x_ready, .x_data, .w_valid, .w_ready, .w_data, .x_level, .w_level,
    .ext_sel, .ext_valid, .ext_ready, .ext_data,
    .ipf_en, .seg_shift(4'd6), .seg_offset(6'd16), .seg_smin(6'd0), .seg_smax(6'd31),
    .tbl_we, .tbl_addr, .tbl_k, .tbl_b, .n_capped,
    .o_valid, .o_ready, .o_data);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- DRAM side: result collection with a throttled ready ----
  addr_out_t rq [$];
  always @(posedge clk) begin
    if (rst_n && o_valid && o_ready) rq.push_back(o_data);
    if (rst_n && o_valid && !o_ready) n_ostall++;
  end
  always @(posedge clk) #1 o_ready <= ($urandom_range(0, 9) > 2);

  task automatic chk(bit c, string s);
    checks++;
    if (!c) begin
      failures++;
      if (failures < 12) $display("FAIL %s at %0t", s, $time);
    end
  endtask

  task automatic send_x(beat_t b);
    x_valid = 1; x_data = b; #1;
    while (!x_ready) begin n_xstall++; @(posedge clk); #1; end
    @(posedge clk); #1; x_valid = 0;
  endtask
  task automatic send_w(beat_t b);
    w_valid = 1; w_data = b; #1;
    while (!w_ready) begin @(posedge clk); #1; end
    @(posedge clk); #1; w_valid = 0;
  endtask
  task automatic send_ext(out_t e);
    ext_valid = 1; ext_data = e; #1;
    while (!ext_ready) begin @(posedge clk); #1; end
    @(posedge clk); #1; ext_valid = 0;
  endtask

  // ---- GELU table, Q7.8 ----
  elem_t tk [32], tbv [32];
  function automatic real gelu(real x);
    return 0.5 * x * (1.0 + $tanh(0.7978845608 * (x + 0.044715 * x * x * x)));
  endfunction
  function automatic int seg_of(elem_t x);
    int s;
    s = (int'(x) >>> 6) + 16;
    if (s < 0) s = 0;
    if (s > 31) s = 31;
    return s;
  endfunction
  function automatic bit out_of_range(elem_t x);
    int s;
    s = (int'(x) >>> 6) + 16;
    return (s < 0) || (s > 31);
  endfunction
  function automatic elem_t ref_q(longint s);
    longint q = s >>> FRAC;
    if (q > 32767) return 16'sh7fff;
    if (q < -32768) return 16'sh8000;
    return elem_t'(q);
  endfunction

  task automatic wait_done(int n_results);
    int g = 0;
    while (!done && g < 20000) begin @(posedge clk); #1; g++; end
    chk(done, "operation finished");
    g = 0;
    while (rq.size() < n_results && g < 2000) begin @(posedge clk); #1; g++; end
    chk(rq.size() == n_results, "result count");
    if (rq.size() != n_results) $display("got %0d results, expected %0d", rq.size(), n_results);
  endtask

  vec_t av [3][8][6], wv [3][8][6];
  elem_t xm [128], km [128], bm [128];   // index s*64 + r*8 + c
  bit seen [128];

  // One GEMM result tile: 8x8 PEs, two slots, each slot a dot product over
  // parts x 3 vectors x 16 elements. parts > 1 uses hold / cont operations.
  task automatic gemm_op(bit with_ipf, mode_e prev, int parts);
    longint acc;
    ipf_en = with_ipf;
    if (prev != MODE_GEMM) n_switch++;
    for (int p = 0; p < parts; p++) begin
      cfg = '{mode: MODE_GEMM, n_entries: 5'd6, kchunks: 5'd3, cont: (p > 0), hold: (p < parts - 1)};
      for (int e = 0; e < 6; e++) for (int i = 0; i < SIMD; i++) begin
        for (int r = 0; r < 8; r++) av[p][r][e][i] = elem_t'(signed'($urandom_range(0, 512)) - 256);
        for (int c = 0; c < 8; c++) wv[p][c][e][i] = elem_t'(signed'($urandom_range(0, 512)) - 256);
      end
      start = 1; @(posedge clk); #1 start = 0;
      fork
        for (int e = 0; e < 6; e++) for (int r = 0; r < 8; r++) send_x('{dest: IDX_W'(r), data: av[p][r][e]});
        for (int e = 0; e < 6; e++) for (int c = 0; c < 8; c++) send_w('{dest: IDX_W'(c), data: wv[p][c][e]});
      join
      wait_done((p == parts - 1) ? 128 : 0);
      if (p < parts - 1) n_hold++;
    end
    for (int f = 0; f < 128; f++) seen[f] = 0;
    while (rq.size() > 0) begin
      addr_out_t o;
      int f, s0;
      o = rq.pop_front();
      f = int'(o.c.slot) * 64 + int'(o.c.row) * 8 + int'(o.c.col);
      chk(o.c.slot < 2 && !seen[f], "GEMM tag unique");
      seen[f] = 1;
      acc = 0;
      for (int p = 0; p < parts; p++)
        for (int e = 3 * int'(o.c.slot); e < 3 * int'(o.c.slot) + 3; e++)
          for (int i = 0; i < SIMD; i++) acc += longint'(av[p][o.c.row][e][i]) * longint'(wv[p][o.c.col][e][i]);
      chk(o.c.data[0] == ref_q(acc), "GEMM value");
      s0 = seg_of(o.c.data[0]);
      if (with_ipf) begin
        chk(o.k[0] == tk[s0] && o.b[0] == tbv[s0], "IPF k,b of GEMM result");
        chk(o.k[1] == tk[16] && o.b[1] == tbv[16], "IPF of an empty lane");
      end else
        chk(o.k[0] == 0 && o.b[0] == 0, "no IPF");
      xm[f] = o.c.data[0]; km[f] = o.k[0]; bm[f] = o.b[0];
    end
    n_gemm++;
    $display("GEMM op (%0d part(s)): last part %0d cycles", parts, cycles);
  endtask

  initial begin
    int capped_before, exp_capped;
    real maxerr_in, maxerr_all;
    for (int s = 0; s < 32; s++) begin
      real x0, x1, k, b;
      x0 = -4.0 + 0.25 * s; x1 = x0 + 0.25;
      k = (gelu(x1) - gelu(x0)) / 0.25;
      b = gelu(x0) - k * x0;
      tk[s] = elem_t'(int'(k * 256.0));
      tbv[s] = elem_t'(int'(b * 256.0));
    end
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int s = 0; s < 32; s++) begin
      tbl_we = 1; tbl_addr = SEG_W'(s); tbl_k = tk[s]; tbl_b = tbv[s];
      @(posedge clk); #1;
    end
    tbl_we = 0;

    // ---------------- op 1: GEMM with parameter fetching ----------------
    gemm_op(1'b1, MODE_GEMM, 1);
    capped_before = int'(n_capped);
    exp_capped = 0;
    for (int f = 0; f < 128; f++) exp_capped += out_of_range(xm[f]);
    // every result fetches 8 lanes; the 7 empty lanes hold 0, which is in range
    chk(capped_before == exp_capped, "capped count of op 1");

    // ---------------- op 2: MHP, Y = X (.) K + B ----------------
    cfg = '{mode: MODE_MHP, n_entries: 5'd2, kchunks: 5'd1, cont: 1'b0, hold: 1'b0};
    ipf_en = 0;
    n_switch++;
    start = 1; @(posedge clk); #1 start = 0;
    fork
      for (int i = 0; i < 8; i++) begin
        beat_t b;
        b.dest = IDX_W'(i);
        for (int j = 0; j < 16; j++) b.data[j] = xm[16*i + j];
        send_x(b);
      end
      for (int i = 0; i < 8; i++) begin
        beat_t bk, bb;
        bk.dest = IDX_W'(i); bb.dest = IDX_W'(i);
        for (int j = 0; j < 16; j++) begin bk.data[j] = km[16*i + j]; bb.data[j] = bm[16*i + j]; end
        send_w(bk);
        send_w(bb);
      end
    join
    wait_done(16);
    maxerr_in = 0; maxerr_all = 0;
    for (int f = 0; f < 128; f++) seen[f] = 0;
    while (rq.size() > 0) begin
      addr_out_t o;
      o = rq.pop_front();
      chk(o.c.row == o.c.col && o.c.slot < 2, "MHP result from a diagonal PE");
      for (int l = 0; l < LANES; l++) begin
        int f;
        real err;
        f = 16 * int'(o.c.row) + 8 * int'(o.c.slot) + l;
        chk(!seen[f], "MHP element unique");
        seen[f] = 1;
        chk(o.c.data[l] == ref_q(longint'(xm[f]) * longint'(km[f]) + longint'(ONE) * longint'(bm[f])), "MHP value");
        err = real'(o.c.data[l]) / 256.0 - gelu(real'(xm[f]) / 256.0);
        if (err < 0) err = -err;
        if (!out_of_range(xm[f]) && err > maxerr_in) maxerr_in = err;
        if (err > maxerr_all) maxerr_all = err;
      end
    end
    chk(maxerr_in < 0.03, "GELU approximation error inside [-4,4)");
    $display("MHP op: %0d cycles; GELU error max %f inside the table range, %f overall", cycles, maxerr_in, maxerr_all);
    n_mhp++;

    // ---------------- op 3: back to GEMM, then direct X load ----------------
    gemm_op(1'b0, MODE_MHP, 3);
    ipf_en = 1; ext_sel = 1;
    capped_before = int'(n_capped);
    exp_capped = 0;
    begin
      out_t e [20];
      for (int n = 0; n < 20; n++) begin
        e[n].row = IDX_W'(n % 8); e[n].col = IDX_W'(n / 8); e[n].slot = '0;
        for (int l = 0; l < LANES; l++) begin
          e[n].data[l] = elem_t'(signed'($urandom_range(0, 4000)) - 2000);
          exp_capped += out_of_range(e[n].data[l]);
        end
        send_ext(e[n]);
        n_ext++;
      end
      for (int g = 0; g < 200 && rq.size() < 20; g++) begin @(posedge clk); #1; end
      chk(rq.size() == 20, "direct-load results");
      for (int n = 0; n < 20 && rq.size() > 0; n++) begin
        addr_out_t o;
        o = rq.pop_front();
        chk(o.c == e[n], "direct-load entry passed unchanged");
        for (int l = 0; l < LANES; l++) begin
          int s;
          s = seg_of(e[n].data[l]);
          chk(o.k[l] == tk[s] && o.b[l] == tbv[s], "direct-load k,b");
        end
      end
    end
    chk(int'(n_capped) - capped_before == exp_capped, "capped count of direct loads");
    ext_sel = 0;

    chk(n_hold > 0, "held accumulation happened");
    $display("mechanisms: held=%0d gemm=%0d mhp=%0d mode_switch=%0d capped=%0d out_stall=%0d in_stall=%0d ext_load=%0d",
             n_hold, n_gemm, n_mhp, n_switch, n_capped, n_ostall, n_xstall, n_ext);
    chk(n_gemm > 0, "GEMM happened");
    chk(n_mhp > 0, "MHP happened");
    chk(n_switch > 0, "mode switch happened");
    chk(n_capped > 0, "segment cap happened");
    chk(n_ostall > 0, "output back-pressure happened");
    chk(n_xstall > 0, "input back-pressure happened");
    chk(n_ext > 0, "direct load happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

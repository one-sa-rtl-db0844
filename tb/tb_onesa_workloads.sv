// tb_onesa_workloads: layer-shaped runs of the full-size ONE-SA core (8x8
// PEs, 16 MACs each, every parameter at its default). Each case is a slice of
// a network layer of the kind the architecture targets; the layer sizes are
// typical ones, cut to one 8x8 output tile.
//
//   A  Transformer feed-forward slice: GEMM with a 768-term reduction (the
//      hidden size of a base-size transformer), done as three operations of
//      256 terms (hold; cont + hold; cont), parameter fetch on the last one
//      with a GELU table (granularity 0.25, [-4, 4)), then the MHP that applies
//      GELU. Checks the 64 dot products exactly and GELU within 0.03.
//   B  CNN activation: ReLU as a two-piece CPWL table at granularity 1.0
//      (shift 8, [-16, 16)); X loaded straight into the L3 output, K and B
//      fetched, then MHP. ReLU is exact under CPWL, so y must equal max(x, 0)
//      for every element, including inputs beyond the table that are capped.
//   C  GELU at granularity 0.5 (shift 7, [-8, 8)) on the same path as B,
//      checked against the integer model and against GELU within 0.08.
//
// Tables: segment s covers [(s - 16) g, (s - 15) g); k is the chord slope of
// the function over the segment, b its intercept, both rounded to Q7.8.
// The watchdog stops the run after 300000 cycles.
module tb_onesa_workloads;
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
  logic ipf_en = 0;
  logic [3:0] seg_shift = 4'd6;
  logic tbl_we = 0;
  logic [SEG_W-1:0] tbl_addr = '0;
  elem_t tbl_k = '0, tbl_b = '0;
  logic o_valid, o_ready = 1;
  addr_out_t o_data;
  int checks = 0, failures = 0;
  int n_ops = 0, n_hold = 0, n_mhp = 0;

  always #5 clk = ~clk;

  onesa_top dut (.clk, .rst_n, .start, .cfg, .busy, .done, .cycles,
    .x_valid, .x_ready, .x_data, .w_valid, .w_ready, .w_data, .x_level, .w_level,
    .ext_sel, .ext_valid, .ext_ready, .ext_data,
    .ipf_en, .seg_shift, .seg_offset(6'd16), .seg_smin(6'd0), .seg_smax(6'd31),
    .tbl_we, .tbl_addr, .tbl_k, .tbl_b, .n_capped,
    .o_valid, .o_ready, .o_data);

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  addr_out_t rq [$];
  always @(posedge clk) if (rst_n && o_valid && o_ready) rq.push_back(o_data);
  always @(posedge clk) #1 o_ready <= ($urandom_range(0, 9) > 1);

  task automatic chk(bit c, string s);
    checks++;
    if (!c) begin
      failures++;
      if (failures < 12) $display("FAIL %s at %0t", s, $time);
    end
  endtask

  task automatic send_x(beat_t b);
    x_valid = 1; x_data = b; #1;
    while (!x_ready) begin @(posedge clk); #1; end
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

  // ---- functions and their CPWL tables ----
  function automatic real gelu(real x);
    return 0.5 * x * (1.0 + $tanh(0.7978845608 * (x + 0.044715 * x * x * x)));
  endfunction
  function automatic real fn(int f, real x);
    if (f == 0) return gelu(x);
    return (x > 0.0) ? x : 0.0;
  endfunction

  elem_t tk [32], tbv [32];
  int shift_now;

  task automatic load_table(int f, int shift);
    real g, x0, x1, k, b;
    g = real'(1 << shift) / 256.0;
    for (int s = 0; s < 32; s++) begin
      x0 = real'(s - 16) * g; x1 = x0 + g;
      k = (fn(f, x1) - fn(f, x0)) / g;
      b = fn(f, x0) - k * x0;
      tk[s] = elem_t'($rtoi(k * 256.0 + ((k < 0) ? -0.5 : 0.5)));
      tbv[s] = elem_t'($rtoi(b * 256.0 + ((b < 0) ? -0.5 : 0.5)));
    end
    for (int s = 0; s < 32; s++) begin
      tbl_we = 1; tbl_addr = SEG_W'(s); tbl_k = tk[s]; tbl_b = tbv[s];
      @(posedge clk); #1;
    end
    tbl_we = 0;
    seg_shift = 4'(shift);
    shift_now = shift;
  endtask

  function automatic int seg_of(elem_t x);
    int s;
    s = (int'(x) >>> shift_now) + 16;
    if (s < 0) s = 0;
    if (s > 31) s = 31;
    return s;
  endfunction
  function automatic elem_t ref_q(longint s);
    longint q = s >>> FRAC;
    if (q > 32767) return 16'sh7fff;
    if (q < -32768) return 16'sh8000;
    return elem_t'(q);
  endfunction

  task automatic run_op(cfg_t c);
    cfg = c;
    start = 1; @(posedge clk); #1 start = 0;
    n_ops++;
    if (c.hold) n_hold++;
  endtask
  task automatic wait_results(int n);
    int g = 0;
    bit fin = 0;
    while ((!fin || rq.size() < n) && g < 40000) begin
      @(posedge clk); #1; g++;
      if (done) fin = 1;
    end
    chk(fin, "operation finished");
    chk(rq.size() == n, "result count");
    if (rq.size() != n) $display("got %0d results, expected %0d: first r%0d c%0d s%0d", rq.size(), n, rq[0].c.row, rq[0].c.col, rq[0].c.slot);
  endtask

  // ---- MHP over 128 elements: element f goes to row f/16 ----
  elem_t xs [128], ks [128], bs [128], ys [128];
  task automatic mhp128();
    bit seen [128];
    ipf_en = 0;
    run_op('{mode: MODE_MHP, n_entries: 5'd2, kchunks: 5'd1, cont: 1'b0, hold: 1'b0});
    fork
      for (int i = 0; i < 8; i++) begin
        beat_t b;
        b.dest = IDX_W'(i);
        for (int j = 0; j < 16; j++) b.data[j] = xs[16*i + j];
        send_x(b);
      end
      for (int i = 0; i < 8; i++) begin
        beat_t bk, bb;
        bk.dest = IDX_W'(i); bb.dest = IDX_W'(i);
        for (int j = 0; j < 16; j++) begin bk.data[j] = ks[16*i + j]; bb.data[j] = bs[16*i + j]; end
        send_w(bk);
        send_w(bb);
      end
    join
    wait_results(16);
    for (int f = 0; f < 128; f++) seen[f] = 0;
    while (rq.size() > 0) begin
      addr_out_t o;
      o = rq.pop_front();
      chk(o.c.row == o.c.col && o.c.slot < 2, "MHP result from a diagonal PE");
      for (int l = 0; l < LANES; l++) begin
        int f;
        f = 16 * int'(o.c.row) + 8 * int'(o.c.slot) + l;
        chk(!seen[f], "MHP element unique");
        seen[f] = 1;
        ys[f] = o.c.data[l];
        chk(ys[f] == ref_q(longint'(xs[f]) * longint'(ks[f]) + longint'(ONE) * longint'(bs[f])), "MHP value");
        if (failures < 6 && ys[f] != ref_q(longint'(xs[f]) * longint'(ks[f]) + longint'(ONE) * longint'(bs[f]))) $display("f=%0d x=%0d k=%0d b=%0d y=%0d r%0d s%0d", f, xs[f], ks[f], bs[f], ys[f], o.c.row, o.c.slot);
      end
    end
    n_mhp++;
  endtask

  // ---- parameter fetch of xs through the direct load path ----
  task automatic fetch128();
    ipf_en = 1; ext_sel = 1;
    for (int n = 0; n < 16; n++) begin
      out_t e;
      e.row = IDX_W'(n / 2); e.col = IDX_W'(n / 2); e.slot = SLOT_W'(n % 2);
      for (int l = 0; l < LANES; l++) e.data[l] = xs[8*n + l];
      send_ext(e);
    end
    for (int g = 0; g < 400 && rq.size() < 16; g++) begin @(posedge clk); #1; end
    chk(rq.size() == 16, "fetch results");
    for (int n = 0; n < 16 && rq.size() > 0; n++) begin
      addr_out_t o;
      o = rq.pop_front();
      for (int l = 0; l < LANES; l++) begin
        chk(o.c.data[l] == xs[8*n + l], "fetched element unchanged");
        chk(o.k[l] == tk[seg_of(xs[8*n + l])] && o.b[l] == tbv[seg_of(xs[8*n + l])], "fetched k,b");
        ks[8*n + l] = o.k[l]; bs[8*n + l] = o.b[l];
      end
    end
    ext_sel = 0; ipf_en = 0;
  endtask

  real err, maxerr;
  int cap0;

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;

    // ================= A: 768-term GEMM, then GELU =================
    begin
      vec_t av [3][8][16], wv [3][8][16];
      bit seen [64];
      load_table(0, 6);
      for (int p = 0; p < 3; p++) begin
        for (int e = 0; e < 16; e++) for (int i = 0; i < SIMD; i++) begin
          for (int r = 0; r < 8; r++) av[p][r][e][i] = elem_t'(signed'($urandom_range(0, 128)) - 64);
          for (int c = 0; c < 8; c++) wv[p][c][e][i] = elem_t'(signed'($urandom_range(0, 128)) - 64);
        end
        ipf_en = (p == 2);
        run_op('{mode: MODE_GEMM, n_entries: 5'd16, kchunks: 5'd16, cont: (p > 0), hold: (p < 2)});
        fork
          for (int e = 0; e < 16; e++) for (int r = 0; r < 8; r++) send_x('{dest: IDX_W'(r), data: av[p][r][e]});
          for (int e = 0; e < 16; e++) for (int c = 0; c < 8; c++) send_w('{dest: IDX_W'(c), data: wv[p][c][e]});
        join
        wait_results((p == 2) ? 64 : 0);
      end
      for (int f = 0; f < 64; f++) seen[f] = 0;
      for (int f = 0; f < 128; f++) begin xs[f] = '0; ks[f] = tk[16]; bs[f] = tbv[16]; end
      while (rq.size() > 0) begin
        addr_out_t o;
        longint acc;
        int f;
        o = rq.pop_front();
        f = int'(o.c.row) * 8 + int'(o.c.col);
        chk(o.c.slot == 0 && !seen[f], "GEMM tag unique");
        seen[f] = 1;
        acc = 0;
        for (int p = 0; p < 3; p++) for (int e = 0; e < 16; e++) for (int i = 0; i < SIMD; i++)
          acc += longint'(av[p][o.c.row][e][i]) * longint'(wv[p][o.c.col][e][i]);
        chk(o.c.data[0] == ref_q(acc), "768-term dot product");
        chk(o.k[0] == tk[seg_of(o.c.data[0])] && o.b[0] == tbv[seg_of(o.c.data[0])], "fetched k,b of GEMM result");
        // result (r,c) becomes element r*16 + c: rows 0..7, first half of each row
        xs[int'(o.c.row) * 16 + int'(o.c.col)] = o.c.data[0];
        ks[int'(o.c.row) * 16 + int'(o.c.col)] = o.k[0];
        bs[int'(o.c.row) * 16 + int'(o.c.col)] = o.b[0];
      end
      $display("A: 768-term GEMM in 3 operations, last %0d cycles", cycles);
      mhp128();
      maxerr = 0;
      for (int f = 0; f < 128; f++) begin
        err = real'(ys[f]) / 256.0 - gelu(real'(xs[f]) / 256.0);
        if (err < 0) err = -err;
        if (err > maxerr) maxerr = err;
      end
      chk(maxerr < 0.03, "A: GELU error");
      $display("A: GELU after GEMM, max error %f, MHP %0d cycles", maxerr, cycles);
    end

    // ================= B: ReLU at granularity 1.0 =================
    load_table(1, 8);
    cap0 = int'(n_capped);
    for (int f = 0; f < 128; f++) xs[f] = elem_t'(signed'($urandom_range(0, 10240)) - 5120);  // [-20, 20)
    fetch128();
    mhp128();
    for (int f = 0; f < 128; f++) chk(ys[f] == ((xs[f] > 0) ? xs[f] : elem_t'(0)), "B: ReLU exact");
    chk(int'(n_capped) > cap0, "B: inputs beyond the table were capped");
    $display("B: ReLU, %0d lanes capped", int'(n_capped) - cap0);

    // ================= C: GELU at granularity 0.5 =================
    load_table(0, 7);
    for (int f = 0; f < 128; f++) xs[f] = elem_t'(signed'($urandom_range(0, 4096)) - 2048);  // [-8, 8]
    fetch128();
    mhp128();
    maxerr = 0;
    for (int f = 0; f < 128; f++) begin
      err = real'(ys[f]) / 256.0 - gelu(real'(xs[f]) / 256.0);
      if (err < 0) err = -err;
      if (err > maxerr) maxerr = err;
    end
    chk(maxerr < 0.08, "C: GELU error at granularity 0.5");
    $display("C: GELU at granularity 0.5, max error %f", maxerr);

    $display("operations=%0d held=%0d mhp=%0d", n_ops, n_hold, n_mhp);
    chk(n_hold == 2 && n_mhp == 3, "every case ran");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

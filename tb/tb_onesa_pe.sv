// tb_onesa_pe: checks one diagonal PE (0,0) and one off-diagonal PE (0,1).
// GEMM: both forward their inputs one cycle later and accumulate dot
// products over several vectors into output-buffer slots; the drained
// entries must equal the reference (sum >>> FRAC, saturated), tagged with
// row, column and slot. MHP: the diagonal PE forwards nothing and writes the
// eight pair sums k*x + 1*b; the off-diagonal PE forwards and produces no
// result. A stalled drain (o_ready low) must hold the entry.
module tb_onesa_pe;
  import onesa_pkg::*;
  logic clk = 0, rst_n = 0, clear = 0;
  mode_e mode = MODE_GEMM;
  sa_bus_t a_in, w_in, a0_out, w0_out, a1_out, w1_out;
  logic o0_v, o1_v, o0_r, o1_r;
  out_t o0_d, o1_d;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  onesa_pe #(.ROW(0), .COL(0)) u_diag (.clk, .rst_n, .mode, .clear, .a_in, .w_in,
    .a_out(a0_out), .w_out(w0_out), .o_valid(o0_v), .o_ready(o0_r), .o_data(o0_d));
  onesa_pe #(.ROW(0), .COL(1)) u_off  (.clk, .rst_n, .mode, .clear, .a_in, .w_in,
    .a_out(a1_out), .w_out(w1_out), .o_valid(o1_v), .o_ready(o1_r), .o_data(o1_d));

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  function automatic vec_t rvec(int lim);
    vec_t v;
    for (int i = 0; i < SIMD; i++) v[i] = elem_t'(signed'($urandom_range(0, 2*lim)) - lim);
    return v;
  endfunction

  function automatic elem_t ref_q(longint s);
    longint q = s >>> FRAC;
    if (q > 32767) return 16'sh7fff;
    if (q < -32768) return 16'sh8000;
    return elem_t'(q);
  endfunction

  initial begin
    vec_t av [4], wv [4];
    longint acc0, acc1;
    elem_t exp_mhp [LANES];
    a_in = '0; w_in = '0; o0_r = 0; o1_r = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1; clear = 1;
    @(posedge clk); #1 clear = 0;

    // ---- GEMM: slot 0 gets 3 vectors, slot 1 one vector ----
    for (int i = 0; i < 4; i++) begin
      av[i] = rvec(3000); wv[i] = rvec(3000);
    end
    acc0 = 0; acc1 = 0;
    for (int i = 0; i < 3; i++)
      for (int m = 0; m < SIMD; m++) acc0 += longint'(av[i][m]) * longint'(wv[i][m]);
    for (int m = 0; m < SIMD; m++) acc1 += longint'(av[3][m]) * longint'(wv[3][m]);
    for (int i = 0; i < 4; i++) begin
      a_in.valid = 1; w_in.valid = 1;
      a_in.data = av[i]; w_in.data = wv[i];
      a_in.ctrl.slot  = (i < 3) ? 3'd0 : 3'd1;
      a_in.ctrl.first = (i == 0) || (i == 3);
      a_in.ctrl.last  = (i == 2) || (i == 3);
      @(posedge clk); #1;
      // registered forwarding: visible one cycle after presentation
      check(a0_out.valid && a0_out.data == av[i] && w0_out.valid && w0_out.data == wv[i], "gemm forward diag");
      check(a1_out.valid && a1_out.data == av[i] && w1_out.data == wv[i], "gemm forward off");
    end
    a_in = '0; w_in = '0;
    @(posedge clk); #1;
    check(o0_v && o1_v, "gemm entries ready");
    // stall: entry held
    repeat (3) @(posedge clk);
    #1 check(o0_v && o0_d.slot == 0, "held under stall");
    check(o0_d.data[0] == ref_q(acc0) && o0_d.row == 0 && o0_d.col == 0, "gemm slot0 diag");
    check(o1_d.data[0] == ref_q(acc0) && o1_d.col == 1, "gemm slot0 off");
    for (int l = 1; l < LANES; l++) check(o0_d.data[l] == 0, "gemm other lanes zero");
    o0_r = 1; o1_r = 1;
    @(posedge clk); #1;
    check(o0_v && o0_d.slot == 1 && o0_d.data[0] == ref_q(acc1), "gemm slot1 diag");
    check(o1_v && o1_d.slot == 1 && o1_d.data[0] == ref_q(acc1), "gemm slot1 off");
    @(posedge clk); #1;
    check(!o0_v && !o1_v, "gemm drained");

    // ---- MHP ----
    mode = MODE_MHP; clear = 1;
    @(posedge clk); #1 clear = 0;
    for (int l = 0; l < LANES; l++) begin
      av[0][2*l]   = elem_t'(signed'($urandom_range(0, 2048)) - 1024);
      av[0][2*l+1] = ONE;
      wv[0][2*l]   = elem_t'(signed'($urandom_range(0, 512)) - 256);
      wv[0][2*l+1] = elem_t'(signed'($urandom_range(0, 2048)) - 1024);
      exp_mhp[l] = ref_q(longint'(av[0][2*l]) * longint'(wv[0][2*l]) + longint'(ONE) * longint'(wv[0][2*l+1]));
    end
    a_in.valid = 1; w_in.valid = 1; a_in.data = av[0]; w_in.data = wv[0];
    a_in.ctrl = '{slot: 3'd0, first: 1'b1, last: 1'b1};
    @(posedge clk); #1;
    check(!a0_out.valid && !w0_out.valid, "computation PE does not forward");
    check(a1_out.valid && w1_out.valid && a1_out.data == av[0], "transmission PE forwards");
    a_in = '0; w_in = '0;
    @(posedge clk); #1;
    check(!o1_v, "transmission PE computes nothing");
    check(o0_v && o0_d.slot == 0, "mhp entry ready");
    for (int l = 0; l < LANES; l++) check(o0_d.data[l] == exp_mhp[l], "mhp lane value");
    @(posedge clk); #1;
    check(!o0_v, "mhp drained");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

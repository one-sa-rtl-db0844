// tb_onesa_rearrange: checks both rearrange variants. GEMM: beats pass
// unchanged. MHP input side: each X beat becomes [x0,1,...,x7,1] and
// [x8,1,...,x15,1]. MHP weight side: a K beat and a B beat become
// [k0,b0,...,k7,b7] and [k8,b8,...,k15,b15]. Random output stalls.
module tb_onesa_rearrange;
  import onesa_pkg::*;
  logic clk = 0, rst_n = 0;
  mode_e mode = MODE_GEMM;
  logic xv, xr, xov, xor_, wv, wr, wov, wor_;
  beat_t xd, xod, wd, wod;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  onesa_rearrange #(.IS_WEIGHT(1'b0)) u_x (.clk, .rst_n, .mode, .in_valid(xv), .in_ready(xr), .in_data(xd),
    .out_valid(xov), .out_ready(xor_), .out_data(xod));
  onesa_rearrange #(.IS_WEIGHT(1'b1)) u_w (.clk, .rst_n, .mode, .in_valid(wv), .in_ready(wr), .in_data(wd),
    .out_valid(wov), .out_ready(wor_), .out_data(wod));

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  beat_t xin [8], win [16];   // inputs per phase
  beat_t xexp [$], wexp [$];

  function automatic beat_t rbeat(int dest);
    beat_t b;
    b.dest = IDX_W'(dest);
    for (int i = 0; i < SIMD; i++) b.data[i] = elem_t'($urandom());
    return b;
  endfunction

  task automatic run_phase(int nx, int nw);
    int ix = 0, iw = 0, guard = 0;
    xv = 0; wv = 0;
    while ((ix < nx || iw < nw || xexp.size() > 0 || wexp.size() > 0) && guard < 2000) begin
      bit ax, aw;
      guard++;
      xv = (ix < nx); if (ix < nx) xd = xin[ix];
      wv = (iw < nw); if (iw < nw) wd = win[iw];
      xor_ = $urandom_range(0, 2) != 0;
      wor_ = $urandom_range(0, 2) != 0;
      #1;
      ax = xv && xr; aw = wv && wr;
      if (xov && xor_) begin
        checks++;
        if (xexp.size() == 0 || xod != xexp[0]) begin failures++; $display("x mismatch"); end
        if (xexp.size() > 0) void'(xexp.pop_front());
      end
      if (wov && wor_) begin
        checks++;
        if (wexp.size() == 0 || wod != wexp[0]) begin failures++; $display("w mismatch"); end
        if (wexp.size() > 0) void'(wexp.pop_front());
      end
      @(posedge clk); #1;
      if (ax) ix++;
      if (aw) iw++;
    end
    xv = 0; wv = 0;
    checks++;
    if (guard >= 2000) begin failures++; $display("phase hung"); end
  endtask

  initial begin
    beat_t e;
    xv = 0; wv = 0; xor_ = 0; wor_ = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    // GEMM pass-through
    for (int i = 0; i < 8; i++) begin
      xin[i] = rbeat(i); win[i] = rbeat(7 - i);
      xexp.push_back(xin[i]); wexp.push_back(win[i]);
    end
    run_phase(8, 8);
    // MHP
    mode = MODE_MHP;
    for (int i = 0; i < 8; i++) begin
      xin[i] = rbeat(i);
      for (int h = 0; h < 2; h++) begin
        e.dest = xin[i].dest;
        for (int l = 0; l < LANES; l++) begin
          e.data[2*l] = xin[i].data[8*h + l]; e.data[2*l+1] = ONE;
        end
        xexp.push_back(e);
      end
    end
    for (int i = 0; i < 8; i++) begin
      win[2*i] = rbeat(i); win[2*i+1] = rbeat(15);   // B beat's dest is ignored
      for (int h = 0; h < 2; h++) begin
        e.dest = win[2*i].dest;
        for (int l = 0; l < LANES; l++) begin
          e.data[2*l] = win[2*i].data[8*h + l]; e.data[2*l+1] = win[2*i+1].data[8*h + l];
        end
        wexp.push_back(e);
      end
    end
    run_phase(8, 16);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

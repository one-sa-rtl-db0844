// tb_onesa_l3_in: L3 input buffer (MHP) and L3 weight buffer (GEMM). With
// the output blocked the Input FIFO must fill to its 9 vectors and then
// refuse further beats; afterwards all vectors must come out in order with
// the interleaving of the rearrange unit (input side) or unchanged (weight
// side in GEMM mode).
module tb_onesa_l3_in;
  import onesa_pkg::*;
  logic clk = 0, rst_n = 0;
  mode_e mx = MODE_MHP, mw = MODE_GEMM;
  logic xv, xr, xov, xor_, wv, wr, wov, wor_;
  beat_t xd, xod, wd, wod;
  logic [3:0] xc, wc;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  onesa_l3_in #(.IS_WEIGHT(1'b0)) u_in (.clk, .rst_n, .mode(mx), .in_valid(xv), .in_ready(xr), .in_data(xd),
    .out_valid(xov), .out_ready(xor_), .out_data(xod), .fifo_count(xc));
  onesa_l3_in #(.IS_WEIGHT(1'b1)) u_wt (.clk, .rst_n, .mode(mw), .in_valid(wv), .in_ready(wr), .in_data(wd),
    .out_valid(wov), .out_ready(wor_), .out_data(wod), .fifo_count(wc));

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  beat_t xexp [$], wexp [$];

  initial begin
    beat_t b, e;
    int sent_x = 0, sent_w = 0;
    xv = 0; wv = 0; xor_ = 0; wor_ = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    // fill with outputs blocked
    for (int cyc = 0; cyc < 40; cyc++) begin
      bit ax, aw;
      if (!xv) begin
        b.dest = IDX_W'(sent_x);
        for (int i = 0; i < SIMD; i++) b.data[i] = elem_t'($urandom());
        xd = b; xv = 1;
      end
      if (!wv) begin
        b.dest = IDX_W'(sent_w);
        for (int i = 0; i < SIMD; i++) b.data[i] = elem_t'($urandom());
        wd = b; wv = 1;
      end
      #1 ax = xv && xr; aw = wv && wr;
      @(posedge clk); #1;
      if (ax) begin
        for (int h = 0; h < 2; h++) begin
          e.dest = xd.dest;
          for (int l = 0; l < LANES; l++) begin e.data[2*l] = xd.data[8*h+l]; e.data[2*l+1] = ONE; end
          xexp.push_back(e);
        end
        sent_x++; xv = 0;
      end
      if (aw) begin wexp.push_back(wd); sent_w++; wv = 0; end
    end
    checks++; if (xc != 4'd9 || wc != 4'd9) begin failures++; $display("fifo counts %0d %0d", xc, wc); end
    checks++; if (xr || wr) begin failures++; $display("accepts while full"); end
    xv = 0; wv = 0;
    // drain
    xor_ = 1; wor_ = 1;
    for (int cyc = 0; cyc < 40; cyc++) begin
      #1;
      if (xov) begin
        checks++;
        if (xexp.size() == 0 || xod != xexp[0]) begin failures++; $display("x mismatch"); end
        if (xexp.size() > 0) void'(xexp.pop_front());
      end
      if (wov) begin
        checks++;
        if (wexp.size() == 0 || wod != wexp[0]) begin failures++; $display("w mismatch"); end
        if (wexp.size() > 0) void'(wexp.pop_front());
      end
      @(posedge clk);
    end
    checks++; if (xexp.size() != 0 || wexp.size() != 0) begin failures++; $display("left over"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

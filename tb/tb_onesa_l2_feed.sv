// tb_onesa_l2_feed: a chain of three L2 buffers (IDX 0..2, SKEW = IDX).
// Beats for each index are sent in mixed order; each buffer must keep its
// own in arrival order and pass the rest on, refuse capture while load_en
// is low, and stall the chain when full. A read of address a must appear
// on bus exactly SKEW+1 cycles later with the read's control.
module tb_onesa_l2_feed;
  import onesa_pkg::*;
  localparam int N = 3;
  logic clk = 0, rst_n = 0, clear = 0, load_en = 0;
  logic cv [N+1];
  logic cr [N+1];
  beat_t cd [N+1];
  logic rd_en = 0;
  logic [ENT_W-1:0] rd_addr = '0;
  ctrl_t rd_ctrl = '0;
  sa_bus_t bus [N];
  logic [ENT_W-1:0] cnt [N];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  for (genvar i = 0; i < N; i++) begin : g
    onesa_l2_feed #(.IDX(i), .DEPTH(4), .SKEW(i)) u (.clk, .rst_n, .clear, .load_en,
      .ch_in_valid(cv[i]), .ch_in_ready(cr[i]), .ch_in_data(cd[i]),
      .ch_out_valid(cv[i+1]), .ch_out_ready(cr[i+1]), .ch_out_data(cd[i+1]),
      .rd_en, .rd_addr, .rd_ctrl, .bus(bus[i]), .count(cnt[i]));
  end
  assign cr[N] = 1'b0;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  vec_t stored [N][4];

  task automatic send(int dest, vec_t v, output bit ok);
    int g = 0;
    cv[0] = 1; cd[0].dest = IDX_W'(dest); cd[0].data = v;
    #1;
    while (!cr[0] && g < 5) begin @(posedge clk); #1; g++; end
    ok = cr[0];
    @(posedge clk); #1;
    cv[0] = 0;
  endtask

  initial begin
    bit ok;
    int n [N] = '{0, 0, 0};
    vec_t v;
    cv[0] = 0; cd[0] = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    // capture disabled
    for (int i = 0; i < SIMD; i++) v[i] = elem_t'($urandom());
    send(1, v, ok);
    checks++; if (ok || cnt[1] != 0) begin failures++; $display("captured while disabled"); end
    clear = 1; @(posedge clk); #1 clear = 0; load_en = 1;
    for (int k = 0; k < 12; k++) begin
      int d;
      d = (k * 7 + k / 3) % N;
      if (n[d] == 4) d = (d + 1) % N;
      if (n[d] == 4) d = (d + 1) % N;
      for (int i = 0; i < SIMD; i++) v[i] = elem_t'($urandom());
      send(d, v, ok);
      checks++; if (!ok) begin failures++; $display("refused %0d", k); end
      stored[d][n[d]] = v; n[d]++;
    end
    for (int i = 0; i < N; i++) begin checks++; if (cnt[i] != 4) begin failures++; $display("cnt %0d", cnt[i]); end end
    // full: further beat for 0 must stall
    send(0, v, ok);
    checks++; if (ok) begin failures++; $display("accepted when full"); end
    load_en = 0;
    // reads with skew
    for (int a = 0; a < 4; a++) begin
      rd_en = 1; rd_addr = ENT_W'(a); rd_ctrl = '{slot: SLOT_W'(a), first: a[0], last: 1'b1};
      @(posedge clk); #1;
      rd_en = 0;
      for (int t = 1; t <= N + 1; t++) begin
        for (int i = 0; i < N; i++) begin
          if (t == i + 1) begin
            checks++;
            if (!bus[i].valid || bus[i].data != stored[i][a] || bus[i].ctrl.slot != SLOT_W'(a))
              begin failures++; $display("read %0d buffer %0d wrong", a, i); end
          end else begin
            checks++;
            if (bus[i].valid) begin failures++; $display("bus %0d valid at wrong time %0d", i, t); end
          end
        end
        @(posedge clk); #1;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

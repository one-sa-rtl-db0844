// tb_onesa_array: the 8x8 PE array with its drain chain, driven directly.
// The testbench plays the L2 buffers: it applies skewed input and weight
// vectors (row r and column c delayed by r and c cycles). GEMM: two output
// slots of three vectors each; all 128 tagged results must arrive once with
// the values of a reference dot product. MHP: four vectors per row; only the
// eight diagonal PEs may answer, with k*x + 1*b per lane. The drain is
// throttled by a random out_ready, so the L1/L2 chain back-pressures.
module tb_onesa_array;
  import onesa_pkg::*;
  localparam int R = 8, C = 8;
  logic clk = 0, rst_n = 0, clear = 0;
  mode_e mode = MODE_GEMM;
  sa_bus_t a_in [R];
  sa_bus_t w_in [C];
  logic ov, orr;
  out_t od;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  onesa_array #(.ROWS(R), .COLS(C)) dut (.clk, .rst_n, .mode, .clear, .a_in, .w_in,
    .out_valid(ov), .out_ready(orr), .out_data(od));

  initial begin
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  vec_t av [R][8];
  vec_t wv [C][8];
  ctrl_t cv [8];
  elem_t expv [R][C][8][LANES];
  bit    seen [R][C][8];

  function automatic elem_t ref_q(longint s);
    longint q = s >>> FRAC;
    if (q > 32767) return 16'sh7fff;
    if (q < -32768) return 16'sh8000;
    return elem_t'(q);
  endfunction

  // apply n entries with the systolic skew, collecting outputs meanwhile
  task automatic run(int n, int n_expected, ref int got);
    int stall = 0;
    for (int t = 0; t < 400 && got < n_expected; t++) begin
      for (int r = 0; r < R; r++) begin
        int e;
        e = t - r;
        a_in[r].valid = (e >= 0 && e < n);
        a_in[r].data  = (e >= 0 && e < n) ? av[r][e] : '0;
        a_in[r].ctrl  = (e >= 0 && e < n) ? cv[e] : '0;
      end
      for (int c = 0; c < C; c++) begin
        int e;
        e = t - c;
        w_in[c].valid = (e >= 0 && e < n);
        w_in[c].data  = (e >= 0 && e < n) ? wv[c][e] : '0;
        w_in[c].ctrl  = '0;
      end
      orr = ($urandom_range(0, 3) != 0);
      #1;
      if (ov && !orr) stall++;
      if (ov && orr) begin
        checks++;
        if (seen[od.row][od.col][od.slot]) begin failures++; $display("duplicate %0d %0d %0d", od.row, od.col, od.slot); end
        seen[od.row][od.col][od.slot] = 1;
        for (int l = 0; l < LANES; l++) begin
          checks++;
          if (od.data[l] != expv[od.row][od.col][od.slot][l]) begin
            failures++;
            if (failures < 6) $display("value r%0d c%0d s%0d l%0d got %0d exp %0d", od.row, od.col, od.slot, l,
                                       od.data[l], expv[od.row][od.col][od.slot][l]);
          end
        end
        got++;
      end
      @(posedge clk); #1;
    end
    checks++; if (got != n_expected) begin failures++; $display("got %0d of %0d", got, n_expected); end
    checks++; if (stall == 0) begin failures++; $display("drain never stalled"); end
    // nothing more may come out
    orr = 1;
    repeat (30) begin #1; if (ov) begin checks++; failures++; $display("extra output"); end @(posedge clk); end
  endtask

  initial begin
    int got;
    longint acc;
    for (int r = 0; r < R; r++) a_in[r] = '0;
    for (int c = 0; c < C; c++) w_in[c] = '0;
    orr = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1; clear = 1;
    @(posedge clk); #1 clear = 0;

    // ---- GEMM: slots 0,1 of 3 vectors each ----
    for (int e = 0; e < 6; e++) begin
      cv[e] = '{slot: SLOT_W'(e / 3), first: (e % 3 == 0), last: (e % 3 == 2)};
      for (int r = 0; r < R; r++) for (int i = 0; i < SIMD; i++) av[r][e][i] = elem_t'(signed'($urandom_range(0, 1000)) - 500);
      for (int c = 0; c < C; c++) for (int i = 0; i < SIMD; i++) wv[c][e][i] = elem_t'(signed'($urandom_range(0, 1000)) - 500);
    end
    for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) for (int s = 0; s < 2; s++) begin
      acc = 0;
      for (int e = 3*s; e < 3*s + 3; e++) for (int i = 0; i < SIMD; i++) acc += longint'(av[r][e][i]) * longint'(wv[c][e][i]);
      expv[r][c][s][0] = ref_q(acc);
      for (int l = 1; l < LANES; l++) expv[r][c][s][l] = '0;
      seen[r][c][s] = 0;
    end
    got = 0;
    run(6, R*C*2, got);

    // ---- MHP: 4 vectors per row, diagonal computes ----
    mode = MODE_MHP; clear = 1;
    @(posedge clk); #1 clear = 0;
    for (int e = 0; e < 4; e++) begin
      cv[e] = '{slot: SLOT_W'(e), first: 1'b1, last: 1'b1};
      for (int r = 0; r < R; r++) for (int l = 0; l < LANES; l++) begin
        av[r][e][2*l] = elem_t'(signed'($urandom_range(0, 2000)) - 1000); av[r][e][2*l+1] = ONE;
        wv[r][e][2*l] = elem_t'(signed'($urandom_range(0, 600)) - 300);
        wv[r][e][2*l+1] = elem_t'(signed'($urandom_range(0, 2000)) - 1000);
      end
    end
    for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) for (int s = 0; s < 8; s++) seen[r][c][s] = (r != c);
    for (int r = 0; r < R; r++) for (int e = 0; e < 4; e++) for (int l = 0; l < LANES; l++)
      expv[r][r][e][l] = ref_q(longint'(av[r][e][2*l]) * longint'(wv[r][e][2*l]) + longint'(ONE) * longint'(wv[r][e][2*l+1]));
    got = 0;
    run(4, R*4, got);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

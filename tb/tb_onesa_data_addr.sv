// tb_onesa_data_addr: preloads a 32-entry k/b table (granularity 0.25 over
// [-4, 4)), sends random tagged entries with ipf_en set and checks that each
// output carries the entry unchanged with, per lane, the k and b of
// floor(x/0.25)+16 capped to [0, 31]; counts capped lanes. Then with ipf_en
// clear k and b must be zero. Output stalls fill the FIFOs (back-pressure).
module tb_onesa_data_addr;
  import onesa_pkg::*;
  logic clk = 0, rst_n = 0;
  logic ipf_en = 1;
  logic tbl_we = 0;
  logic [SEG_W-1:0] tbl_addr = '0;
  elem_t tbl_k = '0, tbl_b = '0;
  logic iv, ir, ov, orr;
  out_t id;
  addr_out_t od;
  logic [CYC_W-1:0] n_capped;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  onesa_data_addr dut (.clk, .rst_n, .ipf_en, .shift(4'd6), .offset(6'd16), .smin(6'd0), .smax(6'd31),
    .tbl_we, .tbl_addr, .tbl_k, .tbl_b, .in_valid(iv), .in_ready(ir), .in_data(id),
    .out_valid(ov), .out_ready(orr), .out_data(od), .n_capped);

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic elem_t tk(int s); return elem_t'(s * 37 - 500); endfunction
  function automatic elem_t tb_(int s); return elem_t'(1000 - s * 53); endfunction

  out_t exp_q [$];
  bit   ipf_q [$];
  int   exp_capped = 0, stalled = 0;

  initial begin
    int sent = 0, got = 0;
    iv = 0; orr = 0; id = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int s = 0; s < 32; s++) begin
      tbl_we = 1; tbl_addr = SEG_W'(s); tbl_k = tk(s); tbl_b = tb_(s);
      @(posedge clk); #1;
    end
    tbl_we = 0;
    for (int cyc = 0; cyc < 3000 && got < 200; cyc++) begin
      bit acc;
      if (!iv && sent < 200) begin
        id.row = IDX_W'($urandom()); id.col = IDX_W'($urandom()); id.slot = SLOT_W'($urandom());
        for (int l = 0; l < LANES; l++)
          id.data[l] = (l % 3 == 0) ? elem_t'($urandom()) : elem_t'(signed'($urandom_range(0, 2200)) - 1100);
        iv = 1;
        ipf_en = (sent < 150);
      end
      orr = (cyc % 40) > 12;
      #1;
      acc = iv && ir;
      if (iv && !ir) stalled++;
      if (ov && orr) begin
        out_t e; bit ip;
        e = exp_q.pop_front(); ip = ipf_q.pop_front();
        checks++;
        if (od.c != e) begin failures++; $display("C mismatch"); end
        for (int l = 0; l < LANES; l++) begin
          int s;
          s = (int'(e.data[l]) >>> 6) + 16;
          if (s < 0) s = 0;
          if (s > 31) s = 31;
          checks++;
          if (ip ? (od.k[l] != tk(s) || od.b[l] != tb_(s)) : (od.k[l] != 0 || od.b[l] != 0)) begin
            failures++; if (failures < 6) $display("k/b lane %0d x=%0d s=%0d k=%0d exp %0d ip=%0d", l, e.data[l], s, od.k[l], tk(s), ip);
          end
        end
        got++;
      end
      @(posedge clk); #1;
      if (acc) begin
        exp_q.push_back(id); ipf_q.push_back(ipf_en);
        if (ipf_en)
          for (int l = 0; l < LANES; l++) begin
            int s;
            s = (int'(id.data[l]) >>> 6) + 16;
            if (s < 0 || s > 31) exp_capped++;
          end
        sent++; iv = 0;
      end
    end
    checks++; if (got != 200) begin failures++; $display("got %0d", got); end
    checks++; if (n_capped != CYC_W'(exp_capped)) begin failures++; $display("capped %0d exp %0d", n_capped, exp_capped); end
    checks++; if (stalled == 0) begin failures++; $display("back-pressure never happened"); end
    $display("capped lanes %0d, stall cycles %0d", exp_capped, stalled);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_onesa_drain_node: drives the local and upstream inputs of one drain
// node with random valid patterns and a random downstream ready, and checks
// that every entry offered comes out exactly once, in order per source,
// with upstream taking precedence when both offer in the same cycle.
module tb_onesa_drain_node;
  import onesa_pkg::*;
  logic clk = 0, rst_n = 0;
  logic lv, lr, uv, ur, dv, dr;
  out_t ld, ud, dd;
  int checks = 0, failures = 0;
  int nl = 0, nu = 0, ol = 0, ou = 0, both = 0;
  always #5 clk = ~clk;

  onesa_drain_node #(.DEPTH(2)) dut (.clk, .rst_n,
    .loc_valid(lv), .loc_ready(lr), .loc_data(ld),
    .up_valid(uv), .up_ready(ur), .up_data(ud),
    .dn_valid(dv), .dn_ready(dr), .dn_data(dd));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic out_t mk(int src, int n);
    out_t e = '0;
    e.row = IDX_W'(src);
    e.data[0] = elem_t'(n);
    e.data[7] = elem_t'(n * 7 + src);
    return e;
  endfunction

  initial begin
    lv = 0; uv = 0; dr = 0;
    ld = mk(1, 0); ud = mk(2, 0);
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int cyc = 0; cyc < 2000; cyc++) begin
      bit acc_l, acc_u;
      dr = ($urandom_range(0, 4) != 0) || cyc > 1800;
      #1;
      acc_l = lv && lr;
      acc_u = uv && ur;
      if (lv && uv) begin
        both++;
        checks++;
        if (lr) begin failures++; $display("local taken over upstream"); end
      end
      if (dv && dr) begin
        checks++;
        if (dd.row == 1) begin
          if (dd != mk(1, ol)) begin failures++; $display("local out of order %0d", ol); end
          ol++;
        end else if (dd.row == 2) begin
          if (dd != mk(2, ou)) begin failures++; $display("up out of order %0d", ou); end
          ou++;
        end else begin failures++; $display("bad tag"); end
      end
      @(posedge clk); #1;
      if (acc_l) nl++;
      if (acc_u) nu++;
      if (!lv || acc_l) begin
        lv = (nl < 300) && ($urandom_range(0, 3) != 0);
        ld = mk(1, nl);
      end
      if (!uv || acc_u) begin
        uv = (nu < 300) && ($urandom_range(0, 2) != 0);
        ud = mk(2, nu);
      end
    end
    checks++; if (ol != 300 || ou != 300) begin failures++; $display("counts %0d %0d", ol, ou); end
    checks++; if (both == 0) begin failures++; $display("never contended"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

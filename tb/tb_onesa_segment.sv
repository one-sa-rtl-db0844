// tb_onesa_segment: checks the segment number against the paper's GELU
// example (segment length 1.0, four segments, capped below -2 and above 2)
// and against floor(x / 2^shift) + offset, capped, for random inputs and
// the default granularity 0.25.
module tb_onesa_segment;
  import onesa_pkg::*;
  elem_t x;
  logic [3:0] shift;
  logic [SEG_W-1:0] offset, smin, smax, s;
  logic capped;
  int checks = 0, failures = 0;

  onesa_segment dut (.x, .shift, .offset, .smin, .smax, .s, .capped);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(real xv, int exp_s, bit exp_c);
    x = elem_t'($rtoi(xv * 256.0));
    #1;
    checks++;
    if (s != SEG_W'(exp_s) || capped != exp_c) begin
      failures++;
      $display("x=%f s=%0d exp %0d capped=%0d", xv, s, exp_s, capped);
    end
  endtask

  initial begin
    int fl, e;
    // paper's example: s=0 for x<-1 (capped below -2), 1 for -1..0, 2 for 0..1, 3 above 1 (capped above 2)
    shift = 4'd8; offset = 6'd2; smin = 6'd0; smax = 6'd3;
    chk(-2.5, 0, 1); chk(-1.5, 0, 0); chk(-0.5, 1, 0); chk(0.5, 2, 0);
    chk(1.5, 3, 0);  chk(2.5, 3, 1);  chk(-100.0, 0, 1); chk(100.0, 3, 1);
    // granularity 0.25, 32 segments covering [-4, 4)
    shift = 4'd6; offset = 6'd16; smin = 6'd0; smax = 6'd31;
    for (int t = 0; t < 500; t++) begin
      x = elem_t'($urandom());
      if (t % 2) x = elem_t'(signed'($urandom_range(0, 2400)) - 1200);
      #1;
      fl = int'(x) >>> 6;      // floor division by 64
      e = fl + 16;
      checks++;
      if (e < 0) begin
        if (s != 0 || !capped) failures++;
      end else if (e > 31) begin
        if (s != 31 || !capped) failures++;
      end else if (s != SEG_W'(e) || capped) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

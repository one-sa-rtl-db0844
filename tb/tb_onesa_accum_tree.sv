// tb_onesa_accum_tree: checks the multi-layer accumulator against sums
// computed in the testbench: the eight first-layer pair sums and the total,
// for 200 random product vectors including extreme values.
module tb_onesa_accum_tree;
  localparam int N = 16;
  localparam int W = 40;
  logic signed [W-1:0] prod [N];
  logic signed [W-1:0] pair [N/2];
  logic signed [W-1:0] total;
  int checks = 0, failures = 0;

  onesa_accum_tree #(.N(N), .W(W)) dut (.prod(prod), .pair(pair), .total(total));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint exp_total, exp_pair;
    for (int t = 0; t < 200; t++) begin
      exp_total = 0;
      for (int i = 0; i < N; i++) begin
        case (t % 4)
          0: prod[i] = W'(signed'($urandom_range(0, 2000)) - 1000);
          1: prod[i] = W'(longint'(signed'($urandom())) * 3);
          2: prod[i] = (i % 2) ? W'(-1073741824) : W'(1073741823);
          default: prod[i] = W'(longint'(signed'($urandom())) >>> ($urandom_range(0, 20)));
        endcase
        exp_total += longint'(prod[i]);
      end
      #1;
      for (int l = 0; l < N/2; l++) begin
        exp_pair = longint'(prod[2*l]) + longint'(prod[2*l+1]);
        checks++;
        if (longint'(pair[l]) != exp_pair) begin
          failures++;
          if (failures < 5) $display("pair %0d: got %0d exp %0d", l, pair[l], exp_pair);
        end
      end
      checks++;
      if (longint'(total) != exp_total) begin
        failures++;
        if (failures < 5) $display("total: got %0d exp %0d", total, exp_total);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_cg_shuffle: for G = 1..16 and several group sizes, checks that channel
// o = g*n + m is stored at m*G + g with shuffling on and at o with it off, and
// that the shuffled mapping is a permutation of 0..C-1.
module tb_cg_shuffle;
  import cg_pkg::*;

  logic en;
  logic [LG_W-1:0] log2_g;
  logic [CH_W-1:0] g, m, n, ch;
  int checks = 0, failures = 0;
  int sizes [5] = '{1, 2, 3, 8, 32};

  cg_shuffle dut (.*);

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int lg = 0; lg <= 4; lg++) begin
      foreach (sizes[si]) begin
        int gg, nn, c_tot;
        bit seen [int];
        gg = 1 << lg;
        nn = sizes[si];
        c_tot = gg * nn;
        seen.delete();
        for (int o = 0; o < c_tot; o++) begin
          int exp_s;
          // reshape the C channels to (G, n), transpose, flatten
          exp_s = (o % nn) * gg + (o / nn);
          log2_g = LG_W'(lg); n = CH_W'(nn); g = CH_W'(o / nn); m = CH_W'(o % nn);
          en = 1; #1;
          checks++;
          if (int'(ch) != exp_s) begin
            failures++;
            if (failures < 10) $display("G=%0d n=%0d o=%0d ch=%0d exp=%0d", gg, nn, o, ch, exp_s);
          end
          seen[int'(ch)] = 1;
          en = 0; #1;
          checks++;
          if (int'(ch) != o) begin
            failures++;
            if (failures < 10) $display("no-shuffle o=%0d ch=%0d", o, ch);
          end
        end
        checks++;
        if (seen.num() != c_tot) begin
          failures++;
          $display("G=%0d n=%0d: shuffle is not a permutation", gg, nn);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

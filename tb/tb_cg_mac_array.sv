// tb_cg_mac_array: loads random initial sums, runs random MAC sequences with
// random per-lane enables and compares every lane with a software model.
module tb_cg_mac_array;
  import cg_pkg::*;
  localparam int LANES = 4;

  logic clk = 0, rst_n = 0, load = 0, en = 0;
  acc_t init [LANES];
  logic [LANES-1:0] ok;
  data_t act [LANES];
  data_t weight;
  acc_t acc [LANES];
  longint model [LANES];
  int checks = 0, failures = 0;

  cg_mac_array #(.LANES(LANES)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ok = '0; weight = '0;
    for (int l = 0; l < LANES; l++) begin init[l] = '0; act[l] = '0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < 200; run++) begin
      int n;
      @(negedge clk);
      load = 1;
      for (int l = 0; l < LANES; l++) begin
        init[l]  = acc_t'($signed($urandom_range(0, 200000)) - 100000);
        model[l] = init[l];
      end
      @(negedge clk);
      load = 0;
      n = $urandom_range(1, 80);
      for (int t = 0; t < n; t++) begin
        en = 1;
        weight = data_t'($urandom());
        ok = LANES'($urandom());
        for (int l = 0; l < LANES; l++) begin
          act[l] = data_t'($urandom());
          if (ok[l]) model[l] += longint'(act[l]) * longint'(weight);
        end
        @(negedge clk);
      end
      en = 0;
      @(negedge clk);
      for (int l = 0; l < LANES; l++) begin
        checks++;
        if (longint'(acc[l]) != model[l]) begin
          failures++;
          if (failures < 10) $display("lane %0d acc=%0d exp=%0d", l, acc[l], model[l]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

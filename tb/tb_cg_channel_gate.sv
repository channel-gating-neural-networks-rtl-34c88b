// tb_cg_channel_gate: feeds random decision vectors for a number of tiles and
// checks the running count and the keep decision (count >= tau_count) after
// every tile, including tau_count = 0 and tau_count exactly reached.
module tb_cg_channel_gate;
  localparam int LANES = 16;

  logic clk = 0, rst_n = 0, clear = 0, add = 0;
  logic [LANES-1:0] d;
  logic [15:0] tau_count;
  logic [15:0] count;
  logic keep;
  int checks = 0, failures = 0;

  cg_channel_gate #(.LANES(LANES), .CNT_W(16)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input int exp_cnt, input int tau);
    checks++;
    if (int'(count) != exp_cnt || keep != (exp_cnt >= tau)) begin
      failures++;
      if (failures < 10)
        $display("mismatch count=%0d exp=%0d keep=%b tau=%0d", count, exp_cnt, keep, tau);
    end
  endtask

  initial begin
    d = '0; tau_count = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int ch = 0; ch < 200; ch++) begin
      int tiles, model;
      tiles = $urandom_range(1, 12);
      model = 0;
      tau_count = (ch % 5 == 0) ? 16'd0 : 16'($urandom_range(0, tiles * LANES / 2));
      @(negedge clk); clear = 1;
      @(negedge clk); clear = 0;
      check(0, int'(tau_count));
      for (int t = 0; t < tiles; t++) begin
        d = LANES'($urandom()) & LANES'($urandom());
        add = 1;
        @(negedge clk);
        add = 0;
        model += $countones(d);
        check(model, int'(tau_count));
      end
      // tau exactly at the count keeps the channel
      tau_count = 16'(model);
      #1 check(model, model);
      tau_count = 16'(model + 1);
      #1 check(model, model + 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

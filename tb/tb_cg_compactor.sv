// tb_cg_compactor: pushes random sparse lane masks and pops dense groups,
// comparing the order and the valid flags with a software queue; also checks
// simultaneous push and pop, wrap-around of the circular buffer and clear.
module tb_cg_compactor;
  localparam int LANES = 4, DEPTH = 16, EW = 12;

  logic clk = 0, rst_n = 0, clear = 0, push = 0, pop = 0;
  logic [LANES-1:0] push_mask, pop_valid;
  logic [EW-1:0] push_data [LANES];
  logic [EW-1:0] pop_data [LANES];
  logic [$clog2(DEPTH):0] count;
  logic [EW-1:0] model [$];
  int checks = 0, failures = 0;

  cg_compactor #(.LANES(LANES), .DEPTH(DEPTH), .EW(EW)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_head();
    checks++;
    if (int'(count) != model.size()) begin
      failures++;
      if (failures < 10) $display("count=%0d exp=%0d", count, model.size());
    end
    for (int l = 0; l < LANES; l++) begin
      logic expv;
      expv = (l < model.size());
      checks++;
      if (pop_valid[l] != expv || (expv && pop_data[l] != model[l])) begin
        failures++;
        if (failures < 10) $display("lane %0d valid=%b data=%h", l, pop_valid[l], pop_data[l]);
      end
    end
  endtask

  initial begin
    push_mask = '0;
    for (int l = 0; l < LANES; l++) push_data[l] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 4000; it++) begin
      @(negedge clk);
      check_head();
      push = 0; pop = 0; clear = 0;
      if (it % 500 == 499) begin
        clear = 1;
      end else begin
        if ($urandom_range(0, 2) != 0 && model.size() <= DEPTH - LANES) begin
          push = 1;
          push_mask = LANES'($urandom());
          for (int l = 0; l < LANES; l++) push_data[l] = EW'($urandom());
        end
        pop = ($urandom_range(0, 2) == 0);
      end
      // model: the pop takes from the head before the push lands
      if (clear) model.delete();
      else begin
        if (pop) for (int l = 0; l < LANES && model.size() > 0; l++) void'(model.pop_front());
        if (push) for (int l = 0; l < LANES; l++) if (push_mask[l]) model.push_back(push_data[l]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

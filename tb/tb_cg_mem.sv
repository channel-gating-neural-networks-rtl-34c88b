// tb_cg_mem: random writes on two ports and reads on three ports against a
// software array; checks the one-cycle read latency, read-first behaviour and
// that the higher-numbered write port wins on a collision.
module tb_cg_mem;
  localparam int WIDTH = 8, DEPTH = 64, NW = 2, NR = 3, AW = 6;

  logic clk = 0;
  logic [NW-1:0] we;
  logic [AW-1:0] waddr [NW];
  logic [WIDTH-1:0] wdata [NW];
  logic [AW-1:0] raddr [NR];
  logic [WIDTH-1:0] rdata [NR];
  logic [WIDTH-1:0] model [DEPTH];
  logic [WIDTH-1:0] exp_r [NR];
  int checks = 0, failures = 0;

  cg_mem #(.WIDTH(WIDTH), .DEPTH(DEPTH), .NW(NW), .NR(NR)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // fill every word once through port 0
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 2'b01; waddr[0] = AW'(a); wdata[0] = WIDTH'($urandom()); model[a] = wdata[0];
      waddr[1] = '0; wdata[1] = '0;
      for (int p = 0; p < NR; p++) raddr[p] = '0;
    end
    for (int it = 0; it < 3000; it++) begin
      @(negedge clk);
      we = NW'($urandom());
      for (int p = 0; p < NW; p++) begin
        waddr[p] = AW'($urandom());
        wdata[p] = WIDTH'($urandom());
      end
      if (it % 7 == 0) waddr[1] = waddr[0];   // collision
      for (int p = 0; p < NR; p++) begin
        raddr[p] = (p == 0) ? waddr[0] : AW'($urandom());
        exp_r[p] = model[raddr[p]];            // read-first
      end
      for (int p = 0; p < NW; p++) if (we[p]) model[waddr[p]] = wdata[p];
      @(posedge clk); #1;
      for (int p = 0; p < NR; p++) begin
        checks++;
        if (rdata[p] != exp_r[p]) begin
          failures++;
          if (failures < 10) $display("port %0d rdata=%h exp=%h", p, rdata[p], exp_r[p]);
        end
      end
    end
    // read back everything
    @(negedge clk);
    we = '0;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      raddr[0] = AW'(a);
      @(posedge clk); #1;
      checks++;
      if (rdata[0] != model[a]) begin
        failures++;
        if (failures < 10) $display("addr %0d rdata=%h exp=%h", a, rdata[0], model[a]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

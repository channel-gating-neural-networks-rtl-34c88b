// tb_cg_obuf_banked: self-checking test of the banked output buffer.
//
// Each cycle it drives random write requests from every lane, mixing
// addresses that collide in one bank with consecutive (conflict-free) runs.
// It checks that every bank grants exactly the lowest-numbered lane that
// addresses it, keeps a reference memory of the granted writes, and retries
// the losers until all are written. It then reads every word back through
// the host port (data one cycle after the address) and compares.
module tb_cg_obuf_banked;
  localparam int LANES = 4;
  localparam int WIDTH = 8;
  localparam int DEPTH = 256;
  localparam int AW    = $clog2(DEPTH);

  logic             clk = 1'b0;
  logic [LANES-1:0] req = '0;
  logic [AW-1:0]    waddr [LANES];
  logic [WIDTH-1:0] wdata [LANES];
  logic [LANES-1:0] grant;
  logic [AW-1:0]    raddr = '0;
  logic [WIDTH-1:0] rdata;

  int checks = 0, failures = 0;
  logic [WIDTH-1:0] ref_mem [DEPTH];

  cg_obuf_banked #(.LANES(LANES), .WIDTH(WIDTH), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [LANES-1:0] expected_grant(input logic [LANES-1:0] r);
    logic [LANES-1:0] g, taken;
    g = '0; taken = '0;
    for (int l = 0; l < LANES; l++) begin
      int b;
      b = int'(waddr[l]) % LANES;
      if (r[l] && !taken[b]) begin
        taken[b] = 1'b1;
        g[l] = 1'b1;
      end
    end
    return g;
  endfunction

  initial begin
    for (int i = 0; i < DEPTH; i++) ref_mem[i] = '0;
    // initialise all words so the read-back compares known contents
    for (int base = 0; base < DEPTH; base += LANES) begin
      @(negedge clk);
      for (int l = 0; l < LANES; l++) begin
        waddr[l] = AW'(base + l);
        wdata[l] = '0;
      end
      req = '1;
      #1;
      checks++;
      if (grant != '1) begin
        failures++;
        $display("FAIL: consecutive addresses not written in one cycle: grant=%b", grant);
      end
    end

    for (int t = 0; t < 2000; t++) begin
      logic [LANES-1:0] pend;
      @(negedge clk);
      if (t % 3 == 0) begin
        int base;
        base = $urandom_range(0, DEPTH - LANES);
        for (int l = 0; l < LANES; l++) waddr[l] = AW'(base + l);
      end else begin
        for (int l = 0; l < LANES; l++)
          waddr[l] = AW'($urandom_range(0, 7) * LANES + $urandom_range(0, 1));
      end
      for (int l = 0; l < LANES; l++) wdata[l] = WIDTH'($urandom);
      pend = LANES'($urandom) | LANES'(1);
      // distinct addresses within one batch, as the accelerator guarantees
      for (int l = 0; l < LANES; l++)
        for (int j = 0; j < l; j++)
          if (pend[j] && waddr[j] == waddr[l]) pend[l] = 1'b0;
      while (pend != '0) begin
        logic [LANES-1:0] eg;
        req = pend;
        #1;
        eg = expected_grant(pend);
        checks++;
        if (grant !== eg) begin
          failures++;
          if (failures < 10) $display("FAIL: req=%b grant=%b expected=%b", pend, grant, eg);
        end
        for (int l = 0; l < LANES; l++)
          if (eg[l]) ref_mem[waddr[l]] = wdata[l];
        pend = pend & ~eg;
        @(negedge clk);
      end
      req = '0;
    end

    @(negedge clk);
    req = '0;
    for (int a = 0; a < DEPTH; a++) begin
      raddr = AW'(a);
      @(negedge clk);
      checks++;
      if (rdata !== ref_mem[a]) begin
        failures++;
        if (failures < 10) $display("FAIL: word %0d read %0h expected %0h", a, rdata, ref_mem[a]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_cg_act_gate: checks the activation-wise gate against the step-function
// definitions, for both gate modes, with random partial sums and thresholds
// and with sums exactly at the thresholds (the step is 1 at zero).
module tb_cg_act_gate;
  import cg_pkg::*;
  localparam int LANES = 16;

  acc_t             psum [LANES];
  logic [LANES-1:0] valid, d;
  gate_mode_e       mode;
  acc_t             thr_lo, thr_hi;
  int checks = 0, failures = 0;

  cg_act_gate #(.LANES(LANES)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 3000; it++) begin
      mode   = gate_mode_e'(it % 2);
      thr_lo = acc_t'($signed($urandom_range(0, 2000)) - 1000);
      thr_hi = thr_lo + acc_t'($urandom_range(0, 1500));
      valid  = LANES'($urandom());
      for (int l = 0; l < LANES; l++) begin
        int sel;
        sel = $urandom_range(0, 3);
        case (sel)
          0: psum[l] = thr_lo;
          1: psum[l] = thr_hi;
          2: psum[l] = thr_lo - 1;
          default: psum[l] = acc_t'($signed($urandom_range(0, 6000)) - 3000);
        endcase
      end
      #1;
      for (int l = 0; l < LANES; l++) begin
        logic exp;
        // theta(x) = 1 for x >= 0
        if (mode == GATE_RELU) exp = (psum[l] - thr_lo) >= 0;
        else                   exp = ((thr_hi - psum[l]) >= 0) && ((psum[l] - thr_lo) >= 0);
        exp = exp && valid[l];
        checks++;
        if (d[l] !== exp) begin
          failures++;
          if (failures < 10)
            $display("mismatch mode=%0d x=%0d lo=%0d hi=%0d d=%b exp=%b",
                     mode, psum[l], thr_lo, thr_hi, d[l], exp);
        end
      end
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

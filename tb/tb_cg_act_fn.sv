// tb_cg_act_fn: compares the output stage with a reference: ReLU or identity,
// floor division by 2**shift, then saturation to the signed 8-bit range.
module tb_cg_act_fn;
  import cg_pkg::*;

  acc_t x;
  gate_mode_e mode;
  logic [4:0] shift;
  data_t y;
  int checks = 0, failures = 0;

  cg_act_fn dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 20000; it++) begin
      longint v, e, q;
      mode  = gate_mode_e'($urandom_range(0, 1));
      shift = 5'($urandom_range(0, 12));
      unique case (it % 3)
        0: x = acc_t'($signed($urandom_range(0, 600)) - 300);
        1: x = acc_t'($signed($urandom_range(0, 600000)) - 300000);
        default: x = acc_t'($urandom());
      endcase
      #1;
      v = longint'(x);
      if (mode == GATE_RELU && v < 0) v = 0;
      q = longint'(1) << shift;
      e = (v >= 0) ? v / q : -((-v + q - 1) / q);
      if (e > 127) e = 127;
      if (e < -128) e = -128;
      checks++;
      if (longint'(y) != e) begin
        failures++;
        if (failures < 10) $display("x=%0d mode=%0d shift=%0d y=%0d exp=%0d", x, mode, shift, y, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_macdo_cell: self-checking test of the MAC-DO cell model.
// Precharges the cell, applies random MAC/standby sequences and checks that
// V_Q = V_QN = VDD after precharge, V_QN - V_Q accumulates
// (wl_q - wl_qn + I_m) x tail_units per MAC phase, and standby holds.
module tb_macdo_cell;
  import macdo_pkg::*;
  localparam int IM = -1;
  logic clk = 0, prec = 0;
  int wl_q = 0, wl_qn = 0, tail_units = 0, vq, vqn;
  int checks = 0, failures = 0;

  macdo_cell #(.IM(IM)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int acc, vq_before;
    for (int op = 0; op < 20; op++) begin
      @(negedge clk);
      prec = 1; wl_q = 255; wl_qn = 255; tail_units = 0;
      @(negedge clk);
      prec = 0;
      check(vq == (1 << 20) && vqn == (1 << 20), "precharged to VDD");
      acc = 0;
      for (int k = 0; k < 100; k++) begin
        int m, t;
        bit neg;
        m = $urandom_range(0, 8); neg = $urandom_range(0, 1); t = $urandom_range(1, 20);
        wl_q  = neg ? 16 : 16 + m;
        wl_qn = neg ? 16 + m : 16;
        tail_units = t;
        @(negedge clk);
        acc += ((neg ? -m : m) + IM) * t;
        check(vqn - vq == acc, "accumulated difference");
        // standby: word lines off, tail off
        wl_q = 0; wl_qn = 0; tail_units = 0;
        vq_before = vq;
        @(negedge clk);
        check(vq == vq_before && vqn - vq == acc, "standby holds");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

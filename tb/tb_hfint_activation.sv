// tb_hfint_activation: exhaustive check of all 256 inputs in all four
// activation modes against real-valued references (Q.4 fixed point).
module tb_hfint_activation;
  import adaptivfloat_pkg::*;
  act_mode_e mode;
  logic signed [N_BITS-1:0] x, y;
  int checks = 0, failures = 0;

  hfint_activation dut (.*);

  initial begin
    for (int m = 0; m < 4; m++) begin
      for (int v = -(1 << (N_BITS - 1)); v < (1 << (N_BITS - 1)); v++) begin
        real xr, yr;
        mode = act_mode_e'(m); x = N_BITS'(v);
        xr = real'(v) / real'(1 << INT_FRAC);
        case (m)
          0: yr = xr;
          1: yr = xr < 0.0 ? 0.0 : xr;
          2: yr = xr > 1.0 ? 1.0 : (xr < -1.0 ? -1.0 : xr);
          default: begin
            yr = $floor(real'(v) / 4.0) / real'(1 << INT_FRAC) + 0.5;
            yr = yr > 1.0 ? 1.0 : (yr < 0.0 ? 0.0 : yr);
          end
        endcase
        #1; checks++;
        if (real'(y) / real'(1 << INT_FRAC) != yr) begin
          failures++;
          $display("FAIL mode=%0d x=%0d y=%0d exp=%f", m, v, y, yr);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000; failures++;
    $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule

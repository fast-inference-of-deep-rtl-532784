// tb_relu -- self-checking test of the ReLU activation.
//
// Sweeps corner values (most negative, -1 LSB, 0, +1 LSB, most positive) and
// random <16,6> values through an 8-wide instance and checks y = max(x, 0)
// and the clip flag against values computed here as integers.
module tb_relu;
  import nn_pkg::*;

  localparam int unsigned N = 8;
  fx_t         x [N];
  fx_t         y [N];
  logic [N-1:0] neg;
  int checks = 0, failures = 0, clipped = 0;

  relu #(.N(N)) dut (.x, .y, .neg);

  initial begin
    for (int t = 0; t < 500; t++) begin
      for (int i = 0; i < N; i++) begin
        case ((t + i) % 10)
          0: x[i] = FX_MIN;
          1: x[i] = -16'sd1;
          2: x[i] = 16'sd0;
          3: x[i] = 16'sd1;
          4: x[i] = FX_MAX;
          default: x[i] = fx_t'($urandom);
        endcase
      end
      #1;
      for (int i = 0; i < N; i++) begin
        int xi, ei;
        xi = int'(x[i]);
        ei = (xi < 0) ? 0 : xi;
        checks++;
        if (int'(y[i]) != ei || neg[i] != (xi < 0)) begin
          failures++;
          $display("FAIL x=%0d y=%0d neg=%b", xi, y[i], neg[i]);
        end
        if (xi < 0) clipped++;
      end
    end
    checks++;
    if (clipped == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

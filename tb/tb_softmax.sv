// tb_softmax -- self-checking test of the table-based softmax.
//
// Five-score vectors are streamed in, one per cycle, with gaps.  Scores are
// drawn from small ranges (close classes), the full <16,6> range (one class
// far ahead, which drives the table index past its last entry) and ties.
// Each output is compared with exp(x_i)/sum exp(x_j) computed here in double
// precision; the tolerance of 0.01 covers the 1/64 step of the exponential
// table, the 1/128 step of the reciprocal table and output truncation.  The
// sum of the five outputs must also be 1 within 0.03, and the latency must be
// 4 cycles at one vector per cycle.
module tb_softmax;
  import nn_pkg::*;

  localparam int unsigned N = 5, NVEC = 400;

  logic clk = 1'b0, rst_n = 1'b1;
  always #5 clk = ~clk;

  logic in_valid = 1'b0, out_valid;
  fx_t  in_x [N];
  fx_t  out_y [N];
  int   checks = 0, failures = 0, cyc = 0, sent = 0, got = 0, far = 0;
  logic [N*16-1:0] in_q [$];
  int   t_q [$];
  real  maxerr = 0.0;

  softmax #(.N(N)) dut (.clk, .rst_n, .in_valid, .in_x, .out_valid, .out_y);

  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (rst_n && in_valid) begin
    logic [N*16-1:0] p;
    for (int i = 0; i < N; i++) p[i*16 +: 16] = in_x[i];
    in_q.push_back(p);
    t_q.push_back(cyc);
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    logic [N*16-1:0] p;
    real e [N];
    real s, ys;
    int  t;
    p = in_q.pop_front();
    t = t_q.pop_front();
    checks++;
    if (cyc - t != 4) begin failures++; $display("FAIL latency %0d", cyc - t); end
    s = 0.0;
    for (int i = 0; i < N; i++) begin
      e[i] = $exp(real'(fx_t'(p[i*16 +: 16])) / 1024.0);
      s += e[i];
    end
    ys = 0.0;
    for (int i = 0; i < N; i++) begin
      real got_v, d;
      got_v = real'(out_y[i]) / 1024.0;
      ys += got_v;
      d = got_v - e[i] / s;
      if (d < 0) d = -d;
      if (d > maxerr) maxerr = d;
      checks++;
      if (d > 0.01) begin
        failures++;
        $display("FAIL vec %0d class %0d: got %f exp %f", got, i, got_v, e[i] / s);
      end
    end
    checks++;
    if (ys < 0.97 || ys > 1.03) begin failures++; $display("FAIL sum %f", ys); end
    got++;
  end

  initial begin
    foreach (in_x[i]) in_x[i] = '0;
    #1 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    while (sent < NVEC) begin
      @(negedge clk);
      if ($urandom_range(3) == 0) in_valid = 1'b0;
      else begin
        for (int i = 0; i < N; i++)
          case (sent % 4)
            0: in_x[i] = fx_t'(int'($urandom_range(4096)) - 2048);    // within +-2
            1: in_x[i] = fx_t'($urandom);                             // full range
            2: in_x[i] = fx_t'(int'($urandom_range(512)) - 256);      // within +-0.25
            default: in_x[i] = 16'sd300;                              // tie
          endcase
        if (sent % 4 == 1) far++;
        in_valid = 1'b1;
        sent++;
      end
    end
    @(negedge clk) in_valid = 1'b0;
    repeat (10) @(posedge clk);
    checks++;
    if (got != NVEC) begin failures++; $display("FAIL got %0d of %0d", got, NVEC); end
    $display("max abs error %f, far-apart vectors %0d", maxerr, far);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

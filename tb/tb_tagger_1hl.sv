// tb_tagger_1hl -- the small top-quark tagger (10 inputs, 32 ReLU, 1 output)
// assembled from the dense and relu blocks, at reuse factors 1 and 4.
//
// This network has a sigmoid output, which this RTL does not provide, so the
// test stops at the output score (the sigmoid input) and checks it bit for
// bit against an integer model, together with the latency of 2*(R+2) cycles
// and an interval of R cycles.  Weights come from layer ids 11 and 12 of the
// stand-in weight set.
module tb_tagger_1hl;
  import nn_pkg::*;

  localparam int unsigned NI = 10, NH = 32, NJ = 120;

  logic clk = 1'b0, rst_n = 1'b1;
  always #5 clk = ~clk;

  int checks = 0, failures = 0, done_cnt = 0;

  function automatic fx_t ref_score(input logic [NI*16-1:0] p);
    fx_t h [NH];
    longint a;
    for (int j = 0; j < NH; j++) begin
      a = longint'(jet_weights_pkg::bias(11, j)) * 1024;
      for (int i = 0; i < NI; i++)
        a += longint'(jet_weights_pkg::weight(11, j, i)) * longint'(fx_t'(p[i*16 +: 16]));
      a = a >>> 10;
      if (a > 32767) a = 32767;
      if (a < -32768) a = -32768;
      h[j] = (a < 0) ? 16'sd0 : fx_t'(a);
    end
    a = longint'(jet_weights_pkg::bias(12, 0)) * 1024;
    for (int j = 0; j < NH; j++)
      a += longint'(jet_weights_pkg::weight(12, 0, j)) * longint'(h[j]);
    a = a >>> 10;
    if (a > 32767) a = 32767;
    if (a < -32768) a = -32768;
    return fx_t'(a);
  endfunction

  for (genvar g = 0; g < 2; g++) begin : gen_net
    localparam int unsigned R = (g == 0) ? 1 : 4;
    logic in_valid = 1'b0, in_ready, hv, h_ready, ov;
    fx_t  x [NI];
    fx_t  hraw [NH];
    fx_t  h [NH];
    fx_t  y [1];
    logic [NH-1:0] hs;
    logic [0:0]    ys;
    logic [NI*16-1:0] q [$];
    int   tq [$];
    int   cyc = 0, sent = 0, got = 0, last = -1;

    dense #(.N_IN(NI), .N_OUT(NH), .REUSE(R), .LAYER_ID(11)) u_h (
      .clk, .rst_n, .in_valid, .in_ready, .in_x(x), .out_valid(hv), .out_y(hraw), .out_sat(hs));
    relu #(.N(NH)) u_r (.x(hraw), .y(h), .neg());
    dense #(.N_IN(NH), .N_OUT(1), .REUSE(R), .LAYER_ID(12)) u_o (
      .clk, .rst_n, .in_valid(hv), .in_ready(h_ready), .in_x(h), .out_valid(ov), .out_y(y), .out_sat(ys));

    always @(posedge clk) cyc <= cyc + 1;

    initial begin
      foreach (x[i]) x[i] = '0;
      @(posedge rst_n);
      while (sent < NJ) begin
        @(negedge clk);
        if (in_ready) begin
          for (int i = 0; i < NI; i++) x[i] = fx_t'(int'($urandom_range(6144)) - 3072);
          in_valid = 1'b1;
          sent++;
        end else in_valid = 1'b0;
      end
      @(negedge clk) in_valid = 1'b0;
    end

    always @(posedge clk) if (rst_n && in_valid && in_ready) begin
      logic [NI*16-1:0] p;
      for (int i = 0; i < NI; i++) p[i*16 +: 16] = x[i];
      q.push_back(p);
      tq.push_back(cyc);
      if (last >= 0) begin
        checks++;
        if (cyc - last != int'(R)) begin failures++; $display("FAIL R=%0d interval %0d", R, cyc - last); end
      end
      last = cyc;
    end

    always @(posedge clk) if (rst_n && ov) begin
      fx_t e;
      int  t;
      e = ref_score(q.pop_front());
      t = tq.pop_front();
      checks += 2;
      if (cyc - t != 2 * (int'(R) + 2)) begin failures++; $display("FAIL R=%0d latency %0d", R, cyc - t); end
      if (y[0] !== e) begin failures++; $display("FAIL R=%0d jet %0d: got %0d exp %0d", R, got, y[0], e); end
      got++;
      if (got == NJ) done_cnt++;
    end
  end

  initial begin
    #1 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (done_cnt == 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NJ * 8 + 200) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_jet_tagger -- end-to-end test of the jet tagger at a reuse factor of 3.
//
// Random jets (16 standardised features, mostly within +-3, every eighth jet
// with features over the full <16,6> range so that hidden neurons clip) are
// presented as fast as in_ready allows, with random idle cycles.  For every
// jet the five output-layer scores are compared bit for bit with the integer
// model in jet_ref_pkg, and the five probabilities with the double-precision
// softmax of those scores (tolerance 0.01).  Also checked: the latency of
// 4*(REUSE+2)+4 cycles from the edge that takes the jet to the edge that can
// take the probabilities, the interval of REUSE cycles between jets, and the
// saturation counter against the model.  The test fails if any of these
// mechanisms never happened: jets overlapping in the pipeline, the input held
// off by the reuse factor (only when REUSE > 1), hidden-layer saturation and
// ReLU clipping.
module tb_jet_tagger;
  import nn_pkg::*;
  import jet_ref_pkg::*;

  localparam int unsigned NJET = 150;
  localparam int unsigned R    = 3;

  logic clk = 1'b0, rst_n = 1'b1;
  always #5 clk = ~clk;

  logic        in_valid = 1'b0, in_ready, out_valid;
  fx_t         in_x  [NET_N_IN];
  fx_t         out_y [NET_N_OUT];
  logic [31:0] sat_count;

  jet_tagger #(.REUSE(R)) dut (.clk, .rst_n, .in_valid, .in_ready, .in_x, .out_valid, .out_y, .sat_count);

  localparam int unsigned LAT = 4 * (R + 2) + 4;

  int checks = 0, failures = 0, cyc = 0, sent = 0, got = 0;
  int ref_sat = 0, n_overlap = 0, n_hold = 0, n_relu = 0, last_acc = -1;
  int inflight = 0;
  in_vec_t jet_q [$];
  int      t_q   [$];
  real     maxerr = 0.0;

  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (rst_n && dut.u_l1.out_valid) n_relu += $countones(dut.u_r1.neg);

  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) begin
      in_vec_t p;
      for (int i = 0; i < NET_N_IN; i++) p[i*16 +: 16] = in_x[i];
      jet_q.push_back(p);
      t_q.push_back(cyc);
      if (last_acc >= 0) begin
        checks++;
        if (cyc - last_acc < int'(R)) begin failures++; $display("FAIL interval %0d", cyc - last_acc); end
      end
      last_acc = cyc;
      if (jet_q.size() > 1) n_overlap++;
    end
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    in_vec_t  x;
    out_vec_t z, zd;
    int       t;
    x = jet_q.pop_front();
    t = t_q.pop_front();
    z = scores(x, ref_sat);
    checks++;
    if (cyc - t != int'(LAT)) begin failures++; $display("FAIL latency %0d, expected %0d", cyc - t, LAT); end
    // scores (softmax input) were registered in the softmax first stage; the
    // bit-exact check uses the output layer value captured at its strobe
    zd = z_hist.pop_front();
    for (int k = 0; k < NET_N_OUT; k++) begin
      real pe, pg, d;
      checks++;
      if (zd[k*16 +: 16] !== z[k*16 +: 16]) begin
        failures++;
        $display("FAIL jet %0d score %0d: got %0d exp %0d", got, k, fx_t'(zd[k*16 +: 16]), fx_t'(z[k*16 +: 16]));
      end
      pe = prob(z, k);
      pg = real'(out_y[k]) / 1024.0;
      d  = (pg > pe) ? pg - pe : pe - pg;
      if (d > maxerr) maxerr = d;
      checks++;
      if (d > 0.01) begin failures++; $display("FAIL jet %0d class %0d: p %f exp %f", got, k, pg, pe); end
    end
    got++;
  end

  // output-layer scores as they leave the last dense layer
  out_vec_t z_hist [$];
  always @(posedge clk) if (rst_n && dut.z_valid) begin
    out_vec_t p;
    for (int k = 0; k < NET_N_OUT; k++) p[k*16 +: 16] = dut.z[k];
    z_hist.push_back(p);
  end

  initial begin
    foreach (in_x[i]) in_x[i] = '0;
    #1 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    while (sent < NJET) begin
      @(negedge clk);
      if ($urandom_range(7) == 0 && sent > 4) begin
        in_valid = 1'b0;                      // idle cycle
      end else if (!in_ready) begin
        in_valid = 1'b0;                      // held off by the reuse factor
        n_hold++;
      end else begin
        for (int i = 0; i < NET_N_IN; i++)
          in_x[i] = (sent % 8 == 7) ? fx_t'($urandom) : fx_t'(int'($urandom_range(6144)) - 3072);
        in_valid = 1'b1;
        sent++;
      end
    end
    @(negedge clk) in_valid = 1'b0;
    repeat (LAT + 5) @(posedge clk);
    checks++;
    if (got != NJET) begin failures++; $display("FAIL got %0d of %0d jets", got, NJET); end
    checks++;
    if (sat_count != 32'(ref_sat)) begin failures++; $display("FAIL sat_count %0d, model %0d", sat_count, ref_sat); end
    checks++;
    if (n_overlap == 0) begin failures++; $display("FAIL pipeline never held two jets"); end
    checks++;
    if (R > 1 && n_hold == 0) begin failures++; $display("FAIL input never held off"); end
    checks++;
    if (ref_sat == 0) begin failures++; $display("FAIL no saturation exercised"); end
    checks++;
    if (n_relu == 0) begin failures++; $display("FAIL ReLU never clipped"); end
    $display("REUSE=%0d latency=%0d jets=%0d overlaps=%0d holds=%0d saturations=%0d relu_clips=%0d max_p_err=%f",
             R, LAT, got, n_overlap, n_hold, ref_sat, n_relu, maxerr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NJET * (R + 2) + 200) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

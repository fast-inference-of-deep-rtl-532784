// tb_dense -- self-checking test of the dense layer at two reuse factors.
//
// Two layers with the same weights (layer id 9, 20 inputs, 4 neurons) are run
// side by side: one fully parallel (REUSE = 1) and one with REUSE = 3, which
// also exercises products that share a multiplier across two neurons and the
// zero padding of the last multiplier (80 products on 27 multipliers).  The
// multiplier count, ceil(N_IN*N_OUT/REUSE), is checked too.  Random input vectors, some of them large enough to saturate, are sent
// as fast as in_ready allows.  Each result is compared with W*x + b computed
// here in 64-bit integers, truncated and saturated to <16,6>; the latency
// (REUSE+2 cycles from the edge that takes the input to the edge
// that can take the result) and the initiation interval (REUSE cycles) are checked.
module tb_dense;
  import nn_pkg::*;

  localparam int unsigned NI = 20, NO = 4, LID = 9, NVEC = 200;

  logic clk = 1'b0, rst_n = 1'b1;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int sat_seen = 0, stall_seen = 0;

  // expected output of vector x
  function automatic void ref_layer(input fx_t x [NI], output fx_t y [NO], output logic [NO-1:0] s);
    for (int j = 0; j < NO; j++) begin
      longint acc;
      acc = longint'(jet_weights_pkg::bias(LID, j)) * 1024;
      for (int i = 0; i < NI; i++)
        acc += longint'(jet_weights_pkg::weight(LID, j, i)) * longint'(x[i]);
      acc = acc >>> 10;
      s[j] = (acc > 32767) || (acc < -32768);
      y[j] = (acc > 32767) ? 16'sh7fff : (acc < -32768) ? 16'sh8000 : fx_t'(acc);
    end
  endfunction

  // one generic driver/checker per reuse factor
  for (genvar g = 0; g < 2; g++) begin : gen_dut
    localparam int unsigned R = (g == 0) ? 1 : 3;
    logic in_valid, in_ready, out_valid;
    fx_t  in_x [NI];
    fx_t  out_y [NO];
    logic [NO-1:0] out_sat;
    logic [NI*16-1:0] in_q [$];
    int   t_in [$];
    int   cyc = 0, last_acc = -100, sent = 0, got = 0;

    dense #(.N_IN(NI), .N_OUT(NO), .REUSE(R), .LAYER_ID(LID)) dut (
      .clk, .rst_n, .in_valid, .in_ready, .in_x, .out_valid, .out_y, .out_sat);

    always @(posedge clk) cyc <= cyc + 1;

    // driver: offer a new vector whenever allowed
    initial begin
      in_valid = 1'b0;
      foreach (in_x[i]) in_x[i] = '0;
      @(posedge rst_n);
      while (sent < NVEC) begin
        @(negedge clk);
        if (in_ready) begin
          for (int i = 0; i < NI; i++)
            if (sent % 10 == 9)       // drive one neuron towards the positive limit
              in_x[i] = (jet_weights_pkg::weight(LID, sent % NO, i) >= 0) ? FX_MAX : FX_MIN;
            else if (sent % 10 == 8)  // full-range random values
              in_x[i] = fx_t'($urandom);
            else
              in_x[i] = fx_t'(int'($urandom_range(4096)) - 2048);
          in_valid = 1'b1;
          sent++;
        end else begin
          in_valid = 1'b0;
          stall_seen++;
        end
      end
      @(negedge clk) in_valid = 1'b0;
    end

    // accepted-input timestamps and interval check
    always @(posedge clk) if (rst_n && in_valid && in_ready) begin
      if (last_acc >= 0) begin
        checks++;
        if (cyc - last_acc != R) begin
          failures++;
          $display("FAIL R=%0d interval %0d", R, cyc - last_acc);
        end
      end
      last_acc = cyc;
      t_in.push_back(cyc);
      begin
        logic [NI*16-1:0] p;
        for (int i = 0; i < NI; i++) p[i*16 +: 16] = in_x[i];
        in_q.push_back(p);
      end
    end

    always @(posedge clk) if (rst_n && out_valid) begin
      fx_t y [NO];
      logic [NO-1:0] s;
      int t;
      begin
        logic [NI*16-1:0] p;
        fx_t xv [NI];
        p = in_q.pop_front();
        for (int i = 0; i < NI; i++) xv[i] = fx_t'(p[i*16 +: 16]);
        ref_layer(xv, y, s);
      end
      t = t_in.pop_front();
      got++;
      checks++;
      if (cyc - t != int'(R) + 2) begin
        failures++;
        $display("FAIL R=%0d latency %0d", R, cyc - t);
      end
      for (int j = 0; j < NO; j++) begin
        checks++;
        if (out_y[j] !== y[j] || out_sat[j] !== s[j]) begin
          failures++;
          $display("FAIL R=%0d vec %0d neuron %0d: got %0d/%b exp %0d/%b", R, got, j,
                   out_y[j], out_sat[j], y[j], s[j]);
        end
        if (s[j]) sat_seen++;
      end
    end
  end

  initial begin
    #1 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (gen_dut[0].got == NVEC && gen_dut[1].got == NVEC);
    repeat (5) @(posedge clk);
    // multiplier count: ceil(N_IN*N_OUT/REUSE)
    checks++;
    if (gen_dut[0].dut.NMULT != 80 || gen_dut[1].dut.NMULT != 27) begin
      failures++;
      $display("FAIL multiplier count %0d/%0d", gen_dut[0].dut.NMULT, gen_dut[1].dut.NMULT);
    end
    checks++;
    if (sat_seen == 0) begin failures++; $display("FAIL no saturation exercised"); end
    checks++;
    if (stall_seen == 0) begin failures++; $display("FAIL reuse>1 never held off the input"); end
    $display("saturations=%0d input holds=%0d", sat_seen, stall_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

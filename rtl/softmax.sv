// softmax -- output activation of the classifier, built from two lookup tables.
//
// y[i] = exp(x[i]) / sum_j exp(x[j]) for N scores in <16,6> fixed point.  The
// smooth functions are not computed at run time: as for every non-trivial
// activation, their values are precomputed over a range of inputs and read
// from tables, which an FPGA keeps in block RAM.  The arithmetic around the
// tables is this design's choice:
//   1. m = max_j x[j];  d[i] = m - x[i] >= 0            (exp then stays <= 1)
//   2. e[i] = EXP_ROM[min(d[i], 8 - 1/1024) * 64]       512 entries, step 1/64,
//                                                       e = exp(-k/64), UQ1.15
//   3. S = sum e[i], 1 <= S <= N;  r = INV_ROM[(S-1)*128] 512 entries,
//                                                       r = 1/(1+(k+0.5)/128), UQ1.15
//   4. y[i] = e[i] * r, brought to <16,6> (truncated), so 0 <= y[i] <= 1.0
// Subtracting the maximum keeps the table input in [0, 8) whatever the range
// of the scores; a difference of 8 or more gives exp(-8) ~ 3e-4, below one
// output step.  Both tables are filled at elaboration from $exp and division.
//
// Timing: fully pipelined, one vector per cycle.  Stage registers at steps
// 1..4, so out_valid follows in_valid by 4 clock edges (the vector sampled at
// edge E is on out_y after edge E+3).  The table reads are registered, as a
// block RAM read would be.  Because every probability is at most 1.0, the
// upper integer bits of out_y are always zero; they are kept so that the
// output has the same <16,6> format as every other value in the network.
module softmax
  import nn_pkg::*;
#(
  parameter int unsigned N = 5
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  fx_t  in_x [N],
  output logic out_valid,
  output fx_t  out_y [N]
);

  localparam int unsigned EXP_N   = 512;   // table entries
  localparam int unsigned EXP_SH  = 4;     // raw difference >> 4 = units of 1/64
  localparam int unsigned INV_N   = 512;
  localparam int unsigned INV_SH  = 8;     // (S-1) in UQ.15 >> 8 = units of 1/128
  localparam int unsigned ONE_U15 = 32768;
  localparam int unsigned SUM_W   = 16 + $clog2(N + 1);

  typedef logic [15:0] u16_t;
  typedef u16_t exp_rom_t [EXP_N];
  typedef u16_t inv_rom_t [INV_N];

  function automatic exp_rom_t make_exp_rom();
    exp_rom_t t;
    for (int k = 0; k < EXP_N; k++)
      t[k] = u16_t'(int'($floor($exp(-real'(k) / 64.0) * 32768.0 + 0.5)));
    return t;
  endfunction

  function automatic inv_rom_t make_inv_rom();
    inv_rom_t t;
    for (int k = 0; k < INV_N; k++)
      t[k] = u16_t'(int'($floor(32768.0 / (1.0 + (real'(k) + 0.5) / 128.0) + 0.5)));
    return t;
  endfunction

  localparam exp_rom_t EXP_ROM = make_exp_rom();
  localparam inv_rom_t INV_ROM = make_inv_rom();

  // ---- stage 1: distance from the maximum ------------------------------------
  logic [W_TOT:0] d_q [N];   // m - x[i], 0 .. 65535
  logic           v1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0;
      for (int unsigned i = 0; i < N; i++) d_q[i] <= '0;
    end else begin
      v1 <= in_valid;
      if (in_valid) begin
        fx_t m;
        m = in_x[0];
        for (int unsigned i = 1; i < N; i++) if (in_x[i] > m) m = in_x[i];
        for (int unsigned i = 0; i < N; i++)
          d_q[i] <= (W_TOT+1)'($signed({m[W_TOT-1], m}) - $signed({in_x[i][W_TOT-1], in_x[i]}));
      end
    end
  end

  // ---- stage 2: exponential table --------------------------------------------
  u16_t e_q [N];
  logic v2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v2 <= 1'b0;
      for (int unsigned i = 0; i < N; i++) e_q[i] <= '0;
    end else begin
      v2 <= v1;
      if (v1) begin
        for (int unsigned i = 0; i < N; i++) begin
          logic [W_TOT:0] k;
          k = d_q[i] >> EXP_SH;
          e_q[i] <= (k >= (W_TOT+1)'(EXP_N)) ? EXP_ROM[EXP_N-1] : EXP_ROM[k[$clog2(EXP_N)-1:0]];
        end
      end
    end
  end

  // ---- stage 3: sum and reciprocal table -------------------------------------
  logic [SUM_W-1:0] sum_c;
  u16_t             r_q;
  u16_t             e3_q [N];
  logic             v3;

  always_comb begin
    sum_c = '0;
    for (int unsigned i = 0; i < N; i++) sum_c = sum_c + SUM_W'(e_q[i]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v3  <= 1'b0;
      r_q <= '0;
      for (int unsigned i = 0; i < N; i++) e3_q[i] <= '0;
    end else begin
      v3 <= v2;
      if (v2) begin
        logic [SUM_W-1:0] k;
        // the largest score has d = 0 and e = 1.0, so sum_c >= 1.0 always
        k = (sum_c - SUM_W'(ONE_U15)) >> INV_SH;
        r_q  <= (k >= SUM_W'(INV_N)) ? INV_ROM[INV_N-1] : INV_ROM[k[$clog2(INV_N)-1:0]];
        e3_q <= e_q;
      end
    end
  end

  // ---- stage 4: normalise ----------------------------------------------------
  logic v4;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v4 <= 1'b0;
      for (int unsigned i = 0; i < N; i++) out_y[i] <= '0;
    end else begin
      v4 <= v3;
      if (v3) begin
        for (int unsigned i = 0; i < N; i++) begin
          logic [31:0] p;
          p = 32'(e3_q[i]) * 32'(r_q);          // 30 fractional bits
          out_y[i] <= fx_t'(p >> (30 - W_FRAC));
        end
      end
    end
  end

  assign out_valid = v4;

endmodule

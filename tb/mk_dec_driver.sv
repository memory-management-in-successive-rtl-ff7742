// mk_dec_driver: stimulus and checker for one mk_sc_decoder instance.
//
// For each of NCW codewords it draws random information bits and a random
// frozen set, encodes u*G_N, maps the code bits to LLRs (+AMP for 0, -AMP
// for 1) plus a noise term of spread NOISE (0 = noiseless), loads them in
// natural order and pulses start. It then checks
//   * the streamed decisions (bit_valid/bit_idx/bit_val) arrive in order and
//     match the software SC reference of mk_tb_ref_pkg,
//   * u_hat after done equals the reference, and equals the transmitted u
//     when there is no noise,
//   * frozen positions decode to 0,
//   * the start-to-done latency matches the schedule: per bit
//     (s-z+1) LLR cycles + 1 decision cycle + max(m-1,0) partial-sum cycles,
//     z from the LLR-update rule and m the trailing maximal digits, no
//     partial-sum cycles for the last bit, plus one final cycle.
// checks/failures are running totals; finished rises when all are done.
module mk_dec_driver
  import mk_tb_ref_pkg::*;
#(
  parameter int unsigned S = 3,
  parameter int unsigned P [1:S] = '{2, 2, 3},
  parameter int unsigned Q = 6,
  parameter int unsigned NCW = 20,
  parameter int          AMP = 8,
  parameter int          NOISE = 0,
  localparam int unsigned N  = prod_all(),
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  output logic                llr_we,
  output logic [IW-1:0]       llr_idx,
  output logic signed [Q-1:0] llr_in,
  output logic [N-1:0]        frozen,
  output logic                start,
  input  logic                busy,
  input  logic                done,
  input  logic                bit_valid,
  input  logic [IW-1:0]       bit_idx,
  input  logic                bit_val,
  input  logic [N-1:0]        u_hat,
  output int                  checks,
  output int                  failures,
  output logic                finished
);

  function automatic int unsigned prod_all();
    int unsigned r = 1;
    for (int unsigned t = 1; t <= S; t++) r *= P[t];
    return r;
  endfunction

  int ks[$];
  bit u_tx[$], x_tx[$], fz[$], u_ref[$];
  int y[$];
  int exp_lat;
  int next_bit;
  int bit_errs;
  logic [N-1:0] fz_vec;

  // expected start-to-done cycles, from Algorithms 2 and 4 of the scheme
  function automatic int expected_latency();
    int tot, ii, z, m, rem;
    tot = 0;
    for (int i = 0; i < N; i++) begin
      // LLR update: first vector z (repeated division by p_s, p_{s-1}, ...)
      z = 1;
      if (i != 0) begin
        ii = i;
        for (int t = S; t >= 1; t--) begin
          if (ii % P[t] != 0) begin z = t; break; end
          ii = ii / P[t];
        end
      end
      // number of trailing digits at their maximum
      m = 0;
      rem = i;
      for (int t = S; t >= 1; t--) begin
        if (rem % P[t] != P[t] - 1) break;
        m++;
        rem = rem / P[t];
      end
      tot += (S - z + 1) + 1;
      if (i != N - 1 && m > 1) tot += m - 1;
    end
    return tot + 1;
  endfunction

  function automatic int noise_sample();
    int acc;
    acc = 0;
    for (int k = 0; k < 4; k++) acc += int'($urandom_range(0, 2 * NOISE));
    return (NOISE == 0) ? 0 : (acc - 4 * NOISE) / 2;
  endfunction

  // decisions streamed while decoding
  always @(posedge clk) begin
    if (rst_n && bit_valid) begin
      checks++;
      if (int'(bit_idx) != next_bit || bit_val !== u_ref[next_bit]) begin
        failures++;
        $display("stream mismatch: idx %0d (expected %0d) bit %0d (expected %0d)",
                 bit_idx, next_bit, bit_val, u_ref[next_bit]);
      end
      next_bit++;
    end
  end

  initial begin
    int cyc, v;
    checks = 0; failures = 0; finished = 0;
    llr_we = 0; llr_idx = '0; llr_in = '0; frozen = '0; start = 0;
    ks = {};
    for (int t = 1; t <= S; t++) ks.push_back(P[t]);
    exp_lat = expected_latency();
    @(posedge rst_n);
    repeat (2) @(posedge clk);
    for (int cw = 0; cw < NCW; cw++) begin
      u_tx = {}; fz = {}; y = {};
      for (int i = 0; i < N; i++) begin
        fz.push_back(bit'($urandom_range(0, 1)));
        u_tx.push_back(fz[i] ? 1'b0 : bit'($urandom_range(0, 1)));
      end
      encode(ks, u_tx, x_tx);
      for (int n = 0; n < N; n++) begin
        v = (x_tx[n] ? -AMP : AMP) + noise_sample();
        if (v > lmax(Q)) v = lmax(Q);
        if (v < -lmax(Q)) v = -lmax(Q);
        y.push_back(v);
      end
      sc_ref(ks, y, fz, Q, u_ref);
      // load channel LLRs in natural order
      for (int n = 0; n < N; n++) begin
        llr_we <= 1; llr_idx <= IW'(n); llr_in <= Q'(y[n]);
        @(posedge clk);
      end
      llr_we <= 0;
      for (int i = 0; i < N; i++) fz_vec[i] = fz[i];
      frozen <= fz_vec;
      next_bit = 0;
      start <= 1;
      @(posedge clk);
      start <= 0;
      cyc = 0;
      do begin
        @(posedge clk);
        cyc++;
      end while (!done && cyc < 100 * N * S);
      #1;
      checks++;
      if (cyc != exp_lat) begin
        failures++;
        $display("codeword %0d: latency %0d cycles, expected %0d", cw, cyc, exp_lat);
      end
      checks++;
      if (next_bit != N) begin
        failures++;
        $display("codeword %0d: %0d decisions streamed, expected %0d", cw, next_bit, N);
      end
      bit_errs = 0;
      for (int i = 0; i < N; i++) begin
        checks++;
        if (u_hat[i] !== u_ref[i]) begin
          failures++;
          $display("codeword %0d: u_hat[%0d]=%0d reference %0d", cw, i, u_hat[i], u_ref[i]);
        end
        if (fz[i]) begin
          checks++;
          if (u_hat[i] !== 1'b0) failures++;
        end
        if (u_hat[i] !== u_tx[i]) bit_errs++;
      end
      if (NOISE == 0) begin
        checks++;
        if (bit_errs != 0) begin
          failures++;
          $display("codeword %0d: %0d bit errors on a noiseless channel", cw, bit_errs);
        end
      end
      @(posedge clk);
    end
    finished = 1;
  end

endmodule

`timescale 1ns/1fs
// sounder_bench: end-to-end measurement set-up around two sounder chips.
//
// One chip (u_tx) runs in transmitter mode and sends its PN sequence through a
// simulated two-path channel; a second chip (u_rx) starts in transmitter mode
// (its receiver branch must then stay silent), is switched to receiver mode and
// correlates the channel output against its slow-clock sequence. Both chips are
// reset together and share the fast clock, as after clock calibration and code
// synchronization at the start of a measurement. The receiver's clock is
// T_SLOW instead of T_FAST, giving the sliding factor
//   gamma = alpha / (alpha - beta) = T_SLOW / (T_SLOW - T_FAST).
//
// Channel: in-phase input = A1_I * s(t - D1) + A2_I * s(t - D2),
//          quadrature input = A2_Q * s(t - D2), delays in fast-clock chips,
// s mapped to +-1, amplitudes in millivolts.
//
// The off-chip filters are moving sums over W samples (corr_lpf_model). The
// checks:
//  * transmitter: chip-by-chip agreement with a reference m-sequence, period
//    2^N - 1, balance, and the run-length histogram of an m-sequence
//    (2^(N-2-k) runs of each kind of length k < N-1, one run of N-1 zeros,
//    one run of N ones);
//  * mode switch: receiver branch silent in TX mode, pn_tx silent in RX mode;
//  * synchronization: sync peaks repeat every (2^N - 1) * gamma fast cycles;
//  * power delay profile: each peak of I^2 + Q^2 lies D * gamma fast cycles
//    after the preceding sync peak for one of the two paths, with the I and Q
//    amplitudes of that path.
// Mechanism counts are reported and a mechanism that never occurs is a failure.
module sounder_bench
  import sounder_pkg::*;
#(
  parameter int             N       = 5,
  parameter logic [N_MAX:1] SW      = 12'b0000_0000_0100,
  parameter realtime        T_FAST  = 1.0,
  parameter realtime        T_SLOW  = 1.01,
  parameter int             W       = 31,
  parameter int             D1      = 3,
  parameter int             D2      = 9,
  parameter int             A1_I    = 400,
  parameter int             A2_I    = 200,
  parameter int             A2_Q    = 300,
  parameter int             PERIODS = 3
) (
  output logic done,
  output int   checks,
  output int   failures
);

  localparam int  L         = (1 << N) - 1;
  localparam real GAMMA     = T_SLOW / (T_SLOW - T_FAST);
  localparam real SYNC_PER  = real'(L) * GAMMA;          // in fast cycles
  localparam real TOL       = GAMMA / 2.0 + 2.0;
  // magnitude of the weaker channel path, in mV
  localparam real PATH1     = real'(A1_I);
  localparam real PATH2     = $sqrt(real'(A2_I * A2_I + A2_Q * A2_Q));
  localparam real PATH_MIN  = PATH1 < PATH2 ? PATH1 : PATH2;

  logic clk_fast = 1'b0, clk_slow = 1'b0, reset_n = 1'b0;
  mode_e tx_mode = MODE_TX, rx_mode = MODE_TX;
  logic [2:0] s_sel = 3'(N - N_MIN);

  always #(T_FAST / 2.0) clk_fast = ~clk_fast;
  initial begin
    #(T_SLOW / 4.0);
    forever #(T_SLOW / 2.0) clk_slow = ~clk_slow;
  end

  // transmitter chip: only pn_tx is used
  logic tx_pn;
  mv_t  tx_sp, tx_sn, tx_ip, tx_in, tx_qp, tx_qn;
  sounder_top u_tx (
    .clk_fast(clk_fast), .clk_slow(clk_slow), .reset_n(reset_n), .mode(tx_mode),
    .s_sel(s_sel), .sw(SW), .if_i_p('0), .if_i_n('0), .if_q_p('0), .if_q_n('0),
    .pn_tx(tx_pn), .sync_p(tx_sp), .sync_n(tx_sn), .rs_i_p(tx_ip), .rs_i_n(tx_in),
    .rs_q_p(tx_qp), .rs_q_n(tx_qn));

  // channel: delay line of transmitted chips, one stage per fast cycle
  logic [D2:1] dly = '0;
  always @(posedge clk_fast) dly <= {dly[D2-1:1], tx_pn};
  // The delay line samples pn_tx at the same edge that updates it, so tap k is
  // pn_tx exactly k chips earlier.
  int v_i, v_q;
  always_comb begin
    v_i = (dly[D1] ? A1_I : -A1_I) + (dly[D2] ? A2_I : -A2_I);
    v_q = (dly[D2] ? A2_Q : -A2_Q);
  end
  mv_t if_i_p, if_i_n, if_q_p, if_q_n;
  assign if_i_p = mv_t'(v_i / 2);
  assign if_i_n = mv_t'(v_i / 2 - v_i);
  assign if_q_p = mv_t'(v_q / 2);
  assign if_q_n = mv_t'(v_q / 2 - v_q);

  // receiver chip
  logic rx_pn;
  mv_t  sync_p, sync_n, rs_i_p, rs_i_n, rs_q_p, rs_q_n;
  sounder_top u_rx (
    .clk_fast(clk_fast), .clk_slow(clk_slow), .reset_n(reset_n), .mode(rx_mode),
    .s_sel(s_sel), .sw(SW), .if_i_p(if_i_p), .if_i_n(if_i_n), .if_q_p(if_q_p),
    .if_q_n(if_q_n), .pn_tx(rx_pn), .sync_p(sync_p), .sync_n(sync_n),
    .rs_i_p(rs_i_p), .rs_i_n(rs_i_n), .rs_q_p(rs_q_p), .rs_q_n(rs_q_n));

  // board filters
  int     x_sync, x_i, x_q;
  longint y_sync, y_i, y_q;
  assign x_sync = int'(sync_p) - int'(sync_n);
  assign x_i    = int'(rs_i_p) - int'(rs_i_n);
  assign x_q    = int'(rs_q_p) - int'(rs_q_n);
  corr_lpf_model #(.W(W)) u_lpf_sync (.clk(clk_fast), .x(x_sync), .y(y_sync));
  corr_lpf_model #(.W(W)) u_lpf_i    (.clk(clk_fast), .x(x_i),    .y(y_i));
  corr_lpf_model #(.W(W)) u_lpf_q    (.clk(clk_fast), .x(x_q),    .y(y_q));

  // mechanism counters
  int n_tx_seq_ok = 0, n_rx_quiet_tx = 0, n_mode_switch = 0, n_tx_quiet_rx = 0;
  int n_sync = 0, n_pdp1 = 0, n_pdp2 = 0;

  // Amplitude tolerance: 30 % of the largest path, plus the cross-correlation
  // noise of a window shorter than the code (about sqrt(W) per unit amplitude).
  localparam real AMP_TOL = 0.3 * real'(W) * PATH1
                          + ((W < L) ? 1.5 * $sqrt(real'(W)) * real'(A1_I + A2_I + A2_Q) : 0.0);

  function automatic bit near(longint got, longint want);
    return real'(got - want) < AMP_TOL && real'(want - got) < AMP_TOL;
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL [N=%0d] %s at %0t", N, what, $time);
    end
  endtask

  bit seq[$];
  longint sync_pk[$];
  longint pdp_pk[$];
  longint pdp_i[$], pdp_q[$];

  initial begin
    int unsigned st, poly, mask;
    bit mism, quiet;
    int ones;
    longint cyc;
    mism = 0; quiet = 1; ones = 0;
    done = 1'b0; checks = 0; failures = 0;

    // ---------------- reset, transmitter phase ----------------
    repeat (3) @(negedge clk_fast);
    reset_n = 1'b1;
    mask = (1 << N) - 1;
    poly = 1;
    for (int k = 1; k < N; k++) if (SW[k]) poly |= (1 << k);
    st = mask;
    check(tx_pn == 1'b1, "first chip after reset");
    for (int i = 0; i < 2 * L; i++) begin
      bit fb;
      fb = bit'((st >> (N - 1)) & 1);
      st = ((st << 1) & mask) ^ (fb ? poly : 0);
      @(negedge clk_fast);
      if (tx_pn !== fb) mism = 1;
      if (rx_pn !== fb) mism = 1;        // receiver chip is in TX mode too
      if (sync_p != 0 || sync_n != 0) quiet = 0;
      seq.push_back(tx_pn);
    end
    check(!mism, "transmitted chips match the reference m-sequence");
    check(quiet, "sync mixer silent in TX mode");
    if (quiet) n_rx_quiet_tx++;
    for (int i = 0; i < L; i++) begin
      ones += seq[i];
      if (seq[i] != seq[i + L]) mism = 1;
    end
    check(!mism, "period 2^N-1");
    check(ones == (1 << (N - 1)), "balance of ones and zeros");
    begin
      int runs1[int], runs0[int];
      int start, i, len;
      bit ok;
      start = 1; i = 0; ok = 1;
      while (start < L && seq[start] == seq[start - 1]) start++;
      while (i < L) begin
        len = 1;
        while (len < L && seq[L + (start + i + len) % L] == seq[L + (start + i) % L]) len++;
        if (seq[L + (start + i) % L]) runs1[len] = runs1.exists(len) ? runs1[len] + 1 : 1;
        else                          runs0[len] = runs0.exists(len) ? runs0[len] + 1 : 1;
        i += len;
      end
      for (int k = 1; k <= N; k++) begin
        int e1, e0, g1, g0;
        e1 = (k <= N - 2) ? (1 << (N - 2 - k)) : (k == N ? 1 : 0);
        e0 = (k <= N - 2) ? (1 << (N - 2 - k)) : (k == N - 1 ? 1 : 0);
        g1 = runs1.exists(k) ? runs1[k] : 0;
        g0 = runs0.exists(k) ? runs0[k] : 0;
        if (g1 != e1 || g0 != e0) begin
          ok = 0;
          $display("  run length %0d: ones %0d (exp %0d), zeros %0d (exp %0d)", k, g1, e1, g0, e0);
        end
      end
      check(ok && runs1.size() <= N && runs0.size() <= N, "run-length histogram of an m-sequence");
      if (ok && !mism) n_tx_seq_ok++;
    end

    // ---------------- receiver phase ----------------
    // A broken transmitter makes the correlation meaningless: stop here.
    if (n_tx_seq_ok == 0) begin
      check(0, "transmitter failed, receiver phase skipped");
      done = 1'b1;
      wait (0);
    end
    rx_mode = MODE_RX;
    n_mode_switch++;
    @(negedge clk_fast);
    check(rx_pn == 1'b0, "pn_tx silent in RX mode");
    if (rx_pn == 1'b0) n_tx_quiet_rx++;
    begin
      longint run_cycles, best_s, best_p, at_s, at_p, bi, bq, th_s, th_p;
      bit in_s, in_p;
      run_cycles = longint'(SYNC_PER * (PERIODS + 0.3)) + longint'(W);
      in_s = 0; in_p = 0; best_s = 0; best_p = 0; at_s = 0; at_p = 0; bi = 0; bq = 0;
      // enter a peak above 60 % of the aligned level, leave it below 30 %
      th_s = longint'(W) * longint'(VDD_MV) * 6 / 10;
      th_p = longint'(real'(W) * 0.6 * PATH_MIN);
      for (cyc = 0; cyc < run_cycles; cyc++) begin
        longint p;
        @(posedge clk_fast);
        if (rx_pn != 1'b0) n_tx_quiet_rx = -1000000;
        if (cyc < longint'(W)) continue;
        if (y_sync > th_s || (in_s && y_sync > th_s / 2)) begin
          if (!in_s || y_sync > best_s) begin best_s = y_sync; at_s = cyc; end
          in_s = 1;
        end else if (in_s) begin
          in_s = 0; sync_pk.push_back(at_s);
        end
        p = y_i * y_i + y_q * y_q;
        if (p > th_p * th_p || (in_p && p > th_p * th_p / 4)) begin
          if (!in_p || p > best_p) begin best_p = p; at_p = cyc; bi = y_i; bq = y_q; end
          in_p = 1;
        end else if (in_p) begin
          in_p = 0; pdp_pk.push_back(at_p); pdp_i.push_back(bi); pdp_q.push_back(bq);
        end
      end
    end
    check(n_tx_quiet_rx > 0, "pn_tx stayed silent through RX mode");
    n_sync = sync_pk.size();
    check(n_sync >= PERIODS, $sformatf("%0d sync peaks seen", n_sync));
    for (int k = 1; k < sync_pk.size(); k++) begin
      real d;
      d = real'(sync_pk[k] - sync_pk[k-1]);
      $display("  [N=%0d] sync spacing %0.0f fast cycles, expected %0.1f", N, d, SYNC_PER);
      check(d > SYNC_PER - TOL && d < SYNC_PER + TOL, "sync peak spacing (2^N-1)*gamma");
    end
    foreach (pdp_pk[k]) begin
      real off, e1, e2;
      longint ref_s;
      ref_s = -1;
      foreach (sync_pk[j]) if (sync_pk[j] <= pdp_pk[k]) ref_s = sync_pk[j];
      if (ref_s < 0 && sync_pk.size() > 0) ref_s = sync_pk[0] - longint'(SYNC_PER);
      off = real'(pdp_pk[k] - ref_s);
      e1 = real'(D1) * GAMMA;
      e2 = real'(D2) * GAMMA;
      $display("  [N=%0d] PDP peak %0.0f cycles after sync (paths at %0.1f, %0.1f), I=%0d Q=%0d",
               N, off, e1, e2, pdp_i[k], pdp_q[k]);
      if (off > e1 - TOL && off < e1 + TOL) begin
        n_pdp1++;
        check(near(pdp_i[k], W * A1_I), "path 1 in-phase amplitude");
        check(near(pdp_q[k], 0),        "path 1 quadrature near zero");
      end else if (off > e2 - TOL && off < e2 + TOL) begin
        n_pdp2++;
        check(near(pdp_i[k], W * A2_I), "path 2 in-phase amplitude");
        check(near(pdp_q[k], W * A2_Q), "path 2 quadrature amplitude");
      end else begin
        check(0, "PDP peak at no channel delay");
      end
    end

    $display("  [N=%0d] mechanisms: tx_m_sequence=%0d rx_quiet_in_tx=%0d mode_switch=%0d tx_quiet_in_rx=%0d sync_peaks=%0d pdp_path1=%0d pdp_path2=%0d",
             N, n_tx_seq_ok, n_rx_quiet_tx, n_mode_switch, n_tx_quiet_rx, n_sync, n_pdp1, n_pdp2);
    check(n_tx_seq_ok > 0,   "mechanism: m-sequence transmitted");
    check(n_rx_quiet_tx > 0, "mechanism: receiver branch open in TX mode");
    check(n_mode_switch > 0, "mechanism: mode switch");
    check(n_sync > 0,        "mechanism: synchronization peak");
    check(n_pdp1 >= PERIODS - 1, "mechanism: PDP peak of path 1");
    check(n_pdp2 >= PERIODS - 1, "mechanism: PDP peak of path 2");
    done = 1'b1;
  end
endmodule

// tb_pnsg: self-checking test of the programmable PN sequence generator.
//
// For every register length N = 5..12 the generator is programmed with a known
// primitive feedback polynomial (standard m-sequence tap sets) and checked for:
//  * the output right after /SET is released (1, from the set Sync-DFF);
//  * chip-by-chip agreement with a reference computed here as repeated
//    multiplication by x modulo the feedback polynomial, one chip per cycle,
//    with the Sync-DFF's one-cycle delay;
//  * period exactly 2^N - 1 and 2^(N-1) ones per period (m-sequence balance);
//  * no effect of SW bits at or above N (random there).
// For N = 11 with S = 3'b110, SW<11:1> = 11'b00010010010 (taps [11,8,5,2]) the
// run-length histogram over one period is compared with the published one:
// 256,128,64,32,16,8,4,2,1,0,1 runs of ones and 256,...,1,1,0 runs of zeros for
// lengths 1..11.
module tb_pnsg;
  import sounder_pkg::*;

  logic             clk = 1'b0, set_n = 1'b0;
  logic [2:0]       s_sel = '0;
  logic [N_MAX:1]   sw = '0;
  logic             pn, pn_b;
  int               checks = 0, failures = 0;

  pnsg dut (.clk(clk), .set_n(set_n), .s_sel(s_sel), .sw(sw), .pn(pn), .pn_b(pn_b));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Tap sets (exponents below N) of primitive polynomials, N = 5..12.
  function automatic logic [N_MAX:1] taps_for(int n);
    logic [N_MAX:1] t = '0;
    case (n)
      5:  t[3] = 1'b1;
      6:  t[5] = 1'b1;
      7:  t[6] = 1'b1;
      8:  begin t[6] = 1'b1; t[5] = 1'b1; t[4] = 1'b1; end
      9:  t[5] = 1'b1;
      10: t[7] = 1'b1;
      11: begin t[8] = 1'b1; t[5] = 1'b1; t[2] = 1'b1; end
      12: begin t[6] = 1'b1; t[4] = 1'b1; t[1] = 1'b1; end
      default: t = '0;
    endcase
    return t;
  endfunction

  bit seq[$];

  // Published run-length histogram of the 11-stage sequence, lengths 1..11.
  localparam int EXP_RUNS1[1:11] = '{256, 128, 64, 32, 16, 8, 4, 2, 1, 0, 1};
  localparam int EXP_RUNS0[1:11] = '{256, 128, 64, 32, 16, 8, 4, 2, 1, 1, 0};

  task automatic run_length(input int n, input logic [N_MAX:1] taps);
    int unsigned len = (1 << n) - 1;
    int unsigned st, poly, mask;
    int ones = 0;
    bit mismatch = 0, ok_period = 1;
    logic [N_MAX:1] sw_rand;

    // random bits at and above N must not matter
    sw_rand = N_MAX'($urandom);
    for (int k = 1; k <= N_MAX; k++) if (k < n) sw_rand[k] = taps[k];
    @(negedge clk);
    set_n = 1'b0; s_sel = 3'(n - N_MIN); sw = sw_rand;
    @(negedge clk);
    check(pn == 1'b1, "pn is 1 while set");
    set_n = 1'b1;

    mask = (1 << n) - 1;
    poly = 1;
    for (int k = 1; k < n; k++) if (taps[k]) poly |= (1 << k);
    st = mask;                         // all stages set
    seq.delete();
    // chip 0 comes from the set Sync-DFF; chip i+1 is the feedback bit of cycle i
    check(pn == 1'b1, "first chip after set");
    for (int i = 0; i < 2 * len + 4; i++) begin
      bit fb;
      fb = bit'((st >> (n - 1)) & 1);
      st = ((st << 1) & mask) ^ (fb ? poly : 0);
      @(negedge clk);
      if (pn !== fb) mismatch = 1;
      if (pn_b !== ~pn) mismatch = 1;
      seq.push_back(pn);
    end
    check(!mismatch, $sformatf("N=%0d chip sequence", n));
    for (int i = 0; i < len; i++) begin
      if (seq[i] != seq[i + len]) ok_period = 0;
      ones += seq[i];
    end
    check(ok_period, $sformatf("N=%0d repeats after 2^N-1", n));
    // no shorter period dividing 2^N-1
    for (int p = 1; p < len; p++) begin
      if (len % p == 0) begin
        bit same = 1;
        for (int i = 0; i < len; i++) if (seq[i] != seq[(i + p) % len]) same = 0;
        check(!same, $sformatf("N=%0d no shorter period %0d", n, p));
      end
    end
    check(ones == (1 << (n - 1)), $sformatf("N=%0d balance %0d ones", n, ones));
  endtask

  initial begin
    for (int n = N_MIN; n <= N_MAX; n++) run_length(n, taps_for(n));

    // Published 11-stage configuration and its run-length histogram.
    begin
      int runs1[1:11], runs0[1:11];
      int start, i, len;
      @(negedge clk);
      set_n = 1'b0; s_sel = 3'b110;
      sw = {1'b0, 11'b00010010010};
      check(sw[8] && sw[5] && sw[2] && $countones(sw) == 3, "SW word decodes to taps 8,5,2");
      @(negedge clk); set_n = 1'b1;
      seq.delete();
      repeat (2 * 2047) begin @(negedge clk); seq.push_back(pn); end
      foreach (runs1[k]) begin runs1[k] = 0; runs0[k] = 0; end
      // start counting at a run boundary, walk exactly one period cyclically
      start = 1;
      while (start < 2047 && seq[start] == seq[start - 1]) start++;
      i = 0;
      while (i < 2047) begin
        len = 1;
        while (len < 2047 && seq[(start + i + len) % 2047 + 2047] == seq[(start + i) % 2047 + 2047]) len++;
        if (len <= 11) begin
          if (seq[(start + i) % 2047 + 2047]) runs1[len]++; else runs0[len]++;
        end else check(0, "run longer than 11");
        i += len;
      end
      for (int k = 1; k <= 11; k++) begin
        check(runs1[k] == EXP_RUNS1[k], $sformatf("runs of ones of length %0d: %0d", k, runs1[k]));
        check(runs0[k] == EXP_RUNS0[k], $sformatf("runs of zeros of length %0d: %0d", k, runs0[k]));
      end
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// End-to-end testbench of the wake-up receiver digital base-band wur_dbb,
// with every parameter at its default (kappa = 4, 256-tap PMF, 16-tap AMF,
// 14 chips per address bit, 8-bit addresses).
//
// The testbench plays the transmitter and the analog front-end. A wake-up
// beacon is: the 31-bit m-sequence preamble (x^5 + x^3 + 1), then the 8-bit
// destination and 8-bit source addresses, each address bit spread by the
// 7-chip code 1011001 (inverted for a zero). Everything is Manchester coded
// (1 -> 10, 0 -> 01) and every chip lasts 4 samples: 248 + 2*8*56 = 1144
// samples per beacon. Between beacons the front-end delivers random bits.
// The front-end model adds independent sample errors with a given rate.
//
// Scenarios, each counted:
//   clean beacons to this node at thresholds of 92, 80 and 62 %: the wake
//     comes exactly kappa+5-d clocks after the last destination sample, d
//     being the reported peak position, and every window the decimator sums
//     holds four samples of the same chip (checked on the internal sum);
//   beacon to another node: address decided, no wake;
//   noisy beacons (sample error rate up to 8 %) at lower thresholds, which
//     move the first threshold crossing ahead of the peak (peak position > 0);
//   listen window closed during a beacon: no wake;
//   strobed beacons with the listen window opening in the middle of the
//     first one: the second one wakes the node.
// A wake is counted as a failure unless it falls within 12 clocks after the
// destination address of a beacon to this node.
module tb_wur_dbb;
  import wur_pkg::*;
  localparam int unsigned K    = KAPPA;
  localparam int unsigned J    = PMF_TAPS;
  localparam int unsigned CH   = ADDR_CHIPS;
  localparam int unsigned L    = ADDR_BITS;
  localparam int unsigned PY_W = $clog2(J) + 1;

  logic            clk = 1'b0;
  logic            rst_n, listen, x;
  logic [PY_W-1:0] thr;
  logic            pmf_ce, pmf_c, amf_ce, amf_c, adr_ce, adr_c;
  logic            wake, sync, abit, abit_v, adone;
  logic [PY_W-1:0] pmf_y;
  logic [1:0]      peak_pos;
  ctrl_state_e     state;

  int checks = 0, failures = 0;

  wur_dbb dut (
    .clk(clk), .rst_n(rst_n), .listen_i(listen), .x_i(x), .pmf_thr_i(thr),
    .pmf_coef_en_i(pmf_ce), .pmf_coef_i(pmf_c),
    .amf_coef_en_i(amf_ce), .amf_coef_i(amf_c),
    .adr_coef_en_i(adr_ce), .adr_coef_i(adr_c),
    .wake_o(wake), .pmf_y_o(pmf_y), .sync_o(sync), .peak_pos_o(peak_pos),
    .abit_o(abit), .abit_valid_o(abit_v), .addr_done_o(adone), .state_o(state)
  );

  always #5 clk = ~clk;

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- sequences
  bit         pre [PRE_SAMPLES];     // oversampled Manchester preamble
  bit         code [CH];             // Manchester spreading code
  bit [L-1:0] node;                  // this node's address, MSB sent first

  // ---------------------------------------------------------------- counters
  int cyc = 0;
  int n_sync = 0, n_wake = 0, n_done_nowake = 0, n_peak_late = 0;
  int n_exact = 0, n_listen_off = 0, n_strobed = 0, n_noisy_wake = 0;
  int n_noisy_sent = 0;
  int peak_seen [K];
  int wake_lo = -1, wake_hi = -1;   // window in which a wake is allowed
  int woke_at = -1, woke_d = 0, last_d = 0, last_sync = -1;
  bit clean_addr = 0;               // error-free address field on the air
  int pre_end = -1;                 // clock of the last preamble sample
  int n_phase_checks = 0;
  int clean_peak [K];
  bit woke_in_window = 0;

  // ------------------------------------------------------------- clock step
  task automatic tick(input bit xin);
    x = xin;
    @(negedge clk);
    cyc++;
    if (sync) begin
      last_sync = cyc;
      last_d = peak_pos;
      n_sync++;
      peak_seen[peak_pos]++;
      if (peak_pos != 0) n_peak_late++;
    end
    if (adone && !wake) n_done_nowake++;
    // Phase check: with an error-free address field and the decimator on
    // the right phase, every summed window holds four samples of one chip.
    if (clean_addr && last_sync > pre_end && dut.u_ctrl.strobe_o) begin
      checks++;
      n_phase_checks++;
      if (dut.u_dec.sum != 0 && dut.u_dec.sum != K) begin
        failures++;
        $display("clock %0d: decimator window straddles a chip edge (sum %0d)",
                 cyc, dut.u_dec.sum);
      end
    end
    if (wake) begin
      n_wake++;
      woke_at = cyc;
      woke_d = last_d;
      checks++;
      if (cyc < wake_lo || cyc > wake_hi) begin
        failures++;
        $display("clock %0d: unexpected wake (allowed %0d..%0d)", cyc, wake_lo, wake_hi);
      end else woke_in_window = 1;
    end
  endtask

  task automatic idle(input int n);
    for (int i = 0; i < n; i++) tick(1'($urandom));
  endtask

  function automatic bit err(input bit b, input int ppm);
    return ($urandom_range(0, 999999) < ppm) ? ~b : b;
  endfunction

  // Sends one beacon. ppm: sample error rate in parts per million.
  // Returns (through last_dest) the clock in which the last destination
  // sample became the newest sample in the PMF.
  task automatic send_wb(input bit [L-1:0] dest, input bit [L-1:0] src,
                         input int ppm, output int last_dest);
    bit [L-1:0] a;
    for (int i = 0; i < PRE_SAMPLES; i++) tick(err(pre[i], ppm));
    pre_end = cyc;
    clean_addr = (ppm == 0);
    for (int f = 0; f < 2; f++) begin
      a = (f == 0) ? dest : src;
      for (int b = L - 1; b >= 0; b--)
        for (int c = 0; c < CH; c++)
          for (int o = 0; o < K; o++)
            tick(err(code[c] ^ ~a[b], ppm));
      if (f == 0) last_dest = cyc;
    end
    clean_addr = 0;
  endtask

  // ------------------------------------------------------------- stimulus
  initial begin
    bit [4:0] lfsr = 5'b00001;
    bit       m [PRE_BITS];
    bit [6:0] spread = 7'b1011001;
    int       ld;
    bit [L-1:0] other;

    for (int i = 0; i < PRE_BITS; i++) begin
      m[i] = lfsr[0];
      lfsr = {lfsr[0] ^ lfsr[3], lfsr[4:1]};
    end
    for (int i = 0; i < PRE_BITS; i++)
      for (int h = 0; h < 2; h++)
        for (int o = 0; o < K; o++)
          pre[(2 * i + h) * K + o] = (h == 0) ? m[i] : ~m[i];
    for (int i = 0; i < 7; i++) begin
      code[2 * i]     = spread[6 - i];
      code[2 * i + 1] = ~spread[6 - i];
    end
    node = L'($urandom);

    rst_n = 0; listen = 0; x = 0; thr = PY_W'(236);
    pmf_ce = 0; pmf_c = 0; amf_ce = 0; amf_c = 0; adr_ce = 0; adr_c = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // start-up programming: the three coefficient registers in parallel
    for (int i = 0; i < J; i++) begin
      pmf_ce = 1; pmf_c = (i < J - PRE_SAMPLES) ? 1'b0 : pre[i - (J - PRE_SAMPLES)];
      amf_ce = (i < 16);
      amf_c  = (i == 0) ? 1'b0 : (i == 1) ? 1'b1 : (i < 16) ? code[i - 2] : 1'b0;
      adr_ce = (i < L);
      adr_c  = (i < L) ? node[L - 1 - i] : 1'b0;
      tick(1'b0);
    end
    pmf_ce = 0; amf_ce = 0; adr_ce = 0;

    listen = 1;
    idle(300);

    // 1. clean beacons to this node; thresholds of 92 %, 80 % and 62 % move
    //    the first crossing 0, 1 or 2 samples ahead of the peak. Wake exactly
    //    kappa+5-d clocks after the last destination sample. The channel is
    //    quiet (all zeros) just before these beacons, so the pad taps match
    //    and the correlation one and two samples before the peak is
    //    deterministic (209 and 162).
    for (int t = 0; t < 9; t++) begin
      thr = PY_W'((t % 3 == 0) ? 236 : (t % 3 == 1) ? 205 : 160);
      idle($urandom_range(600, 900));     // lets any false sync run out
      repeat (480) tick(1'b0);               // quiet channel, longer than an address phase
      wake_lo = cyc + PRE_SAMPLES + L * CH * K;
      wake_hi = wake_lo + 12;
      woke_at = -1;
      send_wb(node, L'($urandom), 0, ld);
      idle(100);
      checks++;
      if (woke_at != ld + K + 5 - woke_d) begin
        failures++;
        $display("clean beacon: wake at %0d, expected %0d (peak %0d), thr %0d",
                 woke_at, ld + K + 5 - woke_d, woke_d, thr);
      end else n_exact++;
      clean_peak[woke_d]++;
    end
    thr = PY_W'(236);

    // 2. beacons to other nodes: no wake, address decided
    for (int t = 0; t < 4; t++) begin
      other = node ^ (L'(1) << $urandom_range(0, L - 1));
      idle($urandom_range(50, 400));
      send_wb(other, node, 0, ld);
      idle(100);
    end

    // 3. noisy beacons, lower thresholds (peak later than first crossing)
    for (int t = 0; t < 16; t++) begin
      thr = PY_W'((t % 2 == 0) ? 205 : 165);
      idle($urandom_range(50, 400));
      wake_lo = cyc + PRE_SAMPLES + L * CH * K;
      wake_hi = wake_lo + 12;
      woke_in_window = 0;
      n_noisy_sent++;
      send_wb(node, L'($urandom), $urandom_range(0, 80000), ld);
      idle(100);
      if (woke_in_window) n_noisy_wake++;
    end
    thr = PY_W'(236);

    // 4. listen window closed during a beacon to this node
    idle(200);
    listen = 0;
    n_listen_off++;
    wake_lo = -1; wake_hi = -1;
    send_wb(node, node, 0, ld);
    idle(100);
    listen = 1;

    // 5. strobed beacons: listening starts inside the first one
    listen = 0;
    idle(100);
    fork
      send_wb(node, L'($urandom), 0, ld);  // first beacon, partly unheard
      begin
        repeat (PRE_SAMPLES + 300) @(negedge clk);
        listen = 1;                        // listen window opens mid-beacon
      end
    join
    idle(40);                              // gap (room for an acknowledgement)
    wake_lo = cyc + PRE_SAMPLES + L * CH * K;
    wake_hi = wake_lo + 12;
    woke_in_window = 0;
    send_wb(node, L'($urandom), 0, ld);
    idle(100);
    if (woke_in_window) n_strobed++;

    // ---------------------------------------------------------- coverage
    $display("syncs=%0d wakes=%0d exact=%0d decided-no-wake=%0d late-peaks=%0d",
             n_sync, n_wake, n_exact, n_done_nowake, n_peak_late);
    for (int d = 0; d < K; d++) $display("peak position %0d: %0d", d, peak_seen[d]);
    $display("noisy beacons woke %0d of %0d; strobed=%0d listen-off=%0d",
             n_noisy_wake, n_noisy_sent, n_strobed, n_listen_off);
    for (int d = 0; d < K; d++) $display("clean beacons with peak position %0d: %0d", d, clean_peak[d]);
    $display("phase checks=%0d", n_phase_checks);
    checks++; if (n_exact != 9)          begin failures++; $display("exact wakes missing"); end
    checks++; if (clean_peak[0] == 0 || clean_peak[1] == 0 || clean_peak[2] == 0)
                                         begin failures++; $display("clean peak positions not covered"); end
    checks++; if (n_phase_checks < 1000) begin failures++; $display("too few phase checks"); end
    checks++; if (n_done_nowake < 4)     begin failures++; $display("address mismatch never seen"); end
    checks++; if (n_peak_late == 0)      begin failures++; $display("late peak never seen"); end
    checks++; if (n_noisy_wake < 14)     begin failures++; $display("noisy detection too low"); end
    checks++; if (n_strobed != 1)        begin failures++; $display("strobed beacon missed"); end
    checks++; if (n_listen_off != 1)     begin failures++; $display("listen-off not run"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

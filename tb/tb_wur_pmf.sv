// Self-checking testbench of the preamble matched filter wur_pmf at its
// default size (256 taps, 4x oversampling).
//
// The preamble is the 31-bit m-sequence of x^5 + x^3 + 1, Manchester coded
// (1 -> 10, 0 -> 01) and oversampled 4 times: 248 samples, preceded by 8 zero
// pad samples to fill the 256 taps. Beacons are embedded in random idle
// traffic with random bit errors and random thresholds. The testbench keeps
// the input history and computes from it the correlation of every clock and
// the expected peak search (first sample at or over the threshold opens a
// window of 4 samples, the largest wins, ties to the earlier one). For
// error-free beacons at the 92 % threshold it also checks the absolute
// timing: sync exactly 4 clocks after the preamble's last sample, peak 0.
module tb_wur_pmf;
  import wur_pkg::*;
  localparam int unsigned J   = PMF_TAPS;
  localparam int unsigned K   = KAPPA;
  localparam int unsigned Y_W = $clog2(J) + 1;

  logic           clk = 1'b0;
  logic           rst_n, x, coef_en, coef, arm;
  logic [Y_W-1:0] thr, y;
  logic           sync;
  logic [1:0]     peak_pos;
  int             checks = 0, failures = 0;

  bit  s [J];
  bit  hist [$];
  int  cyc = 0;
  int  d_seen [K];
  int  syncs = 0, exact_checked = 0;

  wur_pmf dut (
    .clk(clk), .rst_n(rst_n), .x_i(x), .coef_en_i(coef_en), .coef_i(coef),
    .thr_i(thr), .arm_i(arm), .y_o(y), .sync_o(sync), .peak_pos_o(peak_pos)
  );

  always #5 clk = ~clk;

  initial begin
    #3000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference correlation from the input history
  function automatic int unsigned ref_y();
    int unsigned e = 0;
    int n = hist.size();
    for (int i = 0; i < J; i++) begin
      bit xv = (n - int'(J) + i >= 0) ? hist[n - J + i] : 1'b0;
      if (xv == s[i]) e++;
    end
    return e;
  endfunction

  // reference peak search
  bit m_track = 0, m_sync = 0;
  int m_cnt = 0, m_max = 0, m_p = 0, m_pos = 0;
  int expect_sync_at = -1;

  task automatic step(input bit xin, input bit armin);
    int unsigned e;
    bit nxt_sync;
    x = xin; arm = armin;
    @(negedge clk);
    hist.push_back(xin);
    cyc++;
    e = ref_y();
    checks++;
    if (y !== Y_W'(e)) begin
      failures++;
      $display("cycle %0d: y=%0d expected %0d", cyc, y, e);
    end
    checks++;
    if (sync !== m_sync || (m_sync && peak_pos !== 2'(m_pos))) begin
      failures++;
      $display("cycle %0d: sync=%0b/%0b pos=%0d/%0d", cyc, sync, m_sync, peak_pos, m_pos);
    end
    if (sync) begin
      syncs++;
      d_seen[peak_pos]++;
    end
    if (expect_sync_at == cyc) begin
      checks++; exact_checked++;
      if (!sync || peak_pos != 0) begin
        failures++;
        $display("cycle %0d: error-free preamble not synchronised on time", cyc);
      end
    end
    // model update for the clock edge that follows
    nxt_sync = 0;
    if (m_track) begin
      if (int'(e) > m_max) begin m_max = e; m_p = m_cnt; end
      if (m_cnt == K - 1) begin m_track = 0; nxt_sync = 1; m_pos = m_p; end
      else m_cnt++;
    end else if (armin && !m_sync && e >= thr) begin
      m_track = 1; m_cnt = 1; m_max = e; m_p = 0;
    end
    m_sync = nxt_sync;
  endtask

  // one beacon preamble, optionally with bit errors (probability ber/1000)
  task automatic send_preamble(input int ber);
    for (int i = J - PRE_SAMPLES; i < J; i++) begin
      bit b = s[i];
      if ($urandom_range(0, 999) < ber) b = ~b;
      step(b, 1'b1);
    end
  endtask

  task automatic idle(input int n, input bit noisy, input bit armin);
    for (int i = 0; i < n; i++) step(noisy ? 1'($urandom) : 1'b0, armin);
  endtask

  initial begin
    bit [4:0] lfsr = 5'b00001;
    bit       m [PRE_BITS];
    // m-sequence, Manchester, 4x oversampling, pad zeros first
    for (int i = 0; i < PRE_BITS; i++) begin
      m[i] = lfsr[0];
      lfsr = {lfsr[0] ^ lfsr[3], lfsr[4:1]};
    end
    for (int i = 0; i < J - PRE_SAMPLES; i++) s[i] = 1'b0;
    for (int i = 0; i < PRE_BITS; i++)
      for (int h = 0; h < 2; h++)
        for (int o = 0; o < K; o++)
          s[J - PRE_SAMPLES + (2 * i + h) * K + o] = (h == 0) ? m[i] : ~m[i];

    rst_n = 0; x = 0; coef_en = 0; coef = 0; arm = 0; thr = Y_W'(236);
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < J; i++) begin
      coef_en = 1; coef = s[i];
      @(negedge clk);
    end
    coef_en = 0;

    // error-free beacons at the 92 % threshold: exact timing
    for (int t = 0; t < 4; t++) begin
      thr = Y_W'(236);
      idle($urandom_range(20, 300), 1'b0, 1'b1);
      send_preamble(0);
      expect_sync_at = cyc + K;
      idle(40, 1'b0, 1'b1);
    end
    // disarmed: a preamble must not synchronise
    idle(10, 1'b0, 1'b0);
    for (int i = J - PRE_SAMPLES; i < J; i++) step(s[i], 1'b0);
    idle(20, 1'b0, 1'b0);
    // noisy beacons, random thresholds
    for (int t = 0; t < 30; t++) begin
      thr = Y_W'($urandom_range(190, 240));
      idle($urandom_range(10, 300), 1'b1, 1'b1);
      send_preamble($urandom_range(0, 150));
      idle(20, 1'b1, 1'b1);
    end
    checks++;
    if (exact_checked != 4) begin
      failures++;
      $display("exact timing checked %0d times", exact_checked);
    end
    for (int d = 0; d < K; d++) $display("peak position %0d seen %0d times", d, d_seen[d]);
    $display("syncs=%0d", syncs);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

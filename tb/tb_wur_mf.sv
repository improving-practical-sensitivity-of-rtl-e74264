// Self-checking testbench of the binary-input matched filter wur_mf.
//
// Loads a random coefficient sequence s[0..J-1] serially (s[0] first), then
// drives random bits with random shift enables and random thresholds. The
// expected output is computed from the input history alone: y counts the
// positions i where the J most recent shifted-in bits, oldest first, equal
// s[i]; det is y >= threshold. The sequence itself is also fed once to check
// the full-match value y = J.
module tb_wur_mf;
  localparam int unsigned J   = 16;
  localparam int unsigned Y_W = $clog2(J) + 1;

  logic           clk = 1'b0;
  logic           rst_n;
  logic           shift, x, coef_en, coef;
  logic [Y_W-1:0] thr, y;
  logic           det;
  int             checks = 0, failures = 0;

  bit             s [J];
  bit             hist [$];     // shifted-in bits, newest last

  wur_mf #(.TAPS(J)) dut (
    .clk(clk), .rst_n(rst_n), .shift_i(shift), .x_i(x),
    .coef_en_i(coef_en), .coef_i(coef), .thr_i(thr), .y_o(y), .det_o(det)
  );

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int unsigned expected_y();
    int unsigned e = 0;
    int n = hist.size();
    for (int i = 0; i < J; i++) begin
      // position i of s aligns with input bit n-J+i (oldest first)
      bit xv = (n - int'(J) + i >= 0) ? hist[n - J + i] : 1'b0;  // reset value 0
      if (xv == s[i]) e++;
    end
    return e;
  endfunction

  task automatic check_now();
    int unsigned e = expected_y();
    checks++;
    if (y !== Y_W'(e) || det !== (e >= thr)) begin
      failures++;
      $display("mismatch: y=%0d exp=%0d det=%0b thr=%0d", y, e, det, thr);
    end
  endtask

  initial begin
    rst_n = 1'b0; shift = 0; x = 0; coef_en = 0; coef = 0; thr = Y_W'(J);
    foreach (s[i]) s[i] = 1'($urandom);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // serial coefficient load, transmission order
    for (int i = 0; i < J; i++) begin
      coef_en = 1'b1; coef = s[i];
      @(negedge clk);
    end
    coef_en = 1'b0; coef = 1'b1;
    // after reset SRI is all zero
    @(negedge clk);
    check_now();
    // feed the sequence itself: full match at the end
    for (int i = 0; i < J; i++) begin
      shift = 1'b1; x = s[i];
      @(negedge clk);
      hist.push_back(s[i]);
      check_now();
    end
    checks++;
    if (y !== Y_W'(J) || !det) begin
      failures++;
      $display("full match not seen: y=%0d", y);
    end
    // random traffic, random enables and thresholds
    for (int t = 0; t < 2000; t++) begin
      shift = 1'($urandom_range(0, 3) != 0);
      x     = 1'($urandom);
      thr   = Y_W'($urandom_range(0, J));
      coef  = 1'($urandom);          // ignored, coef_en low
      @(negedge clk);
      if (shift) hist.push_back(x);
      check_now();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

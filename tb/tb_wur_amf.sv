// Self-checking testbench of the address-spreading matched filter wur_amf
// (16 taps, 14 chips per address bit, threshold 8).
//
// The 7-bit spreading code 1011001 is Manchester coded to 14 chips and
// loaded after a 2-chip pad (0,1): 16 coefficients. Each address bit is sent
// as the code (one) or the inverted code (zero), one chip every 4 clocks,
// with random chip errors in some bits. Expected values come from the chip
// history: at the 14th chip of a bit the correlation with the loaded
// sequence decides the bit (>= 8), and bit_valid pulses exactly 2 clocks
// after that chip's chip_valid. Error-free bits must come out as sent.
module tb_wur_amf;
  import wur_pkg::*;
  localparam int unsigned J = AMF_TAPS;
  localparam int unsigned C = ADDR_CHIPS;

  logic       clk = 1'b0;
  logic       rst_n, clear, chip_valid, chip, coef_en, coef;
  logic [4:0] y;
  logic       bit_o, bit_valid;
  int         checks = 0, failures = 0;

  bit         s [J];
  bit         hist [$];
  int         cyc = 0;
  int         exp_valid_at = -1;
  bit         exp_bit, sent_bit, clean;
  int         nbits = 0, nerr_bits = 0;

  wur_amf dut (
    .clk(clk), .rst_n(rst_n), .clear_i(clear), .chip_valid_i(chip_valid),
    .chip_i(chip), .coef_en_i(coef_en), .coef_i(coef), .y_o(y),
    .bit_o(bit_o), .bit_valid_o(bit_valid)
  );

  always #5 clk = ~clk;

  initial begin
    #400000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int unsigned ref_y();
    int unsigned e = 0;
    int n = hist.size();
    for (int i = 0; i < J; i++) begin
      bit xv = (n - int'(J) + i >= 0) ? hist[n - J + i] : 1'b0;
      if (xv == s[i]) e++;
    end
    return e;
  endfunction

  // one clock; check the registered outputs after it
  task automatic tick(input bit v, input bit c);
    chip_valid = v; chip = c;
    @(negedge clk);
    cyc++;
    if (v) hist.push_back(c);
    checks++;
    if (bit_valid !== (cyc == exp_valid_at)) begin
      failures++;
      $display("cycle %0d: bit_valid=%0b, expected at %0d", cyc, bit_valid, exp_valid_at);
    end
    if (cyc == exp_valid_at) begin
      checks++;
      if (bit_o !== exp_bit) begin
        failures++;
        $display("cycle %0d: bit=%0b expected %0b", cyc, bit_o, exp_bit);
      end
      if (clean) begin
        checks++;
        if (bit_o !== sent_bit) begin
          failures++;
          $display("cycle %0d: error-free bit %0b decoded as %0b", cyc, sent_bit, bit_o);
        end
      end
    end
  endtask

  task automatic send_bit(input bit b, input int err_permille);
    bit ch;
    sent_bit = b;
    clean = 1;
    for (int i = 0; i < C; i++) begin
      ch = s[J - C + i] ^ ~b;
      if ($urandom_range(0, 999) < err_permille) begin ch = ~ch; clean = 0; end
      tick(1'b1, ch);
      if (i == C - 1) begin
        exp_bit = (ref_y() >= (J + 1) / 2);
        exp_valid_at = cyc + 1;  // cyc counts edges: clock c+2
      end
      repeat (KAPPA - 1) tick(1'b0, 1'($urandom));
    end
    nbits++;
    if (!clean) nerr_bits++;
  endtask

  initial begin
    bit [6:0] code = 7'b1011001;
    s[0] = 0; s[1] = 1;
    for (int i = 0; i < 7; i++) begin
      s[2 + 2 * i]     = code[6 - i];
      s[2 + 2 * i + 1] = ~code[6 - i];
    end
    rst_n = 0; clear = 1; chip_valid = 0; chip = 0; coef_en = 0; coef = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < J; i++) begin
      coef_en = 1; coef = s[i];
      @(negedge clk);
    end
    coef_en = 0;
    for (int f = 0; f < 12; f++) begin
      // a field: start of address phase, one random Manchester pair before it
      clear = 1;
      tick(1'b1, 1'b1); tick(1'b1, 1'b0);
      tick(1'b0, 1'b0);
      clear = 0;
      for (int a = 0; a < 16; a++)
        send_bit(1'($urandom), (f % 3 == 0) ? 0 : $urandom_range(0, 200));
      repeat (4) tick(1'b0, 1'b0);
    end
    checks++;
    if (nbits != 192 || nerr_bits == 0) begin
      failures++;
      $display("bits=%0d with errors=%0d", nbits, nerr_bits);
    end
    $display("bits=%0d with chip errors=%0d", nbits, nerr_bits);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

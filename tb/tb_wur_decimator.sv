// Self-checking testbench of the decimator wur_decimator (kappa = 4).
//
// Drives random oversampled bits, a random peak position and random strobes.
// Expected behaviour, worked out from the input history: a strobe in clock c
// yields, in clock c+1, bit_valid = 1 and bit = 1 when at least
// ceil(kappa/2) of the kappa samples x[m-p] .. x[m-p-kappa+1] are one, where
// m is the newest sample in clock c-1 and p = kappa-1-peak_pos (peak_pos as
// in clock c-1). Without a strobe bit_valid stays low and bit holds.
module tb_wur_decimator;
  import wur_pkg::*;
  localparam int unsigned K = KAPPA;

  logic       clk = 1'b0;
  logic       rst_n, x, strobe, bit_o, bit_valid;
  logic [1:0] peak_pos;
  int         checks = 0, failures = 0;

  bit         hist [$];
  int         pos_h [$];
  bit         stb_h [$];
  bit         last_bit = 0;
  int         ones = 0, zeros = 0;

  wur_decimator dut (
    .clk(clk), .rst_n(rst_n), .x_i(x), .peak_pos_i(peak_pos),
    .strobe_i(strobe), .bit_o(bit_o), .bit_valid_o(bit_valid)
  );

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int c, m, p, sum;
    bit exp_valid;
    rst_n = 0; x = 0; strobe = 0; peak_pos = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // clock 0 after reset: history starts with the 2*K-1 reset zeros
    for (int i = 0; i < 2 * K - 1; i++) hist.push_back(1'b0);
    pos_h.push_back(0); stb_h.push_back(0);
    for (int t = 0; t < 3000; t++) begin
      // drive clock c = t
      if ($urandom_range(0, 40) == 0) peak_pos = 2'($urandom_range(0, K - 1));
      x      = 1'($urandom);
      strobe = (t > 4) && ($urandom_range(0, 2) == 0);
      pos_h[pos_h.size() - 1] = peak_pos;
      stb_h[stb_h.size() - 1] = strobe;
      @(negedge clk);
      hist.push_back(x);
      pos_h.push_back(0); stb_h.push_back(0);
      c = stb_h.size() - 1;      // current clock index
      // clock c shows the result of a strobe in clock c-1
      if (c >= 2) begin
        exp_valid = stb_h[c - 1];
        checks++;
        if (bit_valid !== exp_valid) begin
          failures++;
          $display("clock %0d: bit_valid=%0b expected %0b", c, bit_valid, exp_valid);
        end
        if (exp_valid) begin
          m   = hist.size() - 3;            // newest sample in clock c-2
          p   = K - 1 - pos_h[c - 2];
          sum = 0;
          for (int j = 0; j < K; j++) sum += hist[m - p - j];
          last_bit = (sum >= (K + 1) / 2);
          if (last_bit) ones++; else zeros++;
        end
        checks++;
        if (bit_o !== last_bit) begin
          failures++;
          $display("clock %0d: bit=%0b expected %0b", c, bit_o, last_bit);
        end
      end
    end
    $display("decided ones=%0d zeros=%0d", ones, zeros);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

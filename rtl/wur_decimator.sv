// Decimator: kappa-to-1 down-sampling at the clock phase found by the PMF.
//
// After preamble synchronisation the rest of the beacon is processed at the
// channel bit rate. The decimator adds KAPPA consecutive oversampled bits
// that belong to one channel bit and decides the bit by majority.
//
// Structure (after the paper's hardware mapping):
//   SRD  (2*KAPPA-1)-bit shift register, srd[k] = x[n-k], shifted every
//        clock with the same input as the PMF delay line (so srd[k] equals
//        the PMF's x[n-k] in every clock).
//   MUX  KAPPA inputs of KAPPA-1 bits. Input p carries the window
//        x[n-p] .. x[n-p-KAPPA+1] without x[n-KAPPA+1]; that sample lies in
//        every window, so it bypasses the multiplexer.
//   Pipeline registers after the multiplexer (KAPPA-1 bits plus the bypass
//        bit), clocked every cycle.
//   Adder and comparator: one if the sum >= ceil(KAPPA/2), zero otherwise.
//   Output register clocked at the bit rate: loaded when strobe_i is high
//        (a clock enable that stands for the figure's Clk/kappa).
//
// Phase selection: the PMF reports peak_pos_i = d, the offset of the peak in
// its KAPPA-sample search window; the multiplexer then uses p = KAPPA-1-d.
// With the controller's strobe timing this makes every window end exactly on
// a channel-bit boundary (see wur_ctrl).
//
// Timing: the window selected from SRD in clock t is summed in clock t+1;
// a strobe_i in clock t+1 loads the decision, which appears on bit_o with a
// one-clock bit_valid_o pulse in clock t+2.
//
// Own choices: clock enable instead of a divided clock; the mapping from
// peak position to multiplexer input; reset values (zero).
module wur_decimator
  import wur_pkg::*;
#(
  parameter int unsigned OSR = KAPPA,
  localparam int unsigned P_W   = (OSR > 1) ? $clog2(OSR) : 1,
  localparam int unsigned SRD_W = 2 * OSR - 1,
  localparam int unsigned S_W   = $clog2(OSR + 1)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           x_i,          // oversampled bit
  input  logic [P_W-1:0] peak_pos_i,   // peak offset from the PMF
  input  logic           strobe_i,     // bit-rate clock enable
  output logic           bit_o,        // down-sampled bit
  output logic           bit_valid_o   // one-clock pulse per new bit_o
);

  localparam int unsigned PIVOT = OSR - 1;        // x[n-KAPPA+1]
  localparam logic [S_W-1:0] THR = S_W'((OSR + 1) / 2);

  logic [SRD_W-1:0] srd;
  logic [OSR-2:0]   mux_in [OSR];
  logic [OSR-2:0]   mux_out;
  logic [P_W-1:0]   sel;
  logic [OSR-2:0]   win_q;
  logic             pivot_q;
  logic [S_W-1:0]   sum;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) srd <= '0;
    else        srd <= {srd[SRD_W-2:0], x_i};
  end

  // Multiplexer inputs grouped by clock phase p: window taps p..p+OSR-1,
  // the pivot tap left out.
  for (genvar p = 0; p < OSR; p++) begin : g_phase
    for (genvar m = 0; m < OSR - 1; m++) begin : g_tap
      localparam int unsigned TAP = (p + m < PIVOT) ? p + m : p + m + 1;
      assign mux_in[p][m] = srd[TAP];
    end
  end

  assign sel     = P_W'(OSR - 1) - peak_pos_i;
  assign mux_out = mux_in[sel];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      win_q   <= '0;
      pivot_q <= 1'b0;
    end else begin
      win_q   <= mux_out;
      pivot_q <= srd[PIVOT];
    end
  end

  always_comb begin
    sum = S_W'(pivot_q);
    for (int i = 0; i < OSR - 1; i++) sum = sum + S_W'(win_q[i]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bit_o       <= 1'b0;
      bit_valid_o <= 1'b0;
    end else begin
      bit_valid_o <= strobe_i;
      if (strobe_i) bit_o <= (sum >= THR);
    end
  end

endmodule

// Preamble matched filter (PMF) with clock-phase (peak) search.
//
// The PMF correlates the kappa-times oversampled bit stream from the analog
// front-end with the known preamble. It runs at the oversampled rate: the
// delay line shifts every clock, so one correlation value y[n] is produced
// per input sample. The filter itself is a wur_mf of PMF_TAPS taps whose
// coefficient register is loaded with the oversampled, Manchester-coded
// preamble at start-up.
//
// Peak search: the first sample whose correlation reaches the programmable
// threshold (thr_i) opens a window of KAPPA successive samples, that one
// included. The largest y[n] in the window marks the correct clock phase;
// its offset d (0..KAPPA-1) from the first sample is reported on
// peak_pos_o together with a one-clock sync_o pulse. Ties keep the earlier
// sample. If the window opened at sample n0, sync_o is high in the clock
// after the window's last sample, i.e. KAPPA clocks after the clock in which
// sample n0 was the newest in the delay line, and the preamble ended with
// sample n0 + d. Searching happens only while arm_i is high (set by the
// controller); a window that has opened always completes.
//
// Follows the paper: filter structure, oversampled operation, threshold
// range, maximum among kappa successive samples. Own choices: which kappa
// samples form the window (the first one over the threshold and the
// following kappa-1), tie breaking, and the sync/peak_pos handshake.
module wur_pmf
  import wur_pkg::*;
#(
  parameter int unsigned TAPS  = PMF_TAPS,
  parameter int unsigned OSR   = KAPPA,
  localparam int unsigned Y_W  = $clog2(TAPS) + 1,
  localparam int unsigned P_W  = (OSR > 1) ? $clog2(OSR) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           x_i,          // oversampled bit from the front-end
  input  logic           coef_en_i,    // SRF load enable
  input  logic           coef_i,       // SRF serial data
  input  logic [Y_W-1:0] thr_i,        // detection threshold
  input  logic           arm_i,        // search enabled
  output logic [Y_W-1:0] y_o,          // correlation, for observation
  output logic           sync_o,       // one-clock pulse: preamble found
  output logic [P_W-1:0] peak_pos_o    // offset of the maximum in the window
);

  logic           det;
  logic           tracking;
  logic [P_W-1:0] cnt;
  logic [Y_W-1:0] max_y;
  logic [P_W-1:0] pos;
  logic           better;

  wur_mf #(.TAPS(TAPS)) u_mf (
    .clk       (clk),
    .rst_n     (rst_n),
    .shift_i   (1'b1),
    .x_i       (x_i),
    .coef_en_i (coef_en_i),
    .coef_i    (coef_i),
    .thr_i     (thr_i),
    .y_o       (y_o),
    .det_o     (det)
  );

  assign better = (y_o > max_y);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tracking   <= 1'b0;
      cnt        <= '0;
      max_y      <= '0;
      pos        <= '0;
      sync_o     <= 1'b0;
      peak_pos_o <= '0;
    end else begin
      sync_o <= 1'b0;
      if (tracking) begin
        if (better) begin
          max_y <= y_o;
          pos   <= cnt;
        end
        if (cnt == P_W'(OSR - 1)) begin
          tracking   <= 1'b0;
          sync_o     <= 1'b1;
          peak_pos_o <= better ? cnt : pos;
        end else begin
          cnt <= cnt + 1'b1;
        end
      end else if (arm_i && !sync_o && det) begin
        tracking <= 1'b1;
        cnt      <= P_W'(1);
        max_y    <= y_o;
        pos      <= '0;
      end
    end
  end

endmodule

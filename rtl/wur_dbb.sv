// Wake-up receiver digital base-band (DBB), top level.
//
// A duty-cycled wake-up receiver listens for wake-up beacons (WBs) made of a
// preamble followed by a spread destination address (and a spread source
// address, which this block does not need). Its low-power analog front-end
// delivers bit decisions at KAPPA times the channel bit rate with a high bit
// error rate; the DBB recovers the beacon by correlation and wakes the main
// transceiver when the destination address is the node's own.
//
// Data path (one oversampled input bit per clock):
//   x_i -> PMF (preamble matched filter + peak search, oversampled rate)
//   x_i -> decimator (phase from the PMF peak, KAPPA:1 majority)
//       -> AMF (address-spreading matched filter, one decision per address bit)
//       -> address decoder (all NBITS bits equal to the node address)
//       -> wake_o
// The controller arms the PMF, generates the decimator's bit-rate strobe
// after synchronisation and returns to the search after every address.
//
// Programming: the three coefficient registers are loaded serially after
// reset, each through its own enable/data pair, one bit per clock, in the
// order the sequence is transmitted: the oversampled preamble (PMF_TAPS
// bits, leading pad bits first), the spreading code (AMF_TAPS chips) and the
// node address (ADDR_BITS bits). pmf_thr_i is the PMF detection threshold
// (0..PMF_TAPS); the AMF and decoder thresholds are fixed.
//
// Timing: listen_i high starts a search. For a beacon with no bit errors and
// a PMF peak in the first window sample, wake_o pulses KAPPA+5 clocks after
// the clock in which the last sample of the destination address entered the
// PMF delay line. The throughput is one input sample per clock (1 MHz for
// 250 kbps with KAPPA = 4), with no stall.
module wur_dbb
  import wur_pkg::*;
#(
  parameter int unsigned OSR      = KAPPA,
  parameter int unsigned PMF_LEN  = PMF_TAPS,
  parameter int unsigned AMF_LEN  = AMF_TAPS,
  parameter int unsigned CHIPS    = ADDR_CHIPS,
  parameter int unsigned NBITS    = ADDR_BITS,
  localparam int unsigned PY_W    = $clog2(PMF_LEN) + 1,
  localparam int unsigned P_W     = (OSR > 1) ? $clog2(OSR) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            listen_i,       // listen window (from sleep timer)
  input  logic            x_i,            // oversampled bit from front-end
  input  logic [PY_W-1:0] pmf_thr_i,      // PMF threshold
  input  logic            pmf_coef_en_i,
  input  logic            pmf_coef_i,
  input  logic            amf_coef_en_i,
  input  logic            amf_coef_i,
  input  logic            adr_coef_en_i,
  input  logic            adr_coef_i,
  output logic            wake_o,         // wake up the main transceiver
  output logic [PY_W-1:0] pmf_y_o,        // PMF correlation (status)
  output logic            sync_o,         // preamble found (status)
  output logic [P_W-1:0]  peak_pos_o,     // phase of the last sync (status)
  output logic            abit_o,         // detected address bit (status)
  output logic            abit_valid_o,   // its strobe (status)
  output logic            addr_done_o,    // destination address decided
  output ctrl_state_e     state_o
);

  logic            arm, strobe, clear;
  logic            chip, chip_valid;

  wur_ctrl #(.OSR(OSR)) u_ctrl (
    .clk      (clk),
    .rst_n    (rst_n),
    .listen_i (listen_i),
    .sync_i   (sync_o),
    .done_i   (addr_done_o),
    .arm_o    (arm),
    .strobe_o (strobe),
    .clear_o  (clear),
    .state_o  (state_o)
  );

  wur_pmf #(.TAPS(PMF_LEN), .OSR(OSR)) u_pmf (
    .clk        (clk),
    .rst_n      (rst_n),
    .x_i        (x_i),
    .coef_en_i  (pmf_coef_en_i),
    .coef_i     (pmf_coef_i),
    .thr_i      (pmf_thr_i),
    .arm_i      (arm),
    .y_o        (pmf_y_o),
    .sync_o     (sync_o),
    .peak_pos_o (peak_pos_o)
  );

  wur_decimator #(.OSR(OSR)) u_dec (
    .clk         (clk),
    .rst_n       (rst_n),
    .x_i         (x_i),
    .peak_pos_i  (peak_pos_o),
    .strobe_i    (strobe),
    .bit_o       (chip),
    .bit_valid_o (chip_valid)
  );

  wur_amf #(.TAPS(AMF_LEN), .CHIPS(CHIPS)) u_amf (
    .clk          (clk),
    .rst_n        (rst_n),
    .clear_i      (clear),
    .chip_valid_i (chip_valid),
    .chip_i       (chip),
    .coef_en_i    (amf_coef_en_i),
    .coef_i       (amf_coef_i),
    .y_o          (),
    .bit_o        (abit_o),
    .bit_valid_o  (abit_valid_o)
  );

  wur_addr_decoder #(.NBITS(NBITS)) u_adr (
    .clk         (clk),
    .rst_n       (rst_n),
    .clear_i     (clear),
    .bit_valid_i (abit_valid_o),
    .bit_i       (abit_o),
    .coef_en_i   (adr_coef_en_i),
    .coef_i      (adr_coef_i),
    .y_o         (),
    .done_o      (addr_done_o),
    .wake_o      (wake_o)
  );

endmodule

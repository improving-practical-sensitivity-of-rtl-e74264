// Address-spreading matched filter (AMF): de-spreads the address bits.
//
// Every address bit of a wake-up beacon is sent as CHIPS chips: the
// (Manchester-coded) spreading code for a one and, in this design, the
// inverted code for a zero. The AMF is a wur_mf of TAPS taps clocked at the
// channel bit rate: its delay line shifts only on chip_valid_i, once per
// decimated chip. Because the decimator has already found the chip timing,
// the AMF decides only once per address bit: a chip counter marks the last
// chip of each bit, and in the following clock the comparator output
// (y >= THR) is registered as the address bit with a one-clock bit_valid_o.
//
// When TAPS > CHIPS the oldest TAPS-CHIPS taps see the end of the previous
// field. With Manchester coding and an even difference these taps cover
// whole chip pairs, each contributing exactly half its taps to y whatever the
// previous bit was, so a perfect match gives TAPS - (TAPS-CHIPS)/2 and a
// perfect inverse (TAPS-CHIPS)/2; the midpoint threshold separates them.
// For the first address bit of a beacon these taps still hold chips of the
// previous address phase (the delay line only moves after synchronisation),
// which shifts y by at most TAPS-CHIPS and leaves the margin almost intact.
//
// clear_i (high outside the address phase) restarts the chip count so that
// the first chip after the preamble starts the first address bit.
//
// Follows the paper: filter structure, bit-rate operation, one correlation
// per address bit, midpoint threshold. Own choices: the chip counter, the
// coding of a zero bit, the THR default ceil(TAPS/2) (the paper writes
// ceil(K/2) with K the spreading length).
module wur_amf
  import wur_pkg::*;
#(
  parameter int unsigned TAPS  = AMF_TAPS,
  parameter int unsigned CHIPS = ADDR_CHIPS,
  localparam int unsigned Y_W  = $clog2(TAPS) + 1,
  localparam int unsigned C_W  = (CHIPS > 1) ? $clog2(CHIPS) : 1,
  parameter int unsigned THR   = (TAPS + 1) / 2
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           clear_i,      // restart chip counting
  input  logic           chip_valid_i, // new decimated chip
  input  logic           chip_i,
  input  logic           coef_en_i,    // SRF load enable
  input  logic           coef_i,       // SRF serial data (spreading code)
  output logic [Y_W-1:0] y_o,          // correlation, for observation
  output logic           bit_o,        // detected address bit
  output logic           bit_valid_o   // one-clock pulse per address bit
);

  logic           det;
  logic [C_W-1:0] cnt;
  logic           eval;

  wur_mf #(.TAPS(TAPS)) u_mf (
    .clk       (clk),
    .rst_n     (rst_n),
    .shift_i   (chip_valid_i),
    .x_i       (chip_i),
    .coef_en_i (coef_en_i),
    .coef_i    (coef_i),
    .thr_i     (Y_W'(THR)),
    .y_o       (y_o),
    .det_o     (det)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt         <= '0;
      eval        <= 1'b0;
      bit_o       <= 1'b0;
      bit_valid_o <= 1'b0;
    end else if (clear_i) begin
      cnt         <= '0;
      eval        <= 1'b0;
      bit_valid_o <= 1'b0;
    end else begin
      eval        <= 1'b0;
      bit_valid_o <= eval;
      if (eval) bit_o <= det;
      if (chip_valid_i) begin
        if (cnt == C_W'(CHIPS - 1)) begin
          cnt  <= '0;
          eval <= 1'b1;
        end else begin
          cnt <= cnt + 1'b1;
        end
      end
    end
  end

endmodule

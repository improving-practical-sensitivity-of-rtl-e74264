// Binary-input matched filter (MF) with threshold comparator.
//
// Computes y[n] = sum_k XNOR(f_k, x[n-k]) for k = 0..TAPS-1, i.e. the number
// of positions where the last TAPS input bits agree with the stored filter
// impulse response, and flags a detection when y[n] reaches the threshold.
// This is the common building block of the preamble matched filter (PMF),
// the address-spreading matched filter (AMF) and the address decoder; the
// three differ only in length, shift rate and threshold.
//
// Structure (after the paper's hardware mapping):
//   SRI  TAPS-bit delay line of the incoming bits, sri[k] = x[n-k].
//   SRF  TAPS-bit shift register holding f_0..f_{TAPS-1}, srf[k] = f_k,
//        loaded serially at start-up: while coef_en_i is high one bit of
//        coef_i enters at f_0 per clock and the rest move towards f_{TAPS-1}.
//        After TAPS cycles the first bit fed sits in f_{TAPS-1}, so feeding
//        the known sequence in the order it is transmitted gives the
//        time-reversed impulse response a matched filter needs.
//   XNOR per tap, then a balanced adder tree (wur_adder_tree).
//   Comparator: det_o = (y_o >= thr_i).
//
// Interface and timing: shift_i advances SRI by one bit (x_i enters as
// x[n]); the PMF shifts every clock, the AMF and the address decoder only
// when a new channel bit or address bit arrives. y_o and det_o are
// combinational from the registers and belong to the newest x in SRI.
// Reset clears SRI only; SRF is programmed after reset and keeps its value.
// TAPS must be at least 2.
//
// Own choices: the paper gates the SRF clock with ClkEn; here ClkEn is a
// synchronous shift enable. The paper calls a detection "y[n] larger than
// the threshold" but also sets the address decoder's threshold to L, which
// only a ">=" compare can reach; the comparator is therefore ">=".
module wur_mf #(
  parameter int unsigned TAPS = 16,
  localparam int unsigned Y_W = $clog2(TAPS) + 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           shift_i,    // advance the input delay line
  input  logic           x_i,        // incoming bit
  input  logic           coef_en_i,  // ClkEn: shift coef_i into SRF
  input  logic           coef_i,     // filter coefficient, serial
  input  logic [Y_W-1:0] thr_i,      // comparator threshold gamma
  output logic [Y_W-1:0] y_o,        // filter output y[n]
  output logic           det_o       // y[n] >= gamma
);

  logic [TAPS-1:0] sri;   // x[n-k] at bit k
  logic [TAPS-1:0] srf;   // f_k at bit k
  logic [TAPS-1:0] taps;  // tap outputs

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       sri <= '0;
    else if (shift_i) sri <= {sri[TAPS-2:0], x_i};
  end

  always_ff @(posedge clk) begin
    if (coef_en_i) srf <= {srf[TAPS-2:0], coef_i};
  end

  assign taps = ~(sri ^ srf);

  wur_adder_tree #(.N(TAPS)) u_tree (
    .bits_i (taps),
    .sum_o  (y_o)
  );

  assign det_o = (y_o >= thr_i);

endmodule

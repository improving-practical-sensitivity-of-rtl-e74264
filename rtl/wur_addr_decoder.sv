// Address decoder: compares the received destination address with the
// node's own address and raises the wake-up of the main transceiver.
//
// The decoder is a wur_mf of NBITS taps clocked at the address-bit rate: the
// delay line shifts on bit_valid_i, once per address bit from the AMF, and
// the coefficient register holds the node address (programmed serially, in
// the order the bits are transmitted). The threshold is NBITS, so the
// comparator fires only when every address bit matches. A bit counter marks
// the last bit of the destination address; in the following clock the
// decision is registered: done_o pulses for every decoded address and
// wake_o pulses together with it when the address matched.
//
// Changing the network size changes only NBITS (for example 8 bits for 256
// nodes, 10 for 1024); the PMF and AMF stay as they are.
//
// clear_i (high outside the address phase) restarts the bit count.
//
// Follows the paper: MF structure, threshold L, programmable address. Own
// choices: the bit counter, the done/wake pulses, that only the destination
// address (the first NBITS address bits of the beacon) is decoded.
module wur_addr_decoder
  import wur_pkg::*;
#(
  parameter int unsigned NBITS = ADDR_BITS,
  localparam int unsigned Y_W  = $clog2(NBITS) + 1,
  localparam int unsigned C_W  = $clog2(NBITS),
  parameter int unsigned THR   = NBITS
) (
  input  logic clk,
  input  logic rst_n,
  input  logic clear_i,       // restart bit counting
  input  logic bit_valid_i,   // new address bit
  input  logic bit_i,
  input  logic coef_en_i,     // SRF load enable
  input  logic coef_i,        // SRF serial data (node address)
  output logic [Y_W-1:0] y_o, // number of matching bits, for observation
  output logic done_o,        // one-clock pulse: destination address decoded
  output logic wake_o         // one-clock pulse: address matched
);

  logic           det;
  logic [C_W-1:0] cnt;
  logic           eval;

  wur_mf #(.TAPS(NBITS)) u_mf (
    .clk       (clk),
    .rst_n     (rst_n),
    .shift_i   (bit_valid_i),
    .x_i       (bit_i),
    .coef_en_i (coef_en_i),
    .coef_i    (coef_i),
    .thr_i     (Y_W'(THR)),
    .y_o       (y_o),
    .det_o     (det)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt    <= '0;
      eval   <= 1'b0;
      done_o <= 1'b0;
      wake_o <= 1'b0;
    end else if (clear_i) begin
      cnt    <= '0;
      eval   <= 1'b0;
      done_o <= 1'b0;
      wake_o <= 1'b0;
    end else begin
      eval   <= 1'b0;
      done_o <= eval;
      wake_o <= eval && det;
      if (bit_valid_i) begin
        if (cnt == C_W'(NBITS - 1)) begin
          cnt  <= '0;
          eval <= 1'b1;
        end else begin
          cnt <= cnt + 1'b1;
        end
      end
    end
  end

endmodule

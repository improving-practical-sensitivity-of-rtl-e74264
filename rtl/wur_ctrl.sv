// Controller of the wake-up receiver digital base-band.
//
// Sequences a beacon search in three states:
//   ST_IDLE    listen_i low (the node's sleep timer has the receiver off):
//              nothing is searched and the address path is held cleared.
//   ST_SEARCH  the PMF is armed (arm_o) and looks for a preamble.
//   ST_ADDR    entered on the PMF's sync_i pulse. A phase counter runs modulo
//              KAPPA and produces the bit-rate clock enable strobe_o for the
//              decimator once every KAPPA clocks; the AMF and the address
//              decoder work on the decimated chips. The state ends when the
//              address decoder reports done_i (match or not), and the search
//              starts again.
// clear_o is high outside ST_ADDR and restarts the chip and bit counters.
//
// Strobe timing: sync_i arrives in clock n0+KAPPA, where n0 is the clock in
// which the PMF first reached its threshold. The phase counter starts at 0
// in the next clock, so strobe_o is high in clocks n0+2*KAPPA+i*KAPPA,
// i = 0, 1, ... Together with the decimator's one-clock pipeline and its
// phase multiplexer this sums chip i over the samples that end KAPPA*(i+1)
// samples after the PMF peak.
//
// The paper names a controller (it shares a block with the decimator on the
// die) but does not describe it; states, the listen input and the counter
// are this design's own.
module wur_ctrl
  import wur_pkg::*;
#(
  parameter int unsigned OSR = KAPPA,
  localparam int unsigned P_W = (OSR > 1) ? $clog2(OSR) : 1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        listen_i,   // from the sleep timer: listen window open
  input  logic        sync_i,     // PMF: preamble found
  input  logic        done_i,     // address decoder: address decided
  output logic        arm_o,      // PMF search enable
  output logic        strobe_o,   // decimator bit-rate clock enable
  output logic        clear_o,    // restart AMF and decoder counters
  output ctrl_state_e state_o
);

  ctrl_state_e    state, state_n;
  logic [P_W-1:0] ph;

  always_comb begin
    state_n = state;
    unique case (state)
      ST_IDLE:   if (listen_i) state_n = ST_SEARCH;
      ST_SEARCH: if (!listen_i) state_n = ST_IDLE;
                 else if (sync_i) state_n = ST_ADDR;
      ST_ADDR:   if (!listen_i) state_n = ST_IDLE;
                 else if (done_i) state_n = ST_SEARCH;
      default:   state_n = ST_IDLE;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= ST_IDLE;
      ph    <= '0;
    end else begin
      state <= state_n;
      if (state != ST_ADDR)            ph <= '0;
      else if (ph == P_W'(OSR - 1))    ph <= '0;
      else                             ph <= ph + 1'b1;
    end
  end

  assign arm_o    = (state == ST_SEARCH);
  assign strobe_o = (state == ST_ADDR) && (ph == P_W'(OSR - 1));
  assign clear_o  = (state != ST_ADDR);
  assign state_o  = state;

endmodule

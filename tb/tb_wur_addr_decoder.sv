// Self-checking testbench of the address decoder wur_addr_decoder (8 bits).
//
// Programs a random node address, then feeds destination addresses of 8
// bits each (one bit every few clocks): the node's own address, addresses
// differing in one random bit, and random addresses. After the 8th bit
// done pulses exactly 2 clocks after that bit's bit_valid, and wake pulses
// with it only when all 8 bits equal the programmed address (compared
// bit by bit here, in transmission order).
module tb_wur_addr_decoder;
  import wur_pkg::*;
  localparam int unsigned L = ADDR_BITS;

  logic       clk = 1'b0;
  logic       rst_n, clear, bv, b, coef_en, coef;
  logic [3:0] y;
  logic       done, wake;
  int         checks = 0, failures = 0;

  bit [L-1:0] node;       // node[L-1] is transmitted first
  int         cyc = 0, exp_at = -1;
  bit         exp_wake;
  int         n_match = 0, n_miss = 0;

  wur_addr_decoder dut (
    .clk(clk), .rst_n(rst_n), .clear_i(clear), .bit_valid_i(bv), .bit_i(b),
    .coef_en_i(coef_en), .coef_i(coef), .y_o(y), .done_o(done), .wake_o(wake)
  );

  always #5 clk = ~clk;

  initial begin
    #400000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic tick(input bit v, input bit d);
    bv = v; b = d;
    @(negedge clk);
    cyc++;
    checks++;
    if (done !== (cyc == exp_at) || wake !== ((cyc == exp_at) && exp_wake)) begin
      failures++;
      $display("cycle %0d: done=%0b wake=%0b, expected done at %0d wake=%0b",
               cyc, done, wake, exp_at, exp_wake);
    end
  endtask

  task automatic send_addr(input bit [L-1:0] a);
    clear = 1; tick(1'b0, 1'b0); clear = 0;
    exp_wake = (a == node);
    if (exp_wake) n_match++; else n_miss++;
    for (int i = L - 1; i >= 0; i--) begin
      tick(1'b1, a[i]);
      if (i == 0) exp_at = cyc + 1;  // cyc counts edges: clock c+2
      repeat ($urandom_range(3, 20)) tick(1'b0, 1'($urandom));
    end
  endtask

  initial begin
    node = L'($urandom);
    rst_n = 0; clear = 1; bv = 0; b = 0; coef_en = 0; coef = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = L - 1; i >= 0; i--) begin
      coef_en = 1; coef = node[i];
      @(negedge clk);
    end
    coef_en = 0;
    for (int t = 0; t < 60; t++) begin
      case (t % 3)
        0: send_addr(node);
        1: send_addr(node ^ (L'(1) << $urandom_range(0, L - 1)));
        default: send_addr(L'($urandom));
      endcase
    end
    // clear in the middle of an address restarts the count
    clear = 1; tick(1'b0, 1'b0); clear = 0;
    for (int i = L - 1; i >= 4; i--) tick(1'b1, 1'($urandom));
    send_addr(node);
    checks++;
    if (n_match < 20 || n_miss < 20) failures++;
    $display("matching=%0d non-matching=%0d", n_match, n_miss);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

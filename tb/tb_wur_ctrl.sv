// Self-checking testbench of the controller wur_ctrl (kappa = 4).
//
// Runs listen/sync/done sequences with random gaps and checks, clock by
// clock: arm only while searching; after a sync pulse in clock s the address
// phase starts in clock s+1, the strobe is high exactly in clocks
// s+4, s+8, s+12, ... and clear is low during the address phase; a done
// pulse returns to the search, listen low returns to idle.
module tb_wur_ctrl;
  import wur_pkg::*;
  localparam int unsigned K = KAPPA;

  logic        clk = 1'b0;
  logic        rst_n, listen, sync, done, arm, strobe, clear;
  ctrl_state_e state;
  int          checks = 0, failures = 0;
  int          cyc = 0, sync_at = -1000, n_strobes = 0, n_addr = 0;
  bit          in_addr = 0, searching = 0;

  wur_ctrl dut (
    .clk(clk), .rst_n(rst_n), .listen_i(listen), .sync_i(sync), .done_i(done),
    .arm_o(arm), .strobe_o(strobe), .clear_o(clear), .state_o(state)
  );

  always #5 clk = ~clk;

  initial begin
    #400000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Drive inputs for one clock, compare the outputs of that clock (which
  // depend on the state reached before it) and advance the reference.
  task automatic tick(input bit l, input bit s, input bit d);
    bit exp_strobe;
    listen = l; sync = s; done = d;
    #1;
    exp_strobe = in_addr && (cyc - sync_at) % K == 0 && cyc > sync_at;
    checks++;
    if (arm !== searching || clear !== !in_addr || strobe !== exp_strobe) begin
      failures++;
      $display("cycle %0d: arm=%0b/%0b clear=%0b/%0b strobe=%0b/%0b state=%s",
               cyc, arm, searching, clear, !in_addr, strobe, exp_strobe, state.name());
    end
    if (strobe) n_strobes++;
    // reference next state
    if (!l) begin searching = 0; in_addr = 0; end
    else if (!searching && !in_addr) searching = 1;
    else if (searching && s) begin searching = 0; in_addr = 1; sync_at = cyc; n_addr++; end
    else if (in_addr && d) begin in_addr = 0; searching = 1; end
    @(negedge clk);
    cyc++;
  endtask

  initial begin
    rst_n = 0; listen = 0; sync = 0; done = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      repeat ($urandom_range(1, 5)) tick(1'b0, 1'b0, 1'b0);
      repeat ($urandom_range(1, 30)) tick(1'b1, 1'b0, 1'b0);
      tick(1'b1, 1'b1, 1'b0);
      repeat ($urandom_range(1, 60)) tick(1'b1, 1'b0, 1'b0);
      if (t % 4 == 3) begin
        tick(1'b0, 1'b0, 1'b0);              // listen window closes
      end else begin
        tick(1'b1, 1'b0, 1'b1);              // address decided
        repeat ($urandom_range(1, 10)) tick(1'b1, 1'b0, 1'b0);
      end
    end
    checks++;
    if (n_addr < 30 || n_strobes < 100) failures++;
    $display("address phases=%0d strobes=%0d", n_addr, n_strobes);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

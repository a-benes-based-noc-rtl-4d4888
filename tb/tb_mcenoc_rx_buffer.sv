// tb_mcenoc_rx_buffer: self-checking test of the receive buffer at its
// default size (32 bits, reserve 11).
//
// A queue model gives the expected read data, fill level and ack: ack must be
// high exactly when at least RESERVE entries were free after the previous
// edge. Random traffic with random reads is followed by a burst that fills
// the buffer past full (overflow set, extra bits dropped, no data corrupted),
// then checks of dst_err, connected and act-without-clm being ignored.
module tb_mcenoc_rx_buffer;
  import mcenoc_pkg::*;

  localparam int DEPTH = 32;
  localparam int RESERVE = 11;

  logic clk = 1'b0;
  logic rst = 1'b1;
  fwd_t net_fwd;
  bwd_t net_bwd;
  logic rd_en, rd_data, rd_valid, dst_err, connected, overflow;
  int checks = 0, failures = 0;
  int ack_low_seen = 0;

  mcenoc_rx_buffer dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL @%0t: %s", $time, what);
    end
  endtask

  logic model [$];
  logic ovf_model;

  // One cycle: apply inputs, compare outputs, clock, update the model.
  task automatic cycle(input logic clm, input logic act, input logic dat, input logic rd);
    logic exp_data;
    int   size_before;
    net_fwd.clm = clm; net_fwd.act = act; net_fwd.dat = dat;
    rd_en = rd;
    #1;
    check(rd_valid == (model.size() != 0), "rd_valid matches fill level");
    if (model.size() != 0) check(rd_data == model[0], "rd_data is the oldest bit");
    check(connected == clm, "connected follows clm");
    @(posedge clk);
    size_before = model.size();
    if (rd && model.size() != 0) exp_data = model.pop_front();
    if (clm && act) begin
      // a full buffer refuses the bit even if one is read in the same cycle
      if (size_before < DEPTH) model.push_back(dat);
      else ovf_model = 1'b1;
    end
    #1;
    check(net_bwd.ack == ((DEPTH - model.size()) >= RESERVE), "ack reflects free space after the edge");
    check(overflow == ovf_model, "overflow flag");
    if (!net_bwd.ack) ack_low_seen++;
  endtask

  initial begin
    net_fwd = '0; rd_en = 1'b0; dst_err = 1'b0; ovf_model = 1'b0;
    repeat (3) @(posedge clk);
    #1 rst = 1'b0;
    #1;
    // random traffic
    for (int i = 0; i < 3000; i++)
      cycle(1'b1, ($urandom % 4) != 0, 1'($urandom), ($urandom % 3) == 0);
    check(ack_low_seen > 0, "ack was de-asserted at least once");
    // drain
    while (model.size() != 0) cycle(1'b1, 1'b0, 1'b0, 1'b1);
    // fill past full
    for (int i = 0; i < DEPTH + 4; i++) cycle(1'b1, 1'b1, 1'(i % 3 == 0), 1'b0);
    check(overflow, "overflow set after writing past full");
    while (model.size() != 0) cycle(1'b1, 1'b0, 1'b0, 1'b1);
    // act without clm is not data
    cycle(1'b0, 1'b1, 1'b1, 1'b0);
    check(!rd_valid, "act without clm ignored");
    // destination error
    dst_err = 1'b1; #1;
    check(net_bwd.err, "dst_err sent back as err");
    dst_err = 1'b0; #1;
    check(!net_bwd.err, "err follows dst_err");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

// tb_mcenoc_switch: self-checking test of one 4-port switching element (P = 2).
//
// Directed cases: route setup and one-cycle forwarding; a claim on an output
// that is already owned (err until clm drops); two inputs claiming the same
// output in the same cycle (the lower index wins); an error from downstream
// (ABORT, err back after one cycle, forward signals cleared one cycle later);
// teardown by dropping clm; ack following downstream with one cycle of delay;
// act without clm (protocol error); the idle output. Then random full
// permutations with random payloads, whose expected outputs come from the
// permutation itself.
module tb_mcenoc_switch;
  import mcenoc_pkg::*;

  localparam int P  = 2;
  localparam int NP = 4;

  logic clk = 1'b0;
  logic rst = 1'b1;
  fwd_t in_fwd [NP];
  bwd_t in_bwd [NP];
  fwd_t out_fwd [NP];
  bwd_t out_bwd [NP];
  logic idle;
  int checks = 0, failures = 0;

  mcenoc_switch #(.P(P)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
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

  // Advance one cycle; inputs change and outputs are sampled 1 ns after the edge.
  task automatic step();
    @(posedge clk);
    #1;
  endtask

  task automatic drive(input int q, input logic c, input logic a, input logic d);
    in_fwd[q].clm = c;
    in_fwd[q].act = a;
    in_fwd[q].dat = d;
  endtask

  // Two route bits, MSB first; returns after the edge that takes the second.
  task automatic send_route(input int q, input int r);
    drive(q, 1, 1, r[1]); step();
    drive(q, 1, 1, r[0]); step();
    drive(q, 1, 0, 0);
  endtask

  initial begin
    for (int i = 0; i < NP; i++) begin
      drive(i, 0, 0, 0);
      out_bwd[i].ack = 1'b1;
      out_bwd[i].err = 1'b0;
    end
    #1;
    repeat (3) step();
    rst = 1'b0;
    step();
    check(idle, "idle after reset");
    for (int i = 0; i < NP; i++) check(in_bwd[i].ack && !in_bwd[i].err, "ack high, err low in WAIT");

    // 1. input 0 -> output 2, then payload crosses in one cycle
    send_route(0, 2);
    check(!in_bwd[0].err, "route 0->2 accepted");
    check(!idle, "not idle with a circuit");
    begin
      logic [15:0] pay;
      pay = 16'hB5C3;
      for (int b = 0; b < 16; b++) begin
        drive(0, 1, 1, pay[b]);
        step();
        check(out_fwd[2].clm && out_fwd[2].act && out_fwd[2].dat == pay[b],
              $sformatf("payload bit %0d on output 2 one cycle later", b));
        for (int r = 0; r < NP; r++)
          if (r != 2) check(out_fwd[r] == '0, "other outputs quiet");
      end
    end
    drive(0, 1, 0, 0);

    // 2. input 1 claims output 2, already owned by input 0
    send_route(1, 2);
    check(in_bwd[1].err, "claim on owned output is rejected");
    check(!in_bwd[1].ack, "no ack in REJECT");
    drive(1, 1, 1, 1); step();
    check(in_bwd[1].err, "err held while clm high");
    check(out_fwd[2].clm && !out_fwd[2].act, "owner's circuit undisturbed");
    drive(1, 0, 0, 0); step();
    check(!in_bwd[1].err, "err released after clm drops");

    // 3. inputs 1 and 3 claim output 0 in the same cycle: 1 wins
    drive(1, 1, 1, 0); drive(3, 1, 1, 0); step();
    drive(1, 1, 1, 0); drive(3, 1, 1, 0); step();
    drive(1, 1, 0, 0); drive(3, 1, 0, 0);
    check(!in_bwd[1].err, "lower index wins simultaneous claim");
    check(in_bwd[3].err, "higher index rejected");
    drive(1, 1, 1, 1); step();
    check(out_fwd[0].dat && out_fwd[0].act, "input 1 drives output 0");
    drive(3, 0, 0, 0); drive(1, 1, 0, 0); step();

    // 4. downstream error on output 2 aborts input 0
    out_bwd[2].err = 1'b1;
    drive(0, 1, 1, 1);
    step();
    check(in_bwd[0].err, "err propagates back one cycle after err_in rises");
    check(dut.state[0] == ABORT, "input 0 in ABORT");
    step();
    check(out_fwd[2] == '0, "forward signals released after abort");
    out_bwd[2].err = 1'b0;
    step();
    check(in_bwd[0].err, "ABORT holds err until clm drops");
    drive(0, 0, 0, 0); step();
    check(!in_bwd[0].err, "ABORT left after clm drops");

    // 5. teardown from the initiator frees output 0; input 3 takes it
    drive(1, 0, 0, 0); step();
    check(out_fwd[0].clm == 1'b0, "clm drop forwarded");
    send_route(3, 0);
    check(!in_bwd[3].err, "freed output can be claimed again");

    // 6. ack from downstream reaches the source one cycle later
    out_bwd[0].ack = 1'b0; step();
    check(!in_bwd[3].ack, "ack low follows downstream");
    out_bwd[0].ack = 1'b1; step();
    check(in_bwd[3].ack, "ack high follows downstream");
    drive(3, 0, 0, 0); step(); step();

    // 7. act without clm is a protocol error
    drive(2, 0, 1, 0); step();
    drive(2, 0, 0, 0);
    check(in_bwd[2].err, "act without clm rejected");
    step();
    check(!in_bwd[2].err, "protocol error clears once unclaimed");
    step();
    check(idle, "idle again");

    // 8. random permutations, all inputs at once
    for (int it = 0; it < 200; it++) begin
      int perm [NP];
      logic [7:0] pay [NP];
      for (int i = 0; i < NP; i++) perm[i] = i;
      for (int i = NP - 1; i > 0; i--) begin
        int j, tmp;
        j = $urandom_range(i, 0);
        tmp = perm[i]; perm[i] = perm[j]; perm[j] = tmp;
      end
      for (int i = 0; i < NP; i++) pay[i] = 8'($urandom);
      for (int b = 1; b >= 0; b--) begin
        for (int i = 0; i < NP; i++) drive(i, 1, 1, perm[i][b]);
        step();
      end
      for (int i = 0; i < NP; i++) check(!in_bwd[i].err, "permutation accepted");
      for (int b = 0; b < 8; b++) begin
        for (int i = 0; i < NP; i++) drive(i, 1, 1, pay[i][b]);
        step();
        for (int i = 0; i < NP; i++)
          check(out_fwd[perm[i]].act && out_fwd[perm[i]].dat == pay[i][b],
                "permutation payload");
      end
      for (int i = 0; i < NP; i++) drive(i, 0, 0, 0);
      step();
      step();
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

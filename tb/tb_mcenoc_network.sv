// tb_mcenoc_network: self-checking test of mcenoc_network at four sizes:
// the default 32 ports with 4-port outer switches (2-port middle stage), the
// two 8-port networks of the route drawings (2-port switches, and 4-port
// outer with a 2-port middle), and 32 ports with 8-port outer switches.
// The checks themselves are in tb_network_check. In addition, the stage
// wiring of the second half is compared, for several sizes, with a separate
// transcription of the closed-form connectivity rule
//   j = ((k + floor(k / b_n)) mod b_n) + o,  k = (i - o) * B,
//   o = floor(i / b_n) * b_n,  b_n = min(B^(2+n), N)
// (middle stage n = 0).
module tb_mcenoc_network;
  import mcenoc_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic done [4];
  int   chk [4];
  int   fail [4];

  tb_network_check #(.N(32), .P(2)) u_c0 (.clk, .done(done[0]), .checks(chk[0]), .failures(fail[0]));
  tb_network_check #(.N(8),  .P(1)) u_c1 (.clk, .done(done[1]), .checks(chk[1]), .failures(fail[1]));
  tb_network_check #(.N(8),  .P(2)) u_c2 (.clk, .done(done[2]), .checks(chk[2]), .failures(fail[2]));
  tb_network_check #(.N(32), .P(3)) u_c3 (.clk, .done(done[3]), .checks(chk[3]), .failures(fail[3]));

  int eq_checks = 0, eq_fail = 0;

  function automatic int eq3(input int nn, input int bb, input int n, input int i);
    int b_n, o, k, pw;
    pw = 1;
    for (int e = 0; e < 2 + n; e++) pw *= bb;
    b_n = (pw < nn) ? pw : nn;
    o = (i / b_n) * b_n;
    k = (i - o) * bb;
    return ((k + k / b_n) % b_n) + o;
  endfunction

  task automatic check_eq3(input int nn, input int p);
    int h;
    h = outer_stages(nn, p);
    for (int n = 0; n < h; n++)
      for (int i = 0; i < nn; i++) begin
        eq_checks++;
        if (link(nn, p, h + n, i) != eq3(nn, 1 << p, n, i)) begin
          eq_fail++;
          $display("FAIL wiring N=%0d P=%0d stage %0d port %0d", nn, p, h + n, i);
        end
      end
  endtask

  initial begin
    int checks, failures;
    check_eq3(8, 1);
    check_eq3(16, 1);
    check_eq3(16, 2);
    check_eq3(32, 2);
    check_eq3(32, 3);
    check_eq3(64, 2);
    check_eq3(64, 3);
    check_eq3(256, 4);
    fork
      begin
        // the checkers clear their done flags at time 0
        @(posedge clk);
        wait (done[0] && done[1] && done[2] && done[3]);
        checks = chk[0] + chk[1] + chk[2] + chk[3] + eq_checks;
        failures = fail[0] + fail[1] + fail[2] + fail[3] + eq_fail;
      end
      begin
        repeat (50000) @(posedge clk);
        checks = chk[0] + chk[1] + chk[2] + chk[3];
        failures = fail[0] + fail[1] + fail[2] + fail[3] + 1;
        $display("watchdog expired");
      end
    join_any
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

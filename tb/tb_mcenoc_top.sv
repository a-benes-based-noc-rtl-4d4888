// tb_mcenoc_top: end-to-end test of the whole MCENoC at its default size
// (32 nodes, 4-port outer switches, 5 stages, 9-bit header, 32-bit receive
// buffers).
//
// The testbench plays the 32 nodes. A source raises clm, sends its route
// header (built from the theory of the recursive Clos network, see
// tb_network_check), then its payload, one bit per cycle while ack is high;
// it drops clm when err appears or when it has finished. Destinations read
// their buffers slowly and at random, so buffers fill and ack stalls the
// sources. Phases:
//   1. all 32 nodes send 96 bits each on a full permutation (d = s XOR K),
//      twice, with stalls: every payload must arrive intact and in order, with
//      no overflow and no error;
//   2. two sources race for one destination: one wins, the other sees err
//      (REJECT) and gives up; then a later claim on a destination that is
//      already in use is refused and does not disturb the earlier circuit;
//   3. a destination raises err on an open circuit: the source sees err
//      (ABORT) and the circuit is released;
//   4. a source that ignores ack overruns a buffer that is not read: overflow;
//   5. the network returns to idle.
// Each mechanism is counted and must have happened at least once.
module tb_mcenoc_top;
  import mcenoc_pkg::*;

  localparam int N  = 32;
  localparam int P  = 2;
  localparam int S  = num_stages(N, P);
  localparam int H  = outer_stages(N, P);
  localparam int HB = header_bits(N, P);
  localparam int B  = 1 << P;
  localparam int M  = $clog2(N) - H * P;
  localparam int PL = 96;

  logic clk = 1'b0;
  logic rst = 1'b1;
  fwd_t src_fwd [N];
  bwd_t src_bwd [N];
  logic [N-1:0] rd_en, rd_data, rd_valid, dst_err, dst_connected, rx_overflow;
  logic idle;

  mcenoc_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_setup = 0, n_stall = 0, n_reject = 0, n_abort = 0, n_overflow = 0,
      n_teardown = 0, n_idle = 0;

  initial begin
    repeat (200000) @(posedge clk);
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

  // Route header, first bit in position HB-1: free digits c, then destination.
  function automatic logic [31:0] route(input int d, input int c0, input int c1);
    logic [31:0] h;
    int pos, c [2];
    c[0] = c0; c[1] = c1;
    h = '0;
    pos = HB;
    for (int k = 0; k < H; k++)
      for (int b = P - 1; b >= 0; b--) begin pos--; h[pos] = c[k][b]; end
    for (int b = M - 1; b >= 0; b--) begin pos--; h[pos] = 1'((d >> (H * P)) >> b); end
    for (int k = H - 1; k >= 0; k--)
      for (int b = P - 1; b >= 0; b--) begin pos--; h[pos] = 1'(((d >> (k * P)) % B) >> b); end
    return h;
  endfunction

  // Source node state.
  typedef enum {S_IDLE, S_HDR, S_PAY, S_HOLD} src_st_e;
  src_st_e      st [N];
  logic [31:0]  hdr [N];
  logic [PL-1:0] pay [N];
  int           idx [N];
  int           hold [N];
  logic         obey [N];
  logic         got_err [N];
  // Destination node state.
  int           rd_pct [N];
  logic [PL-1:0] rx [N];
  int           rx_cnt [N];
  logic         refuse [N];

  task automatic start(input int s, input int d, input int c0, input int c1, input logic ob);
    st[s] = S_HDR; idx[s] = 0; hdr[s] = route(d, c0, c1);
    pay[s] = {$urandom, $urandom, $urandom};
    obey[s] = ob; got_err[s] = 1'b0; hold[s] = 0;
  endtask

  // One clock cycle of all nodes.
  task automatic tick();
    for (int s = 0; s < N; s++) begin
      // a source gives up on err
      if (st[s] != S_IDLE && src_bwd[s].err) begin
        got_err[s] = 1'b1;
        st[s] = S_IDLE;
      end
      src_fwd[s] = '0;
      unique case (st[s])
        S_HDR: begin
          src_fwd[s] = '{dat: hdr[s][HB-1-idx[s]], act: 1'b1, clm: 1'b1};
          idx[s]++;
          if (idx[s] == HB) begin st[s] = S_PAY; idx[s] = 0; end
        end
        S_PAY: begin
          src_fwd[s].clm = 1'b1;
          if (!obey[s] || src_bwd[s].ack) begin
            src_fwd[s].act = 1'b1;
            src_fwd[s].dat = pay[s][idx[s]];
            idx[s]++;
            if (idx[s] == PL) st[s] = S_HOLD;
          end else n_stall++;
        end
        S_HOLD: begin
          src_fwd[s].clm = 1'b1;
          hold[s]++;
          if (hold[s] > 2 * S) begin st[s] = S_IDLE; n_teardown++; end
        end
        default: ;
      endcase
    end
    for (int d = 0; d < N; d++) begin
      rd_en[d] = rd_valid[d] && ($urandom_range(99, 0) < rd_pct[d]);
      dst_err[d] = refuse[d] && dst_connected[d];
    end
    @(posedge clk);
    for (int d = 0; d < N; d++)
      if (rd_en[d] && rx_cnt[d] < PL) begin
        rx[d][rx_cnt[d]] = rd_data[d];
        rx_cnt[d]++;
      end
    #1;
    if (idle) n_idle++;
  endtask

  task automatic clear_rx();
    for (int d = 0; d < N; d++) begin rx_cnt[d] = 0; rx[d] = '0; end
  endtask

  task automatic run_until_quiet(input int max_cycles);
    int n;
    logic busy;
    n = 0;
    do begin
      tick();
      n++;
      busy = 1'b0;
      for (int s = 0; s < N; s++) if (st[s] != S_IDLE) busy = 1'b1;
      for (int d = 0; d < N; d++) if (rd_valid[d] && rd_pct[d] > 0) busy = 1'b1;
    end while (busy && n < max_cycles);
    repeat (2 * S) tick();
  endtask

  initial begin
    for (int i = 0; i < N; i++) begin
      src_fwd[i] = '0; st[i] = S_IDLE; rd_pct[i] = 100; refuse[i] = 1'b0;
      got_err[i] = 1'b0;
    end
    rd_en = '0; dst_err = '0;
    clear_rx();
    repeat (3) @(posedge clk);
    #1 rst = 1'b0;
    tick();
    check(idle, "idle after reset");

    // 1. Full permutations with slow readers.
    for (int rep = 0; rep < 2; rep++) begin
      int k, setup_seen;
      k = (rep == 0) ? 5 : 27;
      clear_rx();
      for (int s = 0; s < N; s++) begin
        rd_pct[s] = 20 + 10 * (s % 5);
        start(s, s ^ k, s % B, (s / B) % B, 1'b1);
      end
      // first payload bit of every source reaches its destination buffer at
      // HB + S and can be read one cycle later
      setup_seen = 0;
      for (int cyc = 0; cyc < HB + S + 1; cyc++) begin
        tick();
        for (int d = 0; d < N; d++)
          if (rd_valid[d]) begin
            check(cyc + 1 == HB + S + 1, $sformatf("first payload bit readable at HB+S+1 (cycle %0d)", cyc + 1));
            setup_seen++;
          end
      end
      check(setup_seen == N, $sformatf("all %0d circuits set up in HB+S cycles (%0d)", N, setup_seen));
      n_setup += setup_seen;
      run_until_quiet(20000);
      for (int s = 0; s < N; s++) begin
        check(!got_err[s], $sformatf("permutation: source %0d saw no err", s));
        check(rx_cnt[s ^ k] == PL && rx[s ^ k] == pay[s],
              $sformatf("permutation: payload %0d -> %0d intact", s, s ^ k));
      end
      check(rx_overflow == '0, "permutation: no overflow with flow control");
    end
    check(idle, "idle after permutations");
    for (int i = 0; i < N; i++) rd_pct[i] = 100;

    // 2. Two sources race for destination 9 through different sub-networks.
    clear_rx();
    start(3, 9, 0, 0, 1'b1);
    start(12, 9, 1, 0, 1'b1);
    run_until_quiet(5000);
    check(!got_err[3] && got_err[12], "race: lower input wins, other rejected");
    check(rx_cnt[9] == PL && rx[9] == pay[3], "race: winner's payload delivered");
    if (got_err[12]) n_reject++;

    // 2b. A critical circuit is set up first; a later, less critical claim on
    //     the same destination is refused and the critical payload is intact.
    clear_rx();
    start(5, 22, 1, 1, 1'b1);
    repeat (HB + 2) tick();
    start(18, 22, 2, 0, 1'b1);
    run_until_quiet(5000);
    check(!got_err[5] && got_err[18], "later claim cannot steal an established route");
    check(rx_cnt[22] == PL && rx[22] == pay[5], "established route's payload undisturbed");
    if (got_err[18]) n_reject++;

    // 3. Destination 20 refuses an incoming circuit after it is set up.
    clear_rx();
    refuse[20] = 1'b1;
    start(7, 20, 2, 1, 1'b1);
    run_until_quiet(5000);
    check(got_err[7], "abort: source sees the destination's err");
    if (got_err[7]) n_abort++;
    refuse[20] = 1'b0;
    check(!dst_connected[20], "abort: circuit released");

    // 4. A source ignoring ack overruns an unread buffer.
    clear_rx();
    rd_pct[30] = 0;
    start(1, 30, 3, 3, 1'b0);
    run_until_quiet(5000);
    check(rx_overflow[30], "overflow flagged when ack is ignored");
    if (rx_overflow[30]) n_overflow++;
    check(rx_overflow[29:0] == '0, "no overflow elsewhere");
    rd_pct[30] = 100;
    repeat (PL) tick();

    // 5. Idle again; the mechanism counts.
    check(idle, "idle at the end");
    $display("setups=%0d stall_cycles=%0d rejects=%0d aborts=%0d overflows=%0d teardowns=%0d idle_cycles=%0d",
             n_setup, n_stall, n_reject, n_abort, n_overflow, n_teardown, n_idle);
    check(n_setup > 0,    "route setup happened");
    check(n_stall > 0,    "flow-control stall happened");
    check(n_reject > 0,   "conflict rejection happened");
    check(n_abort > 0,    "abort from destination happened");
    check(n_overflow > 0, "overflow happened");
    check(n_teardown > 0, "teardown by the source happened");
    check(n_idle > 0,     "idle network seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

// tb_network_check: drives and checks one mcenoc_network of size N with
// P-bit outer switches; used by tb_mcenoc_network for several sizes.
//
// Expected routes are built from the theory of the recursive Clos network,
// not from the RTL's wiring function: the first H switch stages may send a
// circuit into any sub-network (free digits c_0..c_{H-1}); after that the
// route is fixed by the destination d, whose base-2^P digits, most
// significant first, select the middle and then the outer switch outputs.
// Header = c_0 .. c_{H-1}, d >> (H*P) (M bits), digit_{H-1}(d) .. digit_0(d).
// With c = digits of the source and d = s XOR K, every source can be routed
// at once without conflict.
//
// Checks: the header examples of the 8-port drawings (0 -> 1 is 10001 with
// 2-port switches, 10-0-01 with 4-port outer switches); full XOR permutations
// with payloads arriving S cycles after they are sent; a conflict in the last
// stage (lower input wins, the loser sees err HB + 2S - 2 cycles after the
// first header bit); an error raised by the destination (err back after S
// cycles, circuit cleared); ack travelling back in S cycles.
module tb_network_check
  import mcenoc_pkg::*;
#(
  parameter int N = 8,
  parameter int P = 1
) (
  input  logic clk,
  output logic done,
  output int   checks,
  output int   failures
);

  localparam int S  = num_stages(N, P);
  localparam int H  = outer_stages(N, P);
  localparam int HB = header_bits(N, P);
  localparam int L  = $clog2(N);
  localparam int M  = L - H * P;
  localparam int B  = 1 << P;
  localparam int PL = 24;                 // payload bits per test

  logic rst;
  fwd_t src_fwd [N];
  bwd_t src_bwd [N];
  fwd_t dst_fwd [N];
  bwd_t dst_bwd [N];
  logic idle;

  mcenoc_network #(.N(N), .P(P)) dut (.*);

  // Per-test stimulus and observations.
  logic [63:0] hdr [N];
  logic [PL-1:0] pay [N];
  logic active [N];
  int   dest [N];
  int   rx_cnt [N];
  logic [PL-1:0] rx_bits [N];
  int   rx_first [N];
  int   err_first [N];
  int   cyc;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL N=%0d P=%0d @cycle %0d: %s", N, P, cyc, what);
    end
  endtask

  task automatic step();
    @(posedge clk);
    #1;
  endtask

  // Route header, first bit in position HB-1.
  function automatic logic [63:0] route(input int d, input int c []);
    logic [63:0] h;
    int pos;
    h = '0;
    pos = HB;
    for (int k = 0; k < H; k++)
      for (int b = P - 1; b >= 0; b--) begin pos--; h[pos] = c[k][b]; end
    for (int b = M - 1; b >= 0; b--) begin pos--; h[pos] = 1'((d >> (H * P)) >> b); end
    for (int k = H - 1; k >= 0; k--)
      for (int b = P - 1; b >= 0; b--) begin pos--; h[pos] = 1'(((d >> (k * P)) % B) >> b); end
    return h;
  endfunction

  // Run one round: active sources send header then payload, hold clm for
  // `hold` further cycles, then release. Records arrivals and errors.
  task automatic run_round(input int hold);
    for (int i = 0; i < N; i++) begin
      rx_cnt[i] = 0; rx_bits[i] = '0; rx_first[i] = -1; err_first[i] = -1;
    end
    for (cyc = 0; cyc < HB + PL + hold + 2 * S + 4; cyc++) begin
      for (int i = 0; i < N; i++) begin
        if (active[i] && cyc < HB + PL + hold) begin
          src_fwd[i].clm = 1'b1;
          src_fwd[i].act = (cyc < HB + PL);
          src_fwd[i].dat = (cyc < HB) ? hdr[i][HB-1-cyc] : (cyc < HB + PL) ? pay[i][cyc-HB] : 1'b0;
        end else begin
          src_fwd[i] = '0;
        end
      end
      step();
      // observations belong to the cycle after the edge
      for (int d = 0; d < N; d++)
        if (dst_fwd[d].act && dst_fwd[d].clm) begin
          if (rx_first[d] < 0) rx_first[d] = cyc + 1;
          if (rx_cnt[d] < PL) rx_bits[d][rx_cnt[d]] = dst_fwd[d].dat;
          rx_cnt[d]++;
        end
      for (int s = 0; s < N; s++)
        if (src_bwd[s].err && err_first[s] < 0) err_first[s] = cyc + 1;
    end
    for (int i = 0; i < N; i++) src_fwd[i] = '0;
    step();
    step();
  endtask

  initial begin
    int c [];
    done = 1'b0;
    checks = 0;
    failures = 0;
    c = new[H > 0 ? H : 1];
    rst = 1'b1;
    for (int i = 0; i < N; i++) begin
      src_fwd[i] = '0;
      dst_bwd[i].ack = 1'b1;
      dst_bwd[i].err = 1'b0;
      active[i] = 1'b0;
    end
    repeat (3) step();
    rst = 1'b0;
    step();
    check(idle, "network idle after reset");

    // Header examples of the 8-port drawings.
    if (N == 8 && P == 1) begin
      c[0] = 1; c[1] = 0;
      check(route(1, c)[4:0] == 5'b10001, "0 -> 1 header is 10001");
    end
    if (N == 8 && P == 2) begin
      c[0] = 2;
      check(route(1, c)[4:0] == 5'b10001, "0 -> 1 header is 10-0-01");
    end

    // 1. Single circuits, random source, destination and free digits.
    for (int it = 0; it < 16; it++) begin
      int s, d;
      s = $urandom_range(N - 1, 0);
      d = $urandom_range(N - 1, 0);
      for (int k = 0; k < H; k++) c[k] = $urandom_range(B - 1, 0);
      for (int i = 0; i < N; i++) active[i] = 1'b0;
      active[s] = 1'b1;
      hdr[s] = route(d, c);
      pay[s] = PL'($urandom);
      run_round(2);
      check(rx_cnt[d] == PL, $sformatf("single %0d->%0d: %0d payload bits arrived", s, d, rx_cnt[d]));
      check(rx_bits[d] == pay[s], "single: payload intact");
      check(rx_first[d] == HB + S, $sformatf("single: first payload after HB+S cycles (got %0d)", rx_first[d]));
      check(err_first[s] < 0, "single: no error");
      for (int o = 0; o < N; o++) if (o != d) check(rx_cnt[o] == 0, "single: no stray data");
    end

    // 2. Full permutations d = s XOR K, every node at once.
    for (int it = 0; it < 8; it++) begin
      int k;
      k = (it == 0) ? 0 : $urandom_range(N - 1, 0);
      for (int s = 0; s < N; s++) begin
        for (int j = 0; j < H; j++) c[j] = (s >> (j * P)) % B;
        active[s] = 1'b1;
        dest[s] = s ^ k;
        hdr[s] = route(dest[s], c);
        pay[s] = PL'($urandom);
      end
      run_round(1);
      for (int s = 0; s < N; s++) begin
        check(err_first[s] < 0, $sformatf("perm K=%0d: source %0d routed", k, s));
        check(rx_bits[dest[s]] == pay[s] && rx_cnt[dest[s]] == PL, "perm: payload intact");
        check(rx_first[dest[s]] == HB + S, "perm: latency HB+S");
      end
    end

    // 3. Conflict in the last stage: two sources, different first digit,
    //    same destination. The circuit entering on the lower input wins.
    if (H > 0) begin
      int s0, s1, d;
      for (int i = 0; i < N; i++) active[i] = 1'b0;
      s0 = B;        // second first-stage switch, routed through sub-network 1
      s1 = 0;        // first first-stage switch, routed through sub-network 0
      d  = N - 1;
      active[s0] = 1'b1; active[s1] = 1'b1;
      for (int k = 0; k < H; k++) c[k] = 0;
      c[0] = 1; hdr[s0] = route(d, c);
      c[0] = 0; hdr[s1] = route(d, c);
      pay[s0] = PL'($urandom); pay[s1] = PL'($urandom);
      run_round(2);
      check(err_first[s1] < 0, "last-stage conflict: lower input keeps the route");
      check(rx_bits[d] == pay[s1] && rx_cnt[d] == PL, "last-stage conflict: winner's payload");
      check(err_first[s0] == HB + 2 * S - 2,
            $sformatf("last-stage conflict: err after HB+2S-2 cycles (got %0d)", err_first[s0]));
    end

    // 4. Destination raises err on an established circuit; 5. ack round trip.
    begin
      int s, d, t_err, t_ack;
      s = N / 2; d = 1;
      for (int k = 0; k < H; k++) c[k] = 0;
      hdr[s] = route(d, c);
      rst = 1'b0;
      for (cyc = 0; cyc < HB; cyc++) begin
        src_fwd[s].clm = 1'b1; src_fwd[s].act = 1'b1; src_fwd[s].dat = hdr[s][HB-1-cyc];
        step();
      end
      src_fwd[s].act = 1'b0;
      repeat (S + 1) step();
      check(dst_fwd[d].clm, "circuit reaches the destination");
      check(src_bwd[s].ack, "ack high on the open circuit");
      dst_bwd[d].ack = 1'b0;
      t_ack = 0;
      while (src_bwd[s].ack && t_ack < 4 * S) begin step(); t_ack++; end
      check(t_ack == S, $sformatf("ack low reaches the source after S cycles (got %0d)", t_ack));
      dst_bwd[d].ack = 1'b1;
      repeat (S + 1) step();
      check(src_bwd[s].ack, "ack high again");
      dst_bwd[d].err = 1'b1;
      t_err = 0;
      while (!src_bwd[s].err && t_err < 4 * S) begin step(); t_err++; end
      check(t_err == S, $sformatf("destination err reaches the source after S cycles (got %0d)", t_err));
      step();
      check(!dst_fwd[d].clm, "aborted circuit released at the destination");
      dst_bwd[d].err = 1'b0;
      src_fwd[s] = '0;
      repeat (S + 2) step();
      check(!src_bwd[s].err, "err clears after the source drops clm");
      check(idle, "network idle at the end");
    end

    done = 1'b1;
  end

endmodule

// tb_mcenoc_tdm: the all-to-all exchange of a 32-node MCENoC as a
// time-division-multiplexed schedule, on mcenoc_top at its default size.
//
// The worst-case schedule has every node send one message to every node, in N
// phases of equal length. Phase k is the permutation d = s XOR k, which is
// conflict free when each free route digit is the source's own digit.
// Within a phase every source sends its 9-bit header and a PL-bit payload
// back to back. It then drops clm for one cycle, and the next phase starts.
// The phase period is therefore T = HB + PL + 1 cycles, and the payload
// efficiency is PL / T.
//
// Checks: no source ever sees err; every destination reads exactly the
// expected N payloads in phase order; and every payload bit is readable at a
// fixed, predictable cycle. Bit i of phase k is read at k*T + HB + S + 1 + i,
// with no jitter. The total exchange time and the efficiency are printed.
module tb_mcenoc_tdm;
  import mcenoc_pkg::*;

  localparam int N  = 32;
  localparam int P  = 2;
  localparam int S  = num_stages(N, P);
  localparam int H  = outer_stages(N, P);
  localparam int HB = header_bits(N, P);
  localparam int B  = 1 << P;
  localparam int M  = $clog2(N) - H * P;
  localparam int PL = 64;
  localparam int T  = HB + PL + 1;

  logic clk = 1'b0;
  logic rst = 1'b1;
  fwd_t src_fwd [N];
  bwd_t src_bwd [N];
  logic [N-1:0] rd_en, rd_data, rd_valid, dst_err, dst_connected, rx_overflow;
  logic idle;

  mcenoc_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    repeat (N * T + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL @%0t: %s", $time, what);
    end
  endtask

  function automatic logic [31:0] route(input int s, input int d);
    logic [31:0] h;
    int pos;
    h = '0;
    pos = HB;
    for (int k = 0; k < H; k++)
      for (int b = P - 1; b >= 0; b--) begin pos--; h[pos] = (((s >> (k * P)) % B) >> b) & 1; end
    for (int b = M - 1; b >= 0; b--) begin pos--; h[pos] = 1'((d >> (H * P)) >> b); end
    for (int k = H - 1; k >= 0; k--)
      for (int b = P - 1; b >= 0; b--) begin pos--; h[pos] = 1'(((d >> (k * P)) % B) >> b); end
    return h;
  endfunction

  // Payload of source s in phase k: a simple function both sides can compute.
  function automatic logic pay_bit(input int s, input int k, input int i);
    logic [31:0] x;
    x = 32'(s * 2654435761 + k * 40503 + i * 2246822519);
    return x[17] ^ x[5];
  endfunction

  int rx_cnt [N];
  int err_seen;

  initial begin
    int cyc;
    for (int i = 0; i < N; i++) begin src_fwd[i] = '0; rx_cnt[i] = 0; end
    rd_en = '0; dst_err = '0; err_seen = 0;
    repeat (3) @(posedge clk);
    #1 rst = 1'b0;
    @(posedge clk);
    #1;
    for (cyc = 0; cyc < N * T + HB + S + 4; cyc++) begin
      int k, o;
      k = cyc / T;
      o = cyc % T;
      for (int s = 0; s < N; s++) begin
        src_fwd[s] = '0;
        if (k < N && o < HB) begin
          src_fwd[s] = '{dat: route(s, s ^ k)[HB-1-o], act: 1'b1, clm: 1'b1};
        end else if (k < N && o < HB + PL) begin
          src_fwd[s] = '{dat: pay_bit(s, k, o - HB), act: 1'b1, clm: 1'b1};
        end
      end
      rd_en = rd_valid;
      // check every bit read in this cycle against the fixed schedule
      for (int d = 0; d < N; d++)
        if (rd_valid[d]) begin
          int ph, i, t0;
          ph = rx_cnt[d] / PL;
          i  = rx_cnt[d] % PL;
          t0 = ph * T + HB + S + 1 + i;
          check(cyc == t0, $sformatf("dest %0d phase %0d bit %0d read at %0d, expected %0d", d, ph, i, cyc, t0));
          check(rd_data[d] == pay_bit(d ^ ph, ph, i), "payload bit");
          rx_cnt[d]++;
        end
      @(posedge clk);
      #1;
      for (int s = 0; s < N; s++) if (src_bwd[s].err) err_seen++;
    end
    check(err_seen == 0, "no source ever saw err");
    for (int d = 0; d < N; d++) check(rx_cnt[d] == N * PL, $sformatf("dest %0d received all %0d phases", d, N));
    check(rx_overflow == '0, "no overflow");
    check(idle, "idle after the exchange");
    $display("all-to-all: %0d phases of %0d cycles (header %0d, payload %0d): %0d cycles, payload efficiency %0d.%01d%%",
             N, T, HB, PL, N * T, (1000 * PL / T) / 10, (1000 * PL / T) % 10);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

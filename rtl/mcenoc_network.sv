// mcenoc_network: the N x N MCENoC Benes/Clos network.
//
// Function. N serial ports enter on the left (src_*) and leave on the right
// (dst_*); a node owns input q and output q. A source sets up a circuit by
// raising clm and clocking in a route header of header_bits(N,P) bits on dat
// (with act high on each bit); each stage strips the bits it needs, so only
// the payload reaches the destination. After setup the circuit is a pipeline
// of one register per stage: payload, act and clm arrive S cycles later, and
// ack/err come back S cycles later.
//
// Structure. S = 2H+1 stages of mcenoc_switch. The H outer stages on each
// side use 2^P-port switches; the middle stage uses 2^M-port switches, so any
// N = 2^L works (N = 32, P = 2: 8, 8, 16, 8 and 8 switches of 4, 4, 2, 4 and 4
// ports, a 9-bit header). Stages are joined by the design's connectivity
// rule (mcenoc_pkg::connect and its mirror image, mcenoc_pkg::link). This
// gives the published drawings: in the 32-port network, the first switch of
// the second stage feeds middle switches 1, 3, 5 and 7; in the 8-port
// networks, source 0 reaches destination 1 with header 10001 (2-port
// switches) or 10-0-01 (4-port outer switches).
//
// Header format: per stage, from the input side, the bits selecting the output
// of the switch, most significant bit first. The network does not compute
// routes: a Benes network can route every permutation, and the routes are
// computed offline.
//
// idle is high when every switch is idle.
module mcenoc_network
  import mcenoc_pkg::*;
#(
  parameter int N = 32,   // ports (a power of two)
  parameter int P = 2     // route bits per outer-stage switch
) (
  input  logic clk,
  input  logic rst,
  input  fwd_t src_fwd [N],
  output bwd_t src_bwd [N],
  output fwd_t dst_fwd [N],
  input  bwd_t dst_bwd [N],
  output logic idle
);

  localparam int S = num_stages(N, P);

  // Signals at the input side of stage t (t = S is the network output).
  fwd_t sf [S+1][N];
  bwd_t sb [S+1][N];
  fwd_t of [S][N];   // switch outputs of stage t, before the shuffle
  bwd_t ob [S][N];
  logic [S-1:0] stage_idle;

  for (genvar i = 0; i < N; i++) begin : g_edge
    assign sf[0][i]   = src_fwd[i];
    assign src_bwd[i] = sb[0][i];
    assign dst_fwd[i] = sf[S][i];
    assign sb[S][i]   = dst_bwd[i];
  end

  for (genvar t = 0; t < S; t++) begin : g_stage
    localparam int SB = stage_bits(N, P, t);
    localparam int SP = 1 << SB;
    logic [N/SP-1:0] sw_idle;

    for (genvar k = 0; k < N / SP; k++) begin : g_sw
      fwd_t i_f [SP];
      bwd_t i_b [SP];
      fwd_t o_f [SP];
      bwd_t o_b [SP];
      for (genvar j = 0; j < SP; j++) begin : g_port
        assign i_f[j] = sf[t][k*SP + j];
        assign sb[t][k*SP + j] = i_b[j];
        assign of[t][k*SP + j] = o_f[j];
        assign o_b[j] = ob[t][k*SP + j];
      end
      mcenoc_switch #(.P(SB)) u_sw (
        .clk, .rst,
        .in_fwd(i_f), .in_bwd(i_b), .out_fwd(o_f), .out_bwd(o_b),
        .idle(sw_idle[k])
      );
    end
    assign stage_idle[t] = &sw_idle;

    // Shuffle to the next stage (the last stage goes straight to the outputs).
    for (genvar x = 0; x < N; x++) begin : g_link
      localparam int Y = (t == S - 1) ? x : link(N, P, t, x);
      assign sf[t+1][Y] = of[t][x];
      assign ob[t][x]   = sb[t+1][Y];
    end
  end

  assign idle = &stage_idle;

endmodule

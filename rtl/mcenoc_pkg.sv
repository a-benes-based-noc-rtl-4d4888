// mcenoc_pkg: types and elaboration-time helpers shared by every MCENoC module.
//
// Each network port is a 1-bit serial link made of three forward signals
// (dat, act, clm) and two backward signals (ack, err), with the names of the
// port diagram of the design. The text of the design calls the backward flow
// control signal "cts" (clear to send); here it keeps the diagram's name, ack.
//
// The helper functions describe the shape of an N-port network built from
// switches that take P route bits each (2^P ports):
//   L = log2(N), H = ceil(L/P) - 1 outer stages on each side,
//   a middle stage whose switches take M = L - H*P bits (2^M ports),
//   S = 2H + 1 stages and 2HP + M header bits in total.
// For N = 32, P = 2 that is 5 stages (4-, 4-, 2-, 4-, 4-port switches) and a
// 9-bit route header. The stage-to-stage wiring is the design's closed-form
// connectivity rule (function connect), a perfect 2^P-way shuffle inside
// blocks of min(2^(P*(2+n)), N) ports, n counted outward from the middle
// stage; the first half of the network is its mirror image. Each output of a
// first-half switch leads into a different sub-network, which is what makes
// the network a Benes (Clos) network.
package mcenoc_pkg;

  // Forward half of a port: serial data bit, bit valid, and circuit claim.
  typedef struct packed {
    logic dat;
    logic act;
    logic clm;
  } fwd_t;

  // Backward half of a port: clear to send, and error.
  typedef struct packed {
    logic ack;
    logic err;
  } bwd_t;

  // States of a switch input port.
  typedef enum logic [1:0] {
    WAIT   = 2'd0,  // unconnected, collecting route bits
    ACCEPT = 2'd1,  // connected to its output, forwarding
    REJECT = 2'd2,  // route refused (conflict or protocol error), err high
    ABORT  = 2'd3   // connection torn down by an error from downstream
  } port_state_e;

  function automatic int log2i(input int n);
    return $clog2(n);
  endfunction

  // Number of outer stages on each side of the middle stage.
  function automatic int outer_stages(input int n, input int p);
    int l;
    l = log2i(n);
    return (l + p - 1) / p - 1;
  endfunction

  // Total number of switching stages.
  function automatic int num_stages(input int n, input int p);
    return 2 * outer_stages(n, p) + 1;
  endfunction

  // Route bits taken by a switch of stage t (0 = the input side).
  function automatic int stage_bits(input int n, input int p, input int t);
    int h;
    h = outer_stages(n, p);
    return (t == h) ? (log2i(n) - h * p) : p;
  endfunction

  // Total route header length from a source to a destination.
  function automatic int header_bits(input int n, input int p);
    return 2 * outer_stages(n, p) * p + (log2i(n) - outer_stages(n, p) * p);
  endfunction

  // Number of switches in the whole network.
  function automatic int num_switches(input int n, input int p);
    int tot;
    tot = 0;
    for (int t = 0; t < num_stages(n, p); t++) tot += n >> stage_bits(n, p, t);
    return tot;
  endfunction

  // Published connectivity rule between an inner stage n (n = 0 is the
  // middle stage) and the next stage outward: port i of the inner stage
  // meets port j of the outer one, with
  //   b_n = min(B^(2+n), N), o = floor(i / b_n) * b_n, k = (i - o) * B,
  //   j = ((k + floor(k / b_n)) mod b_n) + o.
  function automatic int connect(input int n, input int p, input int nn, input int i);
    int bsz, pw, o, k;
    pw = 1;
    for (int e = 0; e < 2 + nn; e++) if (pw < n) pw = pw << p;
    bsz = (pw < n) ? pw : n;
    o = (i / bsz) * bsz;
    k = (i - o) * (1 << p);
    return ((k + k / bsz) % bsz) + o;
  endfunction

  // Wiring between stage t and stage t+1: output position x of stage t
  // (switch x / 2^bits, port x % 2^bits) feeds input position link(x) of
  // stage t+1. After the middle stage this is the rule above; before it,
  // the mirror image (the inverse mapping).
  function automatic int link(input int n, input int p, input int t, input int x);
    int h;
    h = outer_stages(n, p);
    if (t >= h) return connect(n, p, t - h, x);
    for (int i = 0; i < n; i++)
      if (connect(n, p, h - 1 - t, i) == x) return i;
    return x;  // not reached: the rule is a permutation
  endfunction

endpackage

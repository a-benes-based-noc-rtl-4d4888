// mcenoc_top: the complete N x N MCENoC, as the nodes see it.
//
// Function. Each of the N nodes drives one source port (clm, act, dat in;
// ack, err out) and drains one destination port through its receive buffer.
// The Benes network carries the circuits; mcenoc_rx_buffer at every output
// turns the received bit stream into a FIFO and produces the clear-to-send
// (ack) flow control that travels back along the circuit. The nodes
// themselves (processors, memories, peripherals and their bus bridges) are
// outside this block, which is why their signals are plain ports here.
//
// Interface. src_fwd/src_bwd: the source side of every port, one fwd_t and
// bwd_t per node (see mcenoc_pkg). rd_en/rd_data/rd_valid: the read side of
// each receive FIFO. dst_err: a destination's refusal of its circuit.
// dst_connected: a circuit ends at that node. rx_overflow: a source ignored
// ack and bits were lost. idle: no switch holds a circuit or sees a claim.
//
// Timing. With the default N = 32 and P = 2 the network has S = 5 stages and
// a 9-bit header. A source that starts the header in cycle 0 and sends one
// bit per cycle has its first payload bit (cycle 9) presented at the
// destination buffer in cycle 9 + 5 = 14 and readable in cycle 15.
module mcenoc_top
  import mcenoc_pkg::*;
#(
  parameter int N          = 32,
  parameter int P          = 2,
  parameter int RX_DEPTH   = 32,
  parameter int RX_RESERVE = 2 * num_stages(N, P) + 1
) (
  input  logic clk,
  input  logic rst,
  input  fwd_t src_fwd [N],
  output bwd_t src_bwd [N],
  input  logic [N-1:0] rd_en,
  output logic [N-1:0] rd_data,
  output logic [N-1:0] rd_valid,
  input  logic [N-1:0] dst_err,
  output logic [N-1:0] dst_connected,
  output logic [N-1:0] rx_overflow,
  output logic idle
);

  fwd_t dst_fwd [N];
  bwd_t dst_bwd [N];

  mcenoc_network #(.N(N), .P(P)) u_net (
    .clk, .rst,
    .src_fwd, .src_bwd, .dst_fwd, .dst_bwd,
    .idle
  );

  for (genvar i = 0; i < N; i++) begin : g_rx
    mcenoc_rx_buffer #(.DEPTH(RX_DEPTH), .RESERVE(RX_RESERVE)) u_rx (
      .clk, .rst,
      .net_fwd  (dst_fwd[i]),
      .net_bwd  (dst_bwd[i]),
      .rd_en    (rd_en[i]),
      .rd_data  (rd_data[i]),
      .rd_valid (rd_valid[i]),
      .dst_err  (dst_err[i]),
      .connected(dst_connected[i]),
      .overflow (rx_overflow[i])
    );
  end

endmodule

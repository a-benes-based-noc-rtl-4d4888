// mcenoc_rx_buffer: receive buffer and clear-to-send control at one network
// output.
//
// Function. Payload bits that arrive on a connected circuit (clm and act high)
// are pushed into a DEPTH-bit FIFO, which the destination node drains with
// rd_en. Flow control is the ack (clear to send) signal: it is high while at
// least RESERVE entries are free and drops as soon as fewer are, so the bits
// already in flight when the source learns of it still fit. The design asks
// for a reserve of at least two network traversals' worth of bits (2S for an
// S-stage network: S cycles for ack to travel back, S for the bits in flight
// to arrive); RESERVE defaults to that for the default 5-stage network, plus
// one for this block's own ack register. Because the switches ignore ack, a
// source that does not honour it can overrun the buffer: the extra bits are
// dropped and overflow is set until reset.
//
// dst_err lets the destination refuse or tear down the circuit: it is sent
// back as err. connected shows that a circuit currently ends here.
//
// Timing. A bit presented in cycle c can be read from cycle c+1; ack follows
// the fill level with one cycle of delay. The FIFO depth, the reserve, the
// overflow flag and the read interface are this design's own choices.
module mcenoc_rx_buffer
  import mcenoc_pkg::*;
#(
  parameter int DEPTH   = 32,  // FIFO size in bits
  parameter int RESERVE = 11   // free entries needed to keep ack high
) (
  input  logic clk,
  input  logic rst,
  input  fwd_t net_fwd,        // from the network output
  output bwd_t net_bwd,
  input  logic rd_en,          // destination node: pop one bit
  output logic rd_data,
  output logic rd_valid,
  input  logic dst_err,        // destination node: refuse / tear down
  output logic connected,
  output logic overflow
);

  localparam int AW = $clog2(DEPTH);

  logic [DEPTH-1:0] mem;
  logic [AW-1:0]    wp, rp;
  logic [AW:0]      count, count_d;
  logic             push, pop, full;
  logic             ack_q;

  assign full     = (int'(count) == DEPTH);
  assign push     = net_fwd.clm && net_fwd.act;
  assign pop      = rd_en && (count != 0);
  assign count_d  = count + (AW+1)'(push && !full) - (AW+1)'(pop);

  always_ff @(posedge clk) begin
    if (rst) begin
      wp       <= '0;
      rp       <= '0;
      count    <= '0;
      ack_q    <= 1'b0;
      overflow <= 1'b0;
      mem      <= '0;
    end else begin
      if (push && !full) begin
        mem[wp] <= net_fwd.dat;
        wp      <= (int'(wp) == DEPTH - 1) ? '0 : wp + 1'b1;
      end
      if (push && full) overflow <= 1'b1;
      if (pop) rp <= (int'(rp) == DEPTH - 1) ? '0 : rp + 1'b1;
      count <= count_d;
      ack_q <= (DEPTH - int'(count_d)) >= RESERVE;
    end
  end

  assign rd_data     = mem[rp];
  assign rd_valid    = (count != 0);
  assign net_bwd.ack = ack_q;
  assign net_bwd.err = dst_err;
  assign connected   = net_fwd.clm;

  a_reserve_fits: assert property (@(posedge clk) RESERVE <= DEPTH);

endmodule

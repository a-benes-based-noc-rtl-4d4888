// mcenoc_switch: one switching element of the MCENoC, a 2^P x 2^P circuit
// switch configured in band.
//
// Function. An input port q is idle in WAIT. The node (or the previous stage)
// raises clm[q] and, on each cycle that act[q] is high, shifts one route bit
// in on dat[q], most significant bit first. With the P-th bit the port asks for
// output r = the P bits received. The request is granted if no input owns r and
// r is not holding err from the stage behind it, and no lower-numbered input
// asks for r in the same cycle (lowest q wins). A granted port goes to ACCEPT;
// a refused one goes to REJECT and drives err until clm drops. In ACCEPT the
// clm/act/dat of input q are copied to output r through one register (a buffer
// of depth one), so the remaining route bits and then the payload flow on to
// the next stage. The connection ends when clm[q] drops (the drop is
// forwarded, freeing the downstream stages too) or when err rises on output
// r: the port then goes to ABORT, drives err back, and zeroes output r from
// the next cycle on, until clm[q] drops. Raising act without clm is treated
// as a protocol error and also gives REJECT.
//
// Backward signals are registered per stage: err[q] is high in REJECT and
// ABORT; ack[q] (clear to send) is high in WAIT, follows ack of output r one
// cycle late in ACCEPT and is low in REJECT and ABORT (from the same edge that
// enters them).
//
// Timing. A route is granted at the clock edge that takes the P-th bit; from
// then on each signal crosses the switch in exactly one cycle. idle is high
// when every input is in WAIT and no clm is high (the condition under which
// the element may be clock gated).
//
// Follows the design: the four port states, the claim protocol, lowest-index
// priority, the depth-one buffer, err on conflict, and the ABORT sequence of
// the reject_on_err property. Own choices: synchronous active-high reset, the
// registered ack path, and an output still holding err from downstream being
// treated as busy.
module mcenoc_switch
  import mcenoc_pkg::*;
#(
  parameter int P  = 2,          // route bits per switch
  parameter int NP = 1 << P      // ports
) (
  input  logic clk,
  input  logic rst,
  input  fwd_t in_fwd  [NP],     // from the previous stage / source node
  output bwd_t in_bwd  [NP],
  output fwd_t out_fwd [NP],     // to the next stage / destination node
  input  bwd_t out_bwd [NP],
  output logic idle
);

  port_state_e     state [NP];
  port_state_e     state_d [NP];
  logic [P-1:0]    shreg [NP];   // route bits received so far
  logic [$clog2(P+1)-1:0] cnt [NP];
  logic [P-1:0]    dir [NP];     // output owned by this input
  logic [P-1:0]    tgt [NP];     // output requested this cycle
  logic            req [NP];
  logic            grant [NP];
  logic            busy [NP];
  logic            ack_q [NP];
  fwd_t            out_q [NP];

  // Requests: the P-th route bit arrives this cycle.
  always_comb begin
    for (int q = 0; q < NP; q++) begin
      tgt[q] = (shreg[q] << 1) | P'(in_fwd[q].dat);
      req[q] = (state[q] == WAIT) && in_fwd[q].clm && in_fwd[q].act &&
               (int'(cnt[q]) == P - 1);
    end
  end

  // An output is busy if an input holds it or it still reports an error.
  always_comb begin
    for (int r = 0; r < NP; r++) begin
      busy[r] = out_bwd[r].err;
      for (int q = 0; q < NP; q++)
        if ((state[q] == ACCEPT || state[q] == ABORT) && int'(dir[q]) == r)
          busy[r] = 1'b1;
    end
  end

  // Conflict resolution: free output, and no lower-numbered contender.
  always_comb begin
    for (int q = 0; q < NP; q++) begin
      grant[q] = req[q] && !busy[tgt[q]];
      for (int o = 0; o < q; o++)
        if (req[o] && tgt[o] == tgt[q]) grant[q] = 1'b0;
    end
  end

  // Port state machine.
  always_comb begin
    for (int q = 0; q < NP; q++) begin
      state_d[q] = state[q];
      unique case (state[q])
        WAIT:
          if (!in_fwd[q].clm && in_fwd[q].act) state_d[q] = REJECT;
          else if (req[q])                     state_d[q] = grant[q] ? ACCEPT : REJECT;
        ACCEPT:
          if (out_bwd[dir[q]].err)  state_d[q] = ABORT;
          else if (!in_fwd[q].clm)  state_d[q] = WAIT;
        REJECT, ABORT:
          if (!in_fwd[q].clm)       state_d[q] = WAIT;
        default:                    state_d[q] = WAIT;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    for (int q = 0; q < NP; q++) begin
      if (rst) begin
        state[q] <= WAIT;
        cnt[q]   <= '0;
        shreg[q] <= '0;
        dir[q]   <= '0;
        ack_q[q] <= 1'b0;
      end else begin
        state[q] <= state_d[q];
        // route bit collection
        if (state[q] == WAIT && in_fwd[q].clm && in_fwd[q].act && !req[q]) begin
          shreg[q] <= tgt[q];
          cnt[q]   <= cnt[q] + 1'b1;
        end else if (state[q] != WAIT || !in_fwd[q].clm || req[q]) begin
          shreg[q] <= '0;
          cnt[q]   <= '0;
        end
        if (req[q] && grant[q]) dir[q] <= tgt[q];
        // clear to send, one stage of delay
        unique case (state_d[q])
          WAIT:    ack_q[q] <= 1'b1;
          ACCEPT:  ack_q[q] <= out_bwd[(req[q] && grant[q]) ? tgt[q] : dir[q]].ack;
          default: ack_q[q] <= 1'b0;
        endcase
      end
    end
  end

  // Forward path: one register per output, fed by the accepting owner.
  always_ff @(posedge clk) begin
    for (int r = 0; r < NP; r++) begin
      fwd_t nxt;
      nxt = '0;
      for (int q = 0; q < NP; q++)
        if (state[q] == ACCEPT && int'(dir[q]) == r && !out_bwd[r].err)
          nxt = in_fwd[q];
      out_q[r] <= rst ? '0 : nxt;
    end
  end

  always_comb begin
    for (int q = 0; q < NP; q++) begin
      in_bwd[q].err = (state[q] == REJECT) || (state[q] == ABORT);
      in_bwd[q].ack = ack_q[q];
      out_fwd[q]    = out_q[q];
    end
  end

  always_comb begin
    idle = 1'b1;
    for (int q = 0; q < NP; q++)
      if (state[q] != WAIT || in_fwd[q].clm) idle = 1'b0;
  end

  // Design rules, checked in simulation.
  for (genvar q = 0; q < NP; q++) begin : g_props
    // C15 reject_on_err: an error from downstream aborts the connection and
    // releases the forward signals one cycle later.
    property reject_on_err;
      @(posedge clk) disable iff (rst)
        (state[q] == ACCEPT) && $rose(out_bwd[dir[q]].err)
        |=> (state[q] == ABORT) && in_bwd[q].err
            ##1 !(out_fwd[dir[q]].clm || out_fwd[dir[q]].act || out_fwd[dir[q]].dat);
    endproperty
    a_reject_on_err: assert property (reject_on_err);

    // C1 no_shared_direction: no two connected inputs own the same output.
    for (genvar o = q + 1; o < NP; o++) begin : g_pair
      a_no_shared_direction: assert property (@(posedge clk) disable iff (rst)
        !((state[q] == ACCEPT || state[q] == ABORT) &&
          (state[o] == ACCEPT || state[o] == ABORT) && dir[q] == dir[o]));
    end
  end

endmodule

// sched_fsm: digit computation scheduling FSM of ARCHITECT (paper Fig. 7).
//
// The FSM walks the (approximant k, digit step i) plane in groups of DELTA steps,
// the zig-zag of the paper's Fig. 4: after the last step of a group of
// approximant k it either descends to the group one to the left in approximant
// k+1 (i <- i - 2 DELTA + 1, k <- k + 1), or, once the deepest approximant has
// done its first group, snaps back to approximant 1 and continues there at the
// next group. With don't-change digit elision (ELISION = 1) the descent also
// stops, and control snaps back, when the next approximant's group would lie
// entirely among its stable digits: psi, the start step of approximant k+1, is
// then i - DELTA + 1 (the boxed conditions of Fig. 7; Fig. 6).
//
// i counts the input digits an approximant has consumed (step index j of the
// operators); the step's output digit is i - DELTA. Each step takes one
// "digit generation" cycle plus, for datapaths with multipliers or dividers,
// accumulation cycles counted down by gamma while the operators walk their
// residual chunks:
//   ALPHA = 0 (adders only)   1 cycle per step
//   ALPHA = 1 (multipliers)   1 + floor(i/U) cycles, as in Fig. 7
//   ALPHA = 2 (dividers)      2 + 2 floor(i/U) cycles (Fig. 7 has 1 + 2 floor(i/U);
//                             this design's divider needs one more, see ap_div)
//
// Departures from Fig. 7, both chosen to reproduce the schedules of Figs. 4 and 6:
//   * the snap-back action is i <- i + (k-1) DELTA + 1; the figure prints
//     i + k DELTA + 1, which would skip a group of approximant 1;
//   * accumulation is left with the (k, i) update of the digit-generation
//     self-loops, since returning with (k, i) unchanged would repeat the step.
//
// Interface: start begins a run at k = 1, i = 0. In every cycle with step high
// the datapath must begin step (k, i). ovf (combinational, from the address
// generator) reports that (k, i) falls beyond the RAM; the FSM then stops with
// exhausted set ("memory exhaustion"). stop ends the run on demand. done is high
// in the final state until the next start. The ev_* outputs are one-cycle event
// pulses for monitoring.
module sched_fsm #(
  parameter int unsigned DELTA   = 3,   // datapath online delay (Jacobi 3, Newton 4)
  parameter int unsigned U       = 8,   // RAM width in digits
  parameter int unsigned ALPHA   = 1,   // 0: adders only, 1: multiplier, 2: divider
  parameter bit          ELISION = 1'b1,
  parameter int unsigned KW      = 10,
  parameter int unsigned IW      = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic          stop,
  input  logic          ovf,
  input  logic [IW-1:0] psi,        // start step of approximant k+1
  output logic [KW-1:0] k,
  output logic [IW-1:0] i,
  output logic          step,
  output logic          running,
  output logic          done,
  output logic          exhausted,
  output logic          ev_acc,
  output logic          ev_desc,
  output logic          ev_snap,
  output logic          ev_elide
);
  typedef enum logic [1:0] {S_IDLE, S_GEN, S_ACC, S_DONE} state_t;
  state_t st_q;
  logic [IW:0]   gamma_q;
  logic [KW-1:0] k_n;
  logic [IW-1:0] i_n;
  logic          desc, snap, elide, need_acc;
  logic [IW:0]   gamma_load;

  localparam logic [IW-1:0] DL  = IW'(DELTA);
  localparam logic [IW-1:0] DM1 = IW'(DELTA - 1);

  // next (k, i) after the current step: the self-loops of "digit generation"
  always_comb begin
    k_n = k; i_n = i; desc = 1'b0; snap = 1'b0; elide = 1'b0;
    if ((i % DL) != DM1) begin
      i_n = i + 1'b1;
    end else if (i == DM1) begin
      snap = 1'b1;
    end else if (ELISION && (i - psi == DM1)) begin
      snap = 1'b1; elide = 1'b1;
    end else begin
      desc = 1'b1;
    end
    if (desc) begin
      k_n = k + 1'b1;
      i_n = i - IW'(2 * DELTA) + 1'b1;
    end
    if (snap) begin
      k_n = KW'(1);
      i_n = i + IW'((IW+KW)'(k - 1'b1) * (IW+KW)'(DELTA)) + 1'b1;
    end
    case (ALPHA)
      0:       need_acc = 1'b0;
      1:       need_acc = (i >= IW'(U));
      default: need_acc = 1'b1;
    endcase
    gamma_load = (ALPHA == 2) ? {i / IW'(U), 1'b0}
                              : (IW+1)'(i / IW'(U)) - 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q <= S_IDLE; k <= KW'(1); i <= '0; gamma_q <= '0; exhausted <= 1'b0;
    end else begin
      case (st_q)
        S_IDLE, S_DONE: if (start) begin
          st_q <= S_GEN; k <= KW'(1); i <= '0; exhausted <= 1'b0;
        end
        S_GEN: begin
          if (stop) st_q <= S_DONE;
          else if (ovf) begin st_q <= S_DONE; exhausted <= 1'b1; end
          else if (need_acc) begin st_q <= S_ACC; gamma_q <= gamma_load; end
          else begin k <= k_n; i <= i_n; end
        end
        S_ACC: begin
          if (gamma_q != '0) gamma_q <= gamma_q - 1'b1;
          else begin st_q <= S_GEN; k <= k_n; i <= i_n; end
        end
        default: st_q <= S_IDLE;
      endcase
    end
  end

  logic adv;
  always_comb begin
    step    = (st_q == S_GEN) && !stop && !ovf;
    running = (st_q == S_GEN) || (st_q == S_ACC);
    done    = (st_q == S_DONE);
    adv     = (step && !need_acc) || (st_q == S_ACC && gamma_q == '0);
    ev_acc  = step && need_acc;
    ev_desc = adv && desc;
    ev_snap = adv && snap;
    ev_elide = adv && elide;
  end
endmodule

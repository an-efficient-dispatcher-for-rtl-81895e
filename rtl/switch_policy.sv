// switch_policy: the module-conversion rule of the dispatcher.
//
// After every iteration the engine decides whether the next iteration runs
// in the low parallel unit (vertex-centric push over CSR) or in the high
// parallel unit (edge-centric pull over edge-blocks).
//
//  * Low -> high. Switch when a hub vertex (out-degree >= the hub threshold)
//    was active in this iteration, or when the active share of vertices
//    passes the tuning parameter alpha: Na / Ni > alpha, with Na the vertices
//    active in the next iteration and Ni the vertices not yet reached.
//    The iteration in progress always completes in the low unit; the switch
//    takes effect at the next iteration.
//  * High -> low. With Na_b the small and middle blocks still active after
//    the iteration, Nb the small and middle blocks processed in it, Fl the
//    large blocks that were accessed (updated a vertex) and Nl the large
//    blocks processed:
//        f2 = Na_b / Nb < beta      f3 = Fl / Nl > gamma
//    f2 and f3: switch now. f2 alone: stay one more iteration in the high
//    unit, then switch (deferred switch). An empty denominator counts as the
//    condition holding.
//
// The ratios are compared without division: a/b > t becomes
// a * 2^FRAC_BITS > t * b, with alpha, beta, gamma unsigned fixed point with
// FRAC_BITS fractional bits.
//
// Interface: init loads init_mode and clears the deferred flag; eval (one
// cycle, with the statistics valid) updates mode in the next cycle and pulses
// the event outputs that say which rule fired.
//
// From the reference design: the quantities, the thresholds alpha, beta,
// gamma, the hub rule and the two-condition rule with its one-iteration
// delay. The printed inequality signs of eq. (1) (Na/Ni < alpha) and eq. (2)
// (Na/Nb > beta) contradict the surrounding text, which switches to the high
// unit when many vertices become active and to the low unit when few do; this
// design follows the text. The fixed-point format is this design's choice.
module switch_policy
  import graph_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  init,
  input  mode_e init_mode,
  input  logic  eval,
  // thresholds
  input  logic [TUNE_W-1:0] alpha,
  input  logic [TUNE_W-1:0] beta,
  input  logic [TUNE_W-1:0] gamma,
  // low-module statistics
  input  logic  hub_seen,
  input  vid_t  na_v,
  input  vid_t  ni_v,
  // high-module statistics
  input  vid_t  na_b,
  input  vid_t  nb,
  input  vid_t  fl,
  input  vid_t  nl,
  // decision
  output mode_e mode,
  output logic  pending,
  output logic  ev_hub,        // low -> high because of a hub
  output logic  ev_alpha,      // low -> high because of eq. (1)
  output logic  ev_now,        // high -> low, eqs. (2) and (3)
  output logic  ev_defer,      // eq. (2) alone: switch deferred
  output logic  ev_deferred    // deferred switch carried out
);
  logic [63:0] lhs1, rhs1, lhs2, rhs2, lhs3, rhs3;
  logic f1, f2, f3;

  assign lhs1 = {32'd0, na_v} << FRAC_BITS;
  assign rhs1 = 64'(alpha) * 64'(ni_v);
  assign lhs2 = {32'd0, na_b} << FRAC_BITS;
  assign rhs2 = 64'(beta) * 64'(nb);
  assign lhs3 = {32'd0, fl} << FRAC_BITS;
  assign rhs3 = 64'(gamma) * 64'(nl);

  assign f1 = (ni_v == 0) ? (na_v != 0) : (lhs1 > rhs1);
  assign f2 = (nb == 0) || (lhs2 < rhs2);
  assign f3 = (nl == 0) || (lhs3 > rhs3);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mode        <= MODE_LOW;
      pending     <= 1'b0;
      ev_hub      <= 1'b0;
      ev_alpha    <= 1'b0;
      ev_now      <= 1'b0;
      ev_defer    <= 1'b0;
      ev_deferred <= 1'b0;
    end else begin
      ev_hub      <= 1'b0;
      ev_alpha    <= 1'b0;
      ev_now      <= 1'b0;
      ev_defer    <= 1'b0;
      ev_deferred <= 1'b0;
      if (init) begin
        mode    <= init_mode;
        pending <= 1'b0;
      end else if (eval) begin
        if (mode == MODE_LOW) begin
          if (hub_seen) begin
            mode   <= MODE_HIGH;
            ev_hub <= 1'b1;
          end else if (f1) begin
            mode     <= MODE_HIGH;
            ev_alpha <= 1'b1;
          end
        end else begin
          if (pending) begin
            mode        <= MODE_LOW;
            pending     <= 1'b0;
            ev_deferred <= 1'b1;
          end else if (f2 && f3) begin
            mode   <= MODE_LOW;
            ev_now <= 1'b1;
          end else if (f2) begin
            pending  <= 1'b1;
            ev_defer <= 1'b1;
          end
        end
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) pending |-> mode == MODE_HIGH);

endmodule

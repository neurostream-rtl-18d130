// nst_hwl -- NeuroStream hardware loops (HWL): three nested loop counters.
//
// Following the paper's figure of the HWL, loop 0 counts i from 0 to E0-1,
// loop 1 counts j to E1-1 and loop 2 counts k to E2-1; each counter adds 1,
// compares with its bound and either keeps the incremented value or returns
// to 0, the wrap of a loop enabling the next outer loop. Every step of the
// nest yields the AGU enables: en1_o (EN1) on every step, en2_o (EN2) when
// loop 0 wraps, en3_o (EN3) when loops 0 and 1 both wrap.
// Interface and timing: start_i (one cycle) clears i, j, k and arms the nest
// with E0*E1*E2 iterations (none if a bound is 0). While active_o is high,
// each cycle with step_i high consumes one iteration; last_o marks the final
// one, after which active_o falls. Bounds are sampled continuously and must
// be held stable while active. Counter width is this design's choice.
module nst_hwl #(
  parameter int unsigned CNT_W = 16
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic             start_i,
  input  logic             step_i,
  input  logic [CNT_W-1:0] e0_i,
  input  logic [CNT_W-1:0] e1_i,
  input  logic [CNT_W-1:0] e2_i,
  output logic             active_o,
  output logic             last_o,
  output logic             en1_o,
  output logic             en2_o,
  output logic             en3_o,
  output logic [CNT_W-1:0] i_o,
  output logic [CNT_W-1:0] j_o,
  output logic [CNT_W-1:0] k_o
);
  logic [CNT_W-1:0] i_q, j_q, k_q;
  logic             active_q;
  logic             wrap0, wrap1, wrap2, stp;

  always_comb begin
    stp   = active_q && step_i;
    wrap0 = !((i_q + 1'b1) < e0_i);
    wrap1 = !((j_q + 1'b1) < e1_i);
    wrap2 = !((k_q + 1'b1) < e2_i);
    en1_o = stp;
    en2_o = stp && wrap0;
    en3_o = stp && wrap0 && wrap1;
    last_o = active_q && wrap0 && wrap1 && wrap2;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      i_q <= '0; j_q <= '0; k_q <= '0;
      active_q <= 1'b0;
    end else if (start_i) begin
      i_q <= '0; j_q <= '0; k_q <= '0;
      active_q <= (e0_i != '0) && (e1_i != '0) && (e2_i != '0);
    end else if (stp) begin
      i_q <= wrap0 ? '0 : i_q + 1'b1;
      if (wrap0) j_q <= wrap1 ? '0 : j_q + 1'b1;
      if (wrap0 && wrap1) k_q <= wrap2 ? '0 : k_q + 1'b1;
      if (wrap0 && wrap1 && wrap2) active_q <= 1'b0;
    end
  end

  assign active_o = active_q;
  assign i_o = i_q;
  assign j_o = j_q;
  assign k_o = k_q;
endmodule

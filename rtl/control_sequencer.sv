// control_sequencer: steps the corner turner through its N permutations.
//
// A LOG_N-bit counter c holds the current permutation; the network connects
// source i to sink c xor i. Each cycle with `step` high advances c by one, so
// after N steps every source has been connected to every sink exactly once
// (one complete corner turn). `turn_done` pulses in the cycle of the step
// that wraps c from N-1 back to 0.
//
// The counter bits are fanned out to the toggler layers: toggle bit p of
// layer m is driven by the counter bit that layer m sees in address position
// p after the m*L perfect shuffles in front of it (ct_pkg::ctl_source). The
// one partial layer, when LOG_N is not a multiple of L, keeps its unused
// control bits at 0. With this fan-out the network realises p(c,i) = c xor i
// exactly, with no reversal of the control bits.
//
// Interface: synchronous active-low reset to c = 0. Outputs are registered
// (c, tog_ctl) except turn_done, which is combinational from step and c.
// Advancing on a `step` strobe and the reset value are this design's choices.
module control_sequencer #(
  parameter int unsigned LOG_N = ct_pkg::LOG_N_DEF,  // address bits
  parameter int unsigned L     = ct_pkg::L_DEF,      // bits per toggler layer
  parameter int unsigned NL    = ct_pkg::num_tog_layers(LOG_N, L)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             step,            // advance to the next permutation
  output logic [LOG_N-1:0] c,               // current permutation number
  output logic [L-1:0]     tog_ctl [NL],    // control word of each toggler layer
  output logic             turn_done        // this step completes a corner turn
);
  import ct_pkg::*;

  initial assert (NL == num_tog_layers(LOG_N, L))
    else $error("control_sequencer: NL must equal ceil(LOG_N/L)");

  always_ff @(posedge clk) begin
    if (!rst_n)    c <= '0;
    else if (step) c <= c + 1'b1;
  end

  assign turn_done = step && (c == {LOG_N{1'b1}});

  // Static fan-out of the counter to the toggler control inputs.
  for (genvar m = 0; m < NL; m++) begin : g_layer
    for (genvar p = 0; p < L; p++) begin : g_bit
      localparam int SRC = ctl_source(m, p, LOG_N, L);
      if (SRC >= 0) begin : g_used
        assign tog_ctl[m][p] = c[SRC];
      end else begin : g_idle
        assign tog_ctl[m][p] = 1'b0;
      end
    end
  end

endmodule

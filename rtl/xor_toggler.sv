// xor_toggler: a row of controlled xor togglers, the switching layer of the
// corner turner.
//
// Function: out[j] = in[j xor ctl] for every link j, where ctl is an L-bit
// control word; only the L least significant address bits are changed, so a
// row of 2**L-link togglers side by side forms a 2**LOG_N-link toggler layer
// and nothing crosses the boundary of a 2**L-link group.
//
// Inside, each 2**L-link toggler is L rows of 2x2 controlled swappers (the
// butterfly of the basic network): row s pairs links whose addresses differ
// in bit s and swaps each pair when ctl[s] is 1, passes it straight when 0.
// With LOG_N = L = 1 the module is a single controlled swapper.
//
// Timing: purely combinational, no storage; a new control word takes effect
// in the same cycle. The swapper structure follows the described design;
// the row-of-togglers packaging into one module is this design's choice.
module xor_toggler #(
  parameter int unsigned LOG_N = ct_pkg::LOG_N_DEF,  // address bits of the row
  parameter int unsigned L     = ct_pkg::L_DEF,      // bits toggled
  parameter int unsigned W     = ct_pkg::W_DEF       // entry width
) (
  input  logic [L-1:0] ctl,
  input  logic [W-1:0] din  [2**LOG_N],
  output logic [W-1:0] dout [2**LOG_N]
);
  localparam int unsigned N = 2**LOG_N;

  initial assert (L >= 1 && L <= LOG_N) else $error("xor_toggler: need 1 <= L <= LOG_N");

  // stage[s] is the data entering swapper row s; stage[L] leaves the row.
  logic [W-1:0] stage [L+1][N];

  always_comb begin
    stage[0] = din;
    for (int unsigned s = 0; s < L; s++) begin
      for (int unsigned j = 0; j < N; j++) begin
        // Each swapper drives both of its outputs; wire j takes its
        // partner's value when the row's control bit is set.
        stage[s+1][j] = ctl[s] ? stage[s][j ^ (32'd1 << s)] : stage[s][j];
      end
    end
    dout = stage[L];
  end

endmodule

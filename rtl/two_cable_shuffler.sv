// two_cable_shuffler: a row of two-cable perfect-shuffle boards, the
// board-level half of one perfect-shuffle layer.
//
// Each board takes two adjacent cables (2**(K+1) links, sharing all address
// bits above bit K) and perfect-shuffles the links among them: link t of the
// pair leaves on link 2t (t < 2**K) or 2t - 2**(K+1) + 1 (otherwise), i.e. the
// low K+1 address bits rotate one place left. 2**(LOG_N-K-1) boards sit side
// by side and no link crosses from one board to another.
//
// After cable_shuffle has rotated the upper LOG_N-K bits, this rotation of
// the lower K+1 bits completes a rotation of the whole address, a perfect
// shuffle of all 2**LOG_N links. Timing: wiring only, no storage.
module two_cable_shuffler #(
  parameter int unsigned LOG_N = ct_pkg::LOG_N_DEF,  // address bits of the row
  parameter int unsigned K     = ct_pkg::K_DEF,      // log2 links per cable
  parameter int unsigned W     = ct_pkg::W_DEF       // entry width
) (
  input  logic [W-1:0] din  [2**LOG_N],
  output logic [W-1:0] dout [2**LOG_N]
);
  import ct_pkg::*;
  localparam int unsigned N = 2**LOG_N;

  initial assert (K < LOG_N) else $error("two_cable_shuffler: need K < LOG_N");

  always_comb begin
    for (int unsigned j = 0; j < N; j++) begin
      dout[rotl_bits(j, K + 1)] = din[j];
    end
  end

endmodule

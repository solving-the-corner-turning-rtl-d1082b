// cable_shuffle: the cable-level half of one perfect-shuffle layer.
//
// The 2**LOG_N links are grouped into 2**(LOG_N-K) cables of 2**K links
// (cable q carries links q*2**K .. (q+1)*2**K-1). The cables themselves are
// laid out as a perfect shuffle: cable q goes to cable position 2q for the
// first half and 2q-C+1 for the second half (C cables), which rotates the
// upper LOG_N-K address bits one place left and leaves the lower K bits,
// the position inside a cable, untouched.
//
// Timing: pure wiring, no logic and no storage. The decomposition is the one
// described for building large shufflers out of multi-link cables.
module cable_shuffle #(
  parameter int unsigned LOG_N = ct_pkg::LOG_N_DEF,  // address bits
  parameter int unsigned K     = ct_pkg::K_DEF,      // log2 links per cable
  parameter int unsigned W     = ct_pkg::W_DEF       // entry width
) (
  input  logic [W-1:0] din  [2**LOG_N],
  output logic [W-1:0] dout [2**LOG_N]
);
  import ct_pkg::*;
  localparam int unsigned N = 2**LOG_N;
  localparam int unsigned LINKS_PER_CABLE = 2**K;

  initial assert (K < LOG_N) else $error("cable_shuffle: need K < LOG_N");

  always_comb begin
    for (int unsigned j = 0; j < N; j++) begin
      // cable number j >> K is shuffled, the link within the cable is kept
      dout[(rotl_bits(j >> K, LOG_N - K) << K) | (j % LINKS_PER_CABLE)] = din[j];
    end
  end

endmodule

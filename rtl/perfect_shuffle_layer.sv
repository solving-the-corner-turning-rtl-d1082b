// perfect_shuffle_layer: one perfect shuffle of all 2**LOG_N links, built
// from a cable-level shuffle followed by a row of two-cable boards.
//
// Wire j leaves on wire 2j (j < N/2) or 2j - N + 1 (otherwise): the address
// b[n-1]..b[0] becomes b[n-2]..b[0] b[n-1]. The cable shuffle first rotates
// the upper n-K bits, giving b[n-2]..b[K] b[n-1] b[K-1]..b[0]; the boards then
// rotate the lower K+1 bits, giving the full rotation.
//
// Timing: wiring only, no storage. Construction follows the described
// cable/board split.
module perfect_shuffle_layer #(
  parameter int unsigned LOG_N = ct_pkg::LOG_N_DEF,  // address bits
  parameter int unsigned K     = ct_pkg::K_DEF,      // log2 links per cable
  parameter int unsigned W     = ct_pkg::W_DEF       // entry width
) (
  input  logic [W-1:0] din  [2**LOG_N],
  output logic [W-1:0] dout [2**LOG_N]
);
  localparam int unsigned N = 2**LOG_N;

  logic [W-1:0] cabled [N];  // after the cable shuffle

  cable_shuffle #(.LOG_N(LOG_N), .K(K), .W(W)) u_cables (
    .din (din),
    .dout(cabled)
  );

  two_cable_shuffler #(.LOG_N(LOG_N), .K(K), .W(W)) u_boards (
    .din (cabled),
    .dout(dout)
  );

endmodule

// corner_turner: memoryless butterfly corner turner for an N-link
// interferometer correlator (N = 2**LOG_N).
//
// N source devices each hold one row of an N x N matrix (one antenna, all
// frequency channels); N sink devices each need one column (one channel, all
// antennas). In control step c the network connects source i to sink
// p(c,i) = c xor i. For fixed c this is a permutation, and over the N steps
// c = 0..N-1 each source meets each sink exactly once, so source i sends
// entry (i, i xor c) in step c and sink j receives the whole column j.
//
// Structure: NL = ceil(LOG_N/L) layers of L-bit xor togglers (rows of
// 2**L-link togglers, each made of L rows of 2x2 controlled swappers), each
// followed by L perfect-shuffle layers (the last one by LOG_N-(NL-1)*L, for
// LOG_N shuffles in total, a full rotation of the address). Each shuffle
// layer is a cable shuffle of 2**(LOG_N-K)-link cables plus a row of
// two-cable shuffle boards. A control_sequencer steps c and drives the
// togglers. With L = 1 the network is the plain swapper/shuffle network;
// with the defaults (2**20 links, K = 6, L = 8) it has three toggler layers,
// one using only half its control bits, and twenty shuffle layers.
//
// Timing: the data path has no storage; src_data in the cycle where the
// counter reads c appears on snk_data in the same cycle. c advances on the
// clock edge after `step`; one corner turn takes N steps. Sink j is fed by
// source c xor j, so c is all the receivers need for their bookkeeping. Registered control, combinational data path and the entry
// width W are this design's choices.
//
// OMIT_LAST_SHUFFLE = 1 leaves out the final perfect-shuffle layer, saving
// one layer of cables and boards. The network is then still a valid corner
// turner, only with its outputs permuted: output wire q carries the entry of
// source rotl(q) xor c, i.e. column rotl(q), where rotl rotates the LOG_N-bit
// address one place left. The default keeps all LOG_N shuffles.
module corner_turner #(
  parameter int unsigned LOG_N = ct_pkg::LOG_N_DEF,  // log2 number of links
  parameter int unsigned K     = ct_pkg::K_DEF,      // log2 links per cable
  parameter int unsigned L     = ct_pkg::L_DEF,      // bits per toggler layer
  parameter int unsigned W     = ct_pkg::W_DEF,      // bits per matrix entry
  parameter bit          OMIT_LAST_SHUFFLE = 1'b0       // drop the final shuffle layer
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             step,                 // advance to next permutation
  input  logic [W-1:0]     src_data [2**LOG_N],  // entry sent by each source
  output logic [W-1:0]     snk_data [2**LOG_N],  // entry received by each sink
  output logic [LOG_N-1:0] c,                    // current permutation
  output logic             turn_done             // last step of a corner turn
);
  import ct_pkg::*;
  localparam int unsigned N  = 2**LOG_N;
  localparam int unsigned NL = num_tog_layers(LOG_N, L);

  logic [L-1:0] tog_ctl [NL];

  control_sequencer #(.LOG_N(LOG_N), .L(L), .NL(NL)) u_ctl (
    .clk      (clk),
    .rst_n    (rst_n),
    .step     (step),
    .c        (c),
    .tog_ctl  (tog_ctl),
    .turn_done(turn_done)
  );

  // Each generate block holds its own stage signal; stage m reads the
  // output of stage m-1, so every wire has exactly one driver.
  for (genvar m = 0; m < NL; m++) begin : g_layer
    localparam int unsigned NS = shuffles_after(m, LOG_N, L)
                                 - ((OMIT_LAST_SHUFFLE && m == NL - 1) ? 1 : 0);
    logic [W-1:0] lay_in  [N];  // data entering toggler layer m
    logic [W-1:0] tog_out [N];  // data leaving toggler layer m
    logic [W-1:0] lay_out [N];  // data after the shuffles that follow it

    if (m == 0) begin : g_first
      assign lay_in = src_data;
    end else begin : g_next
      assign lay_in = g_layer[m-1].lay_out;
    end

    xor_toggler #(.LOG_N(LOG_N), .L(L), .W(W)) u_tog (
      .ctl (tog_ctl[m]),
      .din (lay_in),
      .dout(tog_out)
    );

    for (genvar s = 0; s < NS; s++) begin : g_shuffle
      logic [W-1:0] sh_in  [N];
      logic [W-1:0] sh_out [N];
      if (s == 0) begin : g_first
        assign sh_in = tog_out;
      end else begin : g_next
        assign sh_in = g_shuffle[s-1].sh_out;
      end
      perfect_shuffle_layer #(.LOG_N(LOG_N), .K(K), .W(W)) u_shuf (
        .din (sh_in),
        .dout(sh_out)
      );
    end

    if (NS == 0) begin : g_no_shuffle
      assign lay_out = tog_out;
    end else begin : g_shuffled
      assign lay_out = g_shuffle[NS-1].sh_out;
    end
  end

  assign snk_data = g_layer[NL-1].lay_out;

endmodule

// tb_perfect_shuffle_layer: checks that cable shuffle plus boards form the
// perfect shuffle j -> 2j (j < N/2), 2j-N+1 (otherwise) of all links, for
// 8 links in 2-link cables, 16 links in 4-link cables and 1024 links in
// 64-link cables, and that LOG_N successive shuffles restore every link.
module tb_perfect_shuffle_layer;
  localparam int W = 16;
  logic [W-1:0] a_in [8],    a_out [8];
  logic [W-1:0] b_in [16],   b_out [16];
  logic [W-1:0] c_in [1024], c_out [1024];
  int checks = 0, failures = 0;

  perfect_shuffle_layer #(.LOG_N(3),  .K(1), .W(W)) dut_a (.din(a_in), .dout(a_out));
  perfect_shuffle_layer #(.LOG_N(4),  .K(2), .W(W)) dut_b (.din(b_in), .dout(b_out));
  perfect_shuffle_layer #(.LOG_N(10), .K(6), .W(W)) dut_c (.din(c_in), .dout(c_out));

  function automatic int faro(int j, int n);
    return (j < n / 2) ? 2 * j : 2 * j - n + 1;
  endfunction

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int j = 0; j < 8; j++)    a_in[j] = W'(j);
    for (int j = 0; j < 16; j++)   b_in[j] = W'(j);
    for (int j = 0; j < 1024; j++) c_in[j] = W'(j);
    #1;
    for (int j = 0; j < 8; j++) begin
      checks++; if (a_out[faro(j, 8)] != W'(j)) begin failures++; if (failures < 20) $display("N=8 link %0d", j); end
    end
    for (int j = 0; j < 16; j++) begin
      checks++; if (b_out[faro(j, 16)] != W'(j)) begin failures++; if (failures < 20) $display("N=16 link %0d", j); end
    end
    for (int j = 0; j < 1024; j++) begin
      checks++;
      if (c_out[faro(j, 1024)] != W'(j)) begin
        failures++; if (failures < 10) $display("N=1024 link %0d", j);
      end
    end
    // feed the 16-link layer its own output: after 4 passes all links return
    for (int pass = 0; pass < 4; pass++) begin
      b_in = b_out;
      #1;
    end
    // b_in now holds 4 shuffles of the identity, b_out 5 shuffles
    for (int j = 0; j < 16; j++) begin
      checks++; if (b_in[j] != W'(j)) begin failures++; if (failures < 20) $display("4 shuffles do not restore link %0d", j); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

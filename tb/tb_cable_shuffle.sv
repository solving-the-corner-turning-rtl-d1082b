// tb_cable_shuffle: checks the cable-level shuffle for 16 links in 4 cables
// of 4 (the drawn 16-link example: cable 01 lands in cable position 10) and
// for 1024 links in cables of 64. The reference applies the Faro rule
// q -> 2q / 2q-C+1 to the cable number q and keeps the link position.
module tb_cable_shuffle;
  localparam int W = 16;
  logic [W-1:0] a_in [16],   a_out [16];
  logic [W-1:0] b_in [1024], b_out [1024];
  int checks = 0, failures = 0;

  cable_shuffle #(.LOG_N(4),  .K(2), .W(W)) dut_a (.din(a_in), .dout(a_out));
  cable_shuffle #(.LOG_N(10), .K(6), .W(W)) dut_b (.din(b_in), .dout(b_out));

  function automatic int faro(int q, int c);
    return (q < c / 2) ? 2 * q : 2 * q - c + 1;
  endfunction

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int j = 0; j < 16; j++)   a_in[j] = W'(j);
    for (int j = 0; j < 1024; j++) b_in[j] = W'(j);
    #1;
    for (int j = 0; j < 16; j++) begin
      automatic int dest = faro(j / 4, 4) * 4 + j % 4;
      checks++;
      if (a_out[dest] != W'(j)) begin failures++; if (failures < 20) $display("16-link: link %0d not at %0d", j, dest); end
    end
    // the drawn example: input 0100 arrives at position 1000, 1000 at 0100
    checks++;
    if (a_out[8] != 16'd4 || a_out[4] != 16'd8) begin failures++; if (failures < 20) $display("cable 01/10 swap wrong"); end
    for (int j = 0; j < 1024; j++) begin
      automatic int dest = faro(j / 64, 16) * 64 + j % 64;
      checks++;
      if (b_out[dest] != W'(j)) begin
        failures++; if (failures < 10) $display("1024-link: link %0d not at %0d", j, dest);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

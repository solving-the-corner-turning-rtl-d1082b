// tb_two_cable_shuffler: checks a row of two-cable boards for 16 links with
// 4-link cables (two 8-link boards) and 1024 links with 64-link cables
// (eight 128-link boards). The reference applies the Faro rule within each
// board and requires every entry to stay on its own board.
module tb_two_cable_shuffler;
  localparam int W = 16;
  logic [W-1:0] a_in [16],   a_out [16];
  logic [W-1:0] b_in [1024], b_out [1024];
  int checks = 0, failures = 0;

  two_cable_shuffler #(.LOG_N(4),  .K(2), .W(W)) dut_a (.din(a_in), .dout(a_out));
  two_cable_shuffler #(.LOG_N(10), .K(6), .W(W)) dut_b (.din(b_in), .dout(b_out));

  function automatic int faro(int t, int n);
    return (t < n / 2) ? 2 * t : 2 * t - n + 1;
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
      automatic int dest = (j / 8) * 8 + faro(j % 8, 8);
      checks++;
      if (a_out[dest] != W'(j)) begin failures++; if (failures < 20) $display("16-link: link %0d not at %0d", j, dest); end
    end
    for (int j = 0; j < 1024; j++) begin
      automatic int dest = (j / 128) * 128 + faro(j % 128, 128);
      checks++;
      if (b_out[dest] != W'(j)) begin
        failures++; if (failures < 10) $display("1024-link: link %0d not at %0d", j, dest);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_controlled_swapper: checks the 2x2 controlled swapper (a 2-link, 1-bit
// xor_toggler). Control 0 must pass both links straight through, control 1
// must exchange them; checked for random entries in both settings.
module tb_controlled_swapper;
  localparam int W = 8;
  logic         ctl;
  logic [W-1:0] din [2];
  logic [W-1:0] dout [2];
  int checks = 0, failures = 0;

  xor_toggler #(.LOG_N(1), .L(1), .W(W)) dut (.ctl(ctl), .din(din), .dout(dout));

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 200; t++) begin
      ctl = t[0];
      din[0] = W'($urandom); din[1] = W'($urandom);
      #1;
      checks++;
      if (ctl == 1'b0 && !(dout[0] == din[0] && dout[1] == din[1])) begin
        failures++; if (failures < 20) $display("straight failed: %h %h -> %h %h", din[0], din[1], dout[0], dout[1]);
      end
      if (ctl == 1'b1 && !(dout[0] == din[1] && dout[1] == din[0])) begin
        failures++; if (failures < 20) $display("swap failed: %h %h -> %h %h", din[0], din[1], dout[0], dout[1]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

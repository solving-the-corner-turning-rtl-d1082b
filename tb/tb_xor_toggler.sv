// tb_xor_toggler: checks a row of 8-bit togglers (256-link boards, as in the
// 2**20-link example) over 1024 links, plus a 3-bit toggler over 32 links.
// For random control words and distinct entries every output link must
// carry the input of link (j xor ctl), and no entry may leave its 2**L group.
module tb_xor_toggler;
  localparam int W = 16;
  localparam int N1 = 1024, L1 = 8;
  localparam int N2 = 32,   L2 = 3;
  logic [L1-1:0] ctl1;
  logic [L2-1:0] ctl2;
  logic [W-1:0] din1 [N1], dout1 [N1];
  logic [W-1:0] din2 [N2], dout2 [N2];
  int checks = 0, failures = 0;

  xor_toggler #(.LOG_N(10), .L(L1), .W(W)) dut1 (.ctl(ctl1), .din(din1), .dout(dout1));
  xor_toggler #(.LOG_N(5),  .L(L2), .W(W)) dut2 (.ctl(ctl2), .din(din2), .dout(dout2));

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // input link j carries its own index, so an output names its source
    for (int j = 0; j < N1; j++) din1[j] = W'(j);
    for (int j = 0; j < N2; j++) din2[j] = W'(j);
    for (int t = 0; t < 40; t++) begin
      ctl1 = (t < 2) ? L1'(t * 255) : L1'($urandom);
      ctl2 = L2'(t);
      #1;
      for (int j = 0; j < N1; j++) begin
        checks++;
        if (dout1[j] != W'(j ^ int'(ctl1)) || (int'(dout1[j]) >> L1) != (j >> L1)) begin
          failures++;
          if (failures < 10) $display("L=8 ctl=%h link %0d got %0d", ctl1, j, dout1[j]);
        end
      end
      for (int j = 0; j < N2; j++) begin
        checks++;
        if (dout2[j] != W'(j ^ int'(ctl2))) begin
          failures++;
          if (failures < 10) $display("L=3 ctl=%h link %0d got %0d", ctl2, j, dout2[j]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

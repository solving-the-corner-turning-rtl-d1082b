// tb_control_sequencer: checks the permutation counter and its fan-out to
// the toggler layers for 32 links with 2-bit togglers (three layers, the
// last one partial) and for the 2**20-link default with 8-bit togglers.
// The reference follows each original address bit through the shuffles
// (m*L rotations before layer m) and accumulates the bits each layer
// toggles; the total must equal c, and idle inputs must stay 0. Also
// checks reset, hold while step is low, one step per clock and turn_done
// exactly on the N-th step.
module tb_control_sequencer;
  localparam int LN = 5, L = 2, NL = 3;
  localparam int N = 2**LN;
  logic clk = 0, rst_n = 0, step = 0;
  logic [LN-1:0] c;
  logic [L-1:0] tog_ctl [NL];
  logic turn_done;
  // default-size instance: only its fan-out is checked
  logic [19:0] c_big;
  logic [7:0]  tog_big [3];
  logic        done_big;
  int checks = 0, failures = 0;

  control_sequencer #(.LOG_N(LN), .L(L), .NL(NL)) dut (
    .clk(clk), .rst_n(rst_n), .step(step), .c(c), .tog_ctl(tog_ctl), .turn_done(turn_done));
  control_sequencer dut_big (
    .clk(clk), .rst_n(rst_n), .step(step), .c(c_big), .tog_ctl(tog_big), .turn_done(done_big));

  always #5 clk = ~clk;

  initial begin : watchdog
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Net xor mask applied to the original address by the toggler layers.
  function automatic int unsigned net_mask_small();
    int unsigned mask = 0;
    for (int m = 0; m < NL; m++)
      for (int p = 0; p < L; p++) begin
        automatic int b = ((p - m * L) % LN + LN) % LN;
        if (tog_ctl[m][p]) mask ^= (1 << b);
      end
    return mask;
  endfunction

  function automatic int unsigned net_mask_big();
    int unsigned mask = 0;
    for (int m = 0; m < 3; m++)
      for (int p = 0; p < 8; p++) begin
        automatic int b = ((p - m * 8) % 20 + 20) % 20;
        if (tog_big[m][p]) mask ^= (1 << b);
      end
    return mask;
  endfunction

  int dones;
  initial begin
    repeat (2) @(posedge clk); #1;
    rst_n = 1;
    @(posedge clk); #1;
    checks++; if (c != 0) begin failures++; if (failures < 20) $display("reset value %0d", c); end
    // hold: step low for 3 cycles
    repeat (3) @(posedge clk); #1;
    #1; checks++; if (c != 0) begin failures++; if (failures < 20) $display("counter moved without step"); end
    // one full turn plus a few steps, step every cycle
    dones = 0;
    for (int k = 0; k < N + 4; k++) begin
      #1;
      checks++;
      if (c != LN'(k)) begin failures++; if (failures < 20) $display("step %0d: c=%0d", k, c); end
      checks++;
      if (net_mask_small() != (int'(c) & (N - 1))) begin
        failures++; if (failures < 20) $display("c=%0d mask=%0h", c, net_mask_small());
      end
      // partial last layer: bit 0 would re-toggle an original bit, must be idle
      checks++;
      if (tog_ctl[2][0] != 1'b0) begin failures++; if (failures < 20) $display("idle control bit driven"); end
      step = 1;
      #1;
      checks++;
      if (turn_done != (k % N == N - 1)) begin failures++; if (failures < 20) $display("turn_done wrong at step %0d", k); end
      if (turn_done) dones++;
      @(posedge clk); #1;
      step = 0;
    end
    checks++; if (dones != 1) begin failures++; if (failures < 20) $display("turn_done seen %0d times", dones); end
    // default size: drive many counter values through the fan-out
    rst_n = 0; @(posedge clk); #1; rst_n = 1;
    for (int k = 0; k < 300; k++) begin
      #1;
      checks++;
      if (net_mask_big() != int'(c_big)) begin
        failures++; if (failures < 20) $display("2^20 c=%h mask=%h", c_big, net_mask_big());
      end
      checks++;
      if (tog_big[2][3:0] != 4'h0) begin failures++; if (failures < 20) $display("2^20 idle bits driven"); end
      step = 1; @(posedge clk); #1; step = 0;
      // jump ahead with a burst so high counter bits get exercised
      if (k % 10 == 9) begin step = 1; repeat (int'($urandom_range(1, 30000))) @(posedge clk);
        #1; step = 0; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

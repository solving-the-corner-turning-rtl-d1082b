// tb_corner_turner_default: the corner turner at its default size, 2**20
// links in 64-link cables with 8-bit togglers (three toggler layers, the
// third using half its control bits, and twenty perfect-shuffle layers).
// A whole corner turn is 2**20 steps of 2**20 entries, far too long to
// simulate, so this bench runs the first 272 steps (c = 0..271, which
// reaches the partial third layer from c = 256 on) at one step per clock.
// In each step every source i sends a hash of (i, i xor c) and every sink j
// must receive the hash of (c xor j, j).
module tb_corner_turner_default;
  localparam int LN = 20;
  localparam int N  = 2**LN;
  localparam int W  = 8;
  localparam int STEPS = 272;
  logic clk = 0, rst_n = 0, step = 0;
  logic [W-1:0]  src [N], snk [N];
  logic [LN-1:0] c;
  logic          done;
  int checks = 0, failures = 0;

  corner_turner dut (.clk(clk), .rst_n(rst_n), .step(step), .src_data(src), .snk_data(snk),
                     .c(c), .turn_done(done));

  always #5 clk = ~clk;

  function automatic logic [W-1:0] entry(int i, int j);
    return W'((i * 151) ^ (j * 57) ^ (i >> 9) ^ (j >> 13));
  endfunction

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;
    step = 1;
    for (int k = 0; k < STEPS; k++) begin
      automatic int bad = 0;
      for (int i = 0; i < N; i++) src[i] = entry(i, i ^ int'(c));
      #1;
      for (int j = 0; j < N; j++) if (snk[j] != entry(j ^ int'(c), j)) bad++;
      checks++;
      if (bad != 0 || c != LN'(k) || done) begin
        failures++;
        if (failures < 10) $display("step %0d c=%0d: %0d wrong sinks", k, c, bad);
      end
      @(posedge clk); #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

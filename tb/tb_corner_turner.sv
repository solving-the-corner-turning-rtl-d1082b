// tb_corner_turner: end-to-end corner turns through three small networks.
//   A: 8 links, 1-bit togglers (controlled swappers), 2-link cables - the
//      plain swapper/perfect-shuffle network.
//   B: 32 links, 4-link cables, 2-bit togglers - three toggler layers, the
//      last using half its control bits (the same shape as 2**20 links with
//      8-bit togglers).
//   C: 1024 links, 64-link cables, 8-bit togglers - two full toggler layers.
//   D: 16 links, 1-bit togglers, with the final shuffle layer left out; its
//      output wire q must carry column rotl(q).
// Each source i holds row i of a matrix whose entries are a hash of (i,j);
// in step c it sends entry (i, i xor c). Each sink j checks it receives
// entry (c xor j, j) and records which source it heard from. After N steps
// every sink must hold its whole column, each entry once (one corner turn in
// exactly N clock cycles). Stalls (step low), turn_done and wrap-around into
// a second turn are exercised and counted.
module tb_corner_turner;
  localparam int W = 16;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  function automatic logic [W-1:0] entry(int i, int j);
    return W'((i * 40503 + j * 9973 + 17) ^ (i << 3));
  endfunction

  initial begin : watchdog
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- network instances -------------------------------------------------
  localparam int LA = 3,  NA = 8;
  localparam int LB = 5,  NB = 32;
  localparam int LC = 10, NC = 1024;
  logic step_a, step_b, step_c;
  logic [W-1:0] src_a [NA], snk_a [NA];
  logic [W-1:0] src_b [NB], snk_b [NB];
  logic [W-1:0] src_c [NC], snk_c [NC];
  localparam int LD = 4,  ND = 16;
  logic step_d;
  logic [W-1:0] src_d [ND], snk_d [ND];
  logic [LD-1:0] cd;
  logic done_d;
  logic [LA-1:0] ca; logic [LB-1:0] cb; logic [LC-1:0] cc;
  logic done_a, done_b, done_c;

  corner_turner #(.LOG_N(LA), .K(1), .L(1), .W(W)) dut_a (
    .clk(clk), .rst_n(rst_n), .step(step_a), .src_data(src_a), .snk_data(snk_a), .c(ca), .turn_done(done_a));
  corner_turner #(.LOG_N(LB), .K(2), .L(2), .W(W)) dut_b (
    .clk(clk), .rst_n(rst_n), .step(step_b), .src_data(src_b), .snk_data(snk_b), .c(cb), .turn_done(done_b));
  corner_turner #(.LOG_N(LC), .K(6), .L(8), .W(W)) dut_c (
    .clk(clk), .rst_n(rst_n), .step(step_c), .src_data(src_c), .snk_data(snk_c), .c(cc), .turn_done(done_c));

  // D: 16 links, 1-bit togglers, final shuffle layer left out
  corner_turner #(.LOG_N(LD), .K(2), .L(1), .W(W), .OMIT_LAST_SHUFFLE(1'b1)) dut_d (
    .clk(clk), .rst_n(rst_n), .step(step_d), .src_data(src_d), .snk_data(snk_d), .c(cd), .turn_done(done_d));

  // ---- mechanism counters ------------------------------------------------
  int n_turns = 0, n_stalls = 0, n_wraps = 0, n_partial_layer_steps = 0, n_omit_steps = 0;
  int hits_d [ND][ND];

  // Source model: row i, entry for sink (i xor c). Sink model: check column.
  // hits[j][i] counts how often sink j received from source i in one turn.
  int hits_a [NA][NA];
  int hits_b [NB][NB];
  bit got_c  [NC][NC];

  initial begin
    int cycles, dones;
    step_a = 0; step_b = 0; step_c = 0; step_d = 0;
    repeat (2) @(posedge clk); #1;
    rst_n = 1;
    @(posedge clk); #1;

    // ---------------- A: 8 links, two turns with stalls ----------------
    foreach (hits_a[j, i]) hits_a[j][i] = 0;
    cycles = 0; dones = 0;
    for (int k = 0; k < 2 * NA; k++) begin
      // stall for one cycle every third step: c must hold
      if (k % 3 == 2) begin
        logic [LA-1:0] held;
        held = ca; step_a = 0; @(posedge clk); #1;
        n_stalls++; checks++;
        if (ca != held) begin failures++; if (failures < 20) $display("A: c moved during stall"); end
      end
      #1;
      for (int i = 0; i < NA; i++) src_a[i] = entry(i, i ^ int'(ca));
      step_a = 1;
      #1;
      for (int j = 0; j < NA; j++) begin
        automatic int i = j ^ int'(ca);
        checks++;
        if (snk_a[j] != entry(i, j)) begin failures++; if (failures < 20) $display("A: c=%0d sink %0d got %h", ca, j, snk_a[j]); end
        else hits_a[j][i]++;
      end
      if (done_a) begin dones++; n_turns++; end
      if (k > 0 && ca == 0) n_wraps++;
      @(posedge clk); #1;
      cycles++;
      step_a = 0;
    end
    foreach (hits_a[j, i]) begin
      checks++;
      if (hits_a[j][i] != 2) begin failures++; if (failures < 20) $display("A: sink %0d heard source %0d %0d times", j, i, hits_a[j][i]); end
    end
    checks++; if (dones != 2) begin failures++; if (failures < 20) $display("A: %0d turn_done pulses", dones); end

    // ---------------- B: 32 links, one turn at full rate ----------------
    foreach (hits_b[j, i]) hits_b[j][i] = 0;
    dones = 0; cycles = 0;
    #1;
    for (int i = 0; i < NB; i++) src_b[i] = entry(i, i ^ int'(cb));
    step_b = 1;
    while (1) begin
      #1;
      for (int j = 0; j < NB; j++) begin
        automatic int i = j ^ int'(cb);
        checks++;
        if (snk_b[j] != entry(i, j)) begin failures++; if (failures < 20) $display("B: c=%0d sink %0d got %h", cb, j, snk_b[j]); end
        else hits_b[j][i]++;
      end
      // steps with c >= 16 use the partial layer's live control bit
      if (cb[4]) n_partial_layer_steps++;
      if (done_b) begin dones++; n_turns++; end
      @(posedge clk); #1;
      cycles++;
      if (dones == 1 || cycles > 2 * NB) break;
      #1;
      for (int i = 0; i < NB; i++) src_b[i] = entry(i, i ^ int'(cb));
    end
    step_b = 0;
    checks++; if (cycles != NB) begin failures++; if (failures < 20) $display("B: turn took %0d cycles, expected %0d", cycles, NB); end
    checks++; if (cb != 0) begin failures++; if (failures < 20) $display("B: c=%0d after a turn", cb); end
    else n_wraps++;
    foreach (hits_b[j, i]) begin
      checks++;
      if (hits_b[j][i] != 1) begin failures++; if (failures < 20) $display("B: sink %0d heard source %0d %0d times", j, i, hits_b[j][i]); end
    end

    // ---------------- C: 1024 links, one full turn ----------------------
    foreach (got_c[j, i]) got_c[j][i] = 0;
    dones = 0; cycles = 0;
    step_c = 1;
    for (int k = 0; k < NC; k++) begin
      automatic int bad = 0;
      #1;
      for (int i = 0; i < NC; i++) src_c[i] = entry(i, i ^ int'(cc));
      #1;
      for (int j = 0; j < NC; j++) begin
        automatic int i = j ^ int'(cc);
        if (snk_c[j] != entry(i, j) || got_c[j][i]) bad++;
        got_c[j][i] = 1;
      end
      checks++;
      if (bad != 0) begin failures++; if (failures < 10) $display("C: c=%0d %0d bad sinks", cc, bad); end
      if (done_c) begin dones++; n_turns++; end
      @(posedge clk); #1;
      cycles++;
    end
    step_c = 0;
    #1;
    checks++; if (dones != 1 || cc != 0) begin failures++; if (failures < 20) $display("C: dones=%0d c=%0d", dones, cc); end
    else n_wraps++;
    begin
      automatic int missing = 0;
      foreach (got_c[j, i]) if (!got_c[j][i]) missing++;
      checks++; if (missing != 0) begin failures++; if (failures < 20) $display("C: %0d entries never delivered", missing); end
    end

    // ---------------- D: 16 links, last shuffle omitted ----------------
    // Output wire q carries column rotl(q) from source rotl(q) xor c.
    foreach (hits_d[q, i]) hits_d[q][i] = 0;
    dones = 0;
    step_d = 1;
    for (int k = 0; k < ND; k++) begin
      #1;
      for (int i = 0; i < ND; i++) src_d[i] = entry(i, i ^ int'(cd));
      #1;
      for (int q = 0; q < ND; q++) begin
        automatic int col = ((q << 1) | (q >> (LD - 1))) & (ND - 1);
        automatic int i = col ^ int'(cd);
        checks++;
        if (snk_d[q] != entry(i, col)) begin
          failures++; if (failures < 20) $display("D: c=%0d wire %0d got %h", cd, q, snk_d[q]);
        end else hits_d[q][i]++;
      end
      n_omit_steps++;
      if (done_d) begin dones++; n_turns++; end
      @(posedge clk); #1;
    end
    step_d = 0;
    foreach (hits_d[q, i]) begin
      checks++;
      if (hits_d[q][i] != 1) begin failures++; if (failures < 20) $display("D: wire %0d heard source %0d %0d times", q, i, hits_d[q][i]); end
    end
    checks++; if (dones != 1) begin failures++; if (failures < 20) $display("D: %0d turn_done pulses", dones); end

    // ---------------- every mechanism must have happened ---------------
    $display("mechanisms: turns=%0d stalls=%0d wraps=%0d partial_layer_steps=%0d omitted_shuffle_steps=%0d",
             n_turns, n_stalls, n_wraps, n_partial_layer_steps, n_omit_steps);
    checks++; if (n_omit_steps == 0) begin failures++; $display("omitted-shuffle network never run"); end
    checks++; if (n_turns < 5)   begin failures++; if (failures < 20) $display("too few corner turns"); end
    checks++; if (n_stalls == 0) begin failures++; if (failures < 20) $display("no stall exercised"); end
    checks++; if (n_wraps < 3)   begin failures++; if (failures < 20) $display("wrap-around not exercised"); end
    checks++; if (n_partial_layer_steps == 0) begin failures++; if (failures < 20) $display("partial layer never active"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

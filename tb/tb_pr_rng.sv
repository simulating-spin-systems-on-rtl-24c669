// tb_pr_rng: checks the Parisi-Rapuano wheel against a word-by-word software
// recurrence. Two instances: the full generator (taps 24/55/61, 62 words,
// 96 numbers per clock) and the reduced example wheel of 20 words with
// I(k) = I(k-10) + I(k-14), R(k) = I(k) ^ I(k-20) and 10 numbers per clock.
// Both wheels are seeded with random words; every output of every step is
// compared, and a step with en low must leave the outputs unchanged.
module tb_pr_rng;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  // full-size generator
  logic en, we;
  logic [5:0] idx;
  logic [31:0] sd;
  logic [95:0][31:0] rnd;
  pr_rng dut (.clk, .en, .seed_we(we), .seed_idx(idx), .seed_data(sd), .rnd);

  // reduced example
  logic en2, we2;
  logic [4:0] idx2;
  logic [31:0] sd2;
  logic [9:0][31:0] rnd2;
  pr_rng #(.RPW(10), .LEN(20), .TA(10), .TB(14), .TC(20)) dut2
    (.clk, .en(en2), .seed_we(we2), .seed_idx(idx2), .seed_data(sd2), .rnd(rnd2));

  logic [31:0] h1[$], h2[$];   // generated history, oldest first

  function automatic logic [31:0] next(ref logic [31:0] h[$], input int ta, tb, tc);
    logic [31:0] i_new, r;
    int n = h.size();
    i_new = h[n-ta] + h[n-tb];
    r = i_new ^ h[n-tc];
    h.push_back(i_new);
    return r;
  endfunction

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    en = 0; we = 0; idx = 0; sd = 0; en2 = 0; we2 = 0; idx2 = 0; sd2 = 0;
    @(negedge clk);
    for (int i = 0; i < 62; i++) begin
      we = 1; idx = 6'(i); sd = $urandom; h1.push_back(sd);
      if (i < 20) begin we2 = 1; idx2 = 5'(i); sd2 = $urandom; h2.push_back(sd2); end
      else we2 = 0;
      @(negedge clk);
    end
    we = 0; we2 = 0;
    for (int step = 0; step < 30; step++) begin
      logic [31:0] exp1[96], exp2[10];
      en = (step % 5 != 3); en2 = en;
      for (int n = 0; n < 96; n++) exp1[n] = next(h1, 24, 55, 61);
      for (int n = 0; n < 10; n++) exp2[n] = next(h2, 10, 14, 20);
      #1;
      for (int n = 0; n < 96; n++) begin
        checks++;
        if (rnd[n] !== exp1[n]) begin
          failures++;
          if (failures < 5) $display("step %0d out %0d: got %h exp %h", step, n, rnd[n], exp1[n]);
        end
      end
      for (int n = 0; n < 10; n++) begin
        checks++;
        if (rnd2[n] !== exp2[n]) failures++;
      end
      @(negedge clk);
      if (!en) begin
        // wheel must not have moved: rewind the model
        repeat (96) void'(h1.pop_back());
        repeat (10) void'(h2.pop_back());
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

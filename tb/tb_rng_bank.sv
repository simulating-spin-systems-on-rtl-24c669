// tb_rng_bank: checks that the bank gives cell c output c % RPW of wheel
// c / RPW and that every wheel is seeded separately. 40 outputs from wheels of
// 16 numbers (3 wheels, the last one half used); each wheel is modelled by the
// software recurrence I(k) = I(k-24) + I(k-55), R(k) = I(k) ^ I(k-61).
module tb_rng_bank;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int NOUT = 40, RPW = 16, NW = 3;
  logic en, we;
  logic [7:0] wh;
  logic [5:0] idx;
  logic [31:0] sd;
  logic [NOUT-1:0][31:0] rnd;
  rng_bank #(.NOUT(NOUT), .RPW(RPW)) dut (.clk, .en, .seed_we(we), .seed_wheel(wh),
                                          .seed_idx(idx), .seed_data(sd), .rnd);

  logic [31:0] h[NW][$];

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    en = 0; we = 0; wh = 0; idx = 0; sd = 0;
    @(negedge clk);
    for (int w = 0; w < NW; w++)
      for (int i = 0; i < 62; i++) begin
        we = 1; wh = 8'(w); idx = 6'(i); sd = $urandom; h[w].push_back(sd);
        @(negedge clk);
      end
    we = 0;
    for (int step = 0; step < 20; step++) begin
      logic [31:0] ex[NW][RPW];
      en = 1;
      for (int w = 0; w < NW; w++)
        for (int n = 0; n < RPW; n++) begin
          int k;
          logic [31:0] i_new;
          k = h[w].size();
          i_new = h[w][k-24] + h[w][k-55];
          ex[w][n] = i_new ^ h[w][k-61];
          h[w].push_back(i_new);
        end
      #1;
      for (int c = 0; c < NOUT; c++) begin
        checks++;
        if (rnd[c] !== ex[c / RPW][c % RPW]) failures++;
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

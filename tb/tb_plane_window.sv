// tb_plane_window: L = 8, N_B = 2. Streams the blocks of a random lattice in
// the order planes L-1, 0, 1, ..., L-1, 0 (one block per clock, blocks laid
// out as in the lattice memories) and, after each completed plane from the
// third on, checks the window holds planes z-1, z, z+1 (periodic).
module tb_plane_window;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int L = 8, NB = 2, NMEM = 4;
  logic v;
  logic [0:0] blk;
  logic [NMEM-1:0][L-1:0] din;
  logic [L-1:0][L-1:0] pm, pc, pp;
  logic [L-1:0] lat[L][L];   // [z][x] -> y bits

  plane_window #(.L(L), .NB(NB)) dut (.clk, .in_valid(v), .in_blk(blk), .in_data(din),
                                      .plane_m(pm), .plane_c(pc), .plane_p(pp));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int z = 0; z < L; z++) for (int x = 0; x < L; x++) lat[z][x] = 8'($urandom);
    v = 0; blk = 0; din = '0;
    @(negedge clk);
    for (int j = -1; j <= L; j++) begin
      int zr;
      zr = (j + L) % L;
      for (int b = 0; b < NB; b++) begin
        v = 1; blk = 1'(b);
        for (int m = 0; m < NMEM; m++) din[m] = lat[zr][b * NMEM + m];
        @(negedge clk);
        // a gap cycle must not disturb anything
        v = 0; din = '1;
        @(negedge clk);
      end
      if (j >= 1) begin
        int z;
        z = j - 1;
        for (int x = 0; x < L; x++) begin
          checks += 3;
          if (pm[x] !== lat[(z + L - 1) % L][x]) failures++;
          if (pc[x] !== lat[z][x]) failures++;
          if (pp[x] !== lat[(z + 1) % L][x]) failures++;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

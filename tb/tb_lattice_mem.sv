// tb_lattice_mem: L = 8, N_B = 2 (4 memories of 8 bits x 16 words). Loads every
// word through port A (one memory at a time), reads all back through both
// ports, then writes whole blocks through port B and checks the read-first
// behaviour and the final contents against a software array.
module tb_lattice_mem;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int L = 8, NB = 2, NMEM = 4, D = 16;
  logic [3:0] aa, ba;
  logic [NMEM-1:0] awe;
  logic bwe;
  logic [L-1:0] awd;
  logic [NMEM-1:0][L-1:0] ard, brd, bwd;
  logic [L-1:0] model[NMEM][D];

  lattice_mem #(.L(L), .NB(NB)) dut (.clk, .a_addr(aa), .a_we(awe), .a_wdata(awd), .a_rdata(ard),
                                     .b_addr(ba), .b_we(bwe), .b_wdata(bwd), .b_rdata(brd));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    aa = 0; ba = 0; awe = 0; bwe = 0; awd = 0; bwd = '0;
    @(negedge clk);
    for (int m = 0; m < NMEM; m++)
      for (int a = 0; a < D; a++) begin
        aa = 4'(a); awe = NMEM'(1) << m; awd = 8'($urandom); model[m][a] = awd;
        @(negedge clk);
      end
    awe = 0;
    for (int a = 0; a < D; a++) begin
      aa = 4'(a); ba = 4'(D - 1 - a);
      @(negedge clk);
      for (int m = 0; m < NMEM; m++) begin
        checks += 2;
        if (ard[m] !== model[m][a]) failures++;
        if (brd[m] !== model[m][D-1-a]) failures++;
      end
    end
    for (int a = 0; a < D; a += 3) begin
      ba = 4'(a); bwe = 1;
      for (int m = 0; m < NMEM; m++) bwd[m] = 8'($urandom);
      @(negedge clk);
      bwe = 0;
      for (int m = 0; m < NMEM; m++) begin
        checks++;
        if (brd[m] !== model[m][a]) failures++;   // read-first: old word
        model[m][a] = bwd[m];
      end
    end
    for (int a = 0; a < D; a++) begin
      aa = 4'(a);
      @(negedge clk);
      for (int m = 0; m < NMEM; m++) begin
        checks++;
        if (ard[m] !== model[m][a]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

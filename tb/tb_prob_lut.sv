// tb_prob_lut: writes random words to all 32 entries of a LUT copy and reads
// them back through both read ports at random addresses; checks reset clears
// the table.
module tb_prob_lut;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n, we;
  logic [4:0] wa, r0, r1;
  logic [31:0] wd, d0, d1;
  logic [31:0] model[32];
  prob_lut dut (.clk, .rst_n, .we, .waddr(wa), .wdata(wd), .raddr0(r0), .rdata0(d0),
                .raddr1(r1), .rdata1(d1));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; we = 0; wa = 0; wd = 0; r0 = 0; r1 = 0;
    #12 rst_n = 1;
    for (int i = 0; i < 32; i++) begin
      r0 = 5'(i); #1; checks++; if (d0 !== 32'd0) failures++;
    end
    @(negedge clk);
    for (int i = 0; i < 32; i++) begin
      we = 1; wa = 5'(i); wd = $urandom; model[i] = wd;
      @(negedge clk);
    end
    we = 0;
    for (int k = 0; k < 200; k++) begin
      r0 = 5'($urandom); r1 = 5'($urandom); #1;
      checks += 2;
      if (d0 !== model[r0]) failures++;
      if (d1 !== model[r1]) failures++;
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_sweep_ctrl: L = 8, N_B = 2, two sweeps. Checks the run length
// 2 * 2 * ((L+3)*N_B + 1) clocks, that each half visits every block (z,b) once
// in order and updates it exactly one clock after its pre stage, that the read
// stream is planes L-1, 0, ..., L-1, 0, that proc never runs before three
// planes have been read, rng_en == proc_valid, and the sweep counter / done.
module tb_sweep_ctrl;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int L = 8, NB = 2, NS = 2;
  localparam int T_HALF = (L + 3) * NB + 1;
  logic rst_n, start, busy, done, half, rd_valid, win_valid, pre_valid, proc_valid, rng_en;
  logic [31:0] n_sweeps, sweep_count;
  logic [2:0] rd_plane, pre_z, proc_z;
  logic [0:0] rd_blk, win_blk, pre_b, proc_b;

  sweep_ctrl #(.L(L), .NB(NB)) dut (.*);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc, nrd, npre, nproc, reads_before_proc, halfs_seen;
    logic [2:0] last_pz; logic [0:0] last_pb;
    rst_n = 0; start = 0; n_sweeps = NS;
    #22 rst_n = 1;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    cyc = 0; nrd = 0; npre = 0; nproc = 0; reads_before_proc = 0;
    while (busy || proc_valid) begin
      int t;
      t = cyc % T_HALF;
      chk(rng_en == proc_valid, "rng_en");
      chk(half == ((cyc / T_HALF) % 2 == 1), "half");
      if (rd_valid) begin
        int k;
        k = nrd % ((L + 2) * NB);
        chk(int'(rd_plane) == (k / NB + L - 1) % L && int'(rd_blk) == k % NB, "rd order");
        nrd++;
        if (t < 3 * NB) reads_before_proc++;
      end
      if (pre_valid) begin
        int k;
        k = npre % (L * NB);
        chk(int'(pre_z) == k / NB && int'(pre_b) == k % NB, "pre order");
        chk(t == 3 * NB + k, "pre timing");
        npre++;
      end
      if (proc_valid) begin
        chk(proc_z == last_pz && proc_b == last_pb, "proc follows pre");
        nproc++;
      end
      last_pz = pre_z; last_pb = pre_b;
      @(negedge clk);
      cyc++;
      if (cyc > 10 * T_HALF) break;
    end
    chk(cyc == 2 * NS * T_HALF, "run length");
    chk(nproc == 2 * NS * L * NB, "blocks updated");
    chk(nrd == 2 * NS * (L + 2) * NB, "blocks read");
    chk(reads_before_proc == 2 * NS * 3 * NB, "priming reads");
    chk(done && sweep_count == NS, "done / sweep_count");
    $display("run of %0d sweeps took %0d clocks", NS, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

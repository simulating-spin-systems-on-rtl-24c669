// potts_driver: stimulus and reference model for end-to-end runs of the Potts
// engine (used directly or through spin_fpga_top with MODEL_POTTS).
//
// Loads random permutation couplings on all bonds, random 2-bit spins for both
// replicas and random wheel seeds, loads the Metropolis LUT for beta = BETA and
// runs NS sweeps twice (two runs, so a second start is covered), reading
// back all spin bit planes after each run and compares them with a reference model in
// (x,y,z) coordinates that steps its own copy of every wheel once per block.
// Run length, accepted and rejected moves and null proposals are counted.
// With FINISH set it ends the simulation and prints the result line itself;
// otherwise it raises `fin` and leaves that to the testbench.
module potts_driver #(
  parameter int L   = spin_pkg::L_DEF,
  parameter int NB  = spin_pkg::POTTS_NB_DEF,
  parameter int RPW = spin_pkg::RPW_DEF,
  parameter int NS  = 1,
  parameter real BETA = 0.6,
  parameter bit FINISH = 1,
  parameter int NMEM = L / NB,
  parameter int NC   = NMEM * L,
  parameter int AW   = $clog2(L * NB),
  parameter int MW   = (NMEM > 1) ? $clog2(NMEM) : 1
) (
  input  logic                   clk,
  output logic                   rst_n,
  output logic                   host_we,
  output logic                   host_re,
  output logic [4:0]             host_var,
  output logic [MW-1:0]          host_mem,
  output logic [AW-1:0]          host_addr,
  output logic [L-1:0]           host_wdata,
  input  logic [L-1:0]           host_rdata,
  output logic                   lut_we,
  output logic [4:0]             lut_addr,
  output logic [31:0]            lut_wdata,
  output logic                   seed_we,
  output logic [7:0]             seed_wheel,
  output logic [5:0]             seed_idx,
  output logic [31:0]            seed_data,
  output logic                   start,
  output logic [31:0]            n_sweeps,
  input  logic                   busy,
  input  logic                   done,
  input  logic [31:0]            sweep_count
);
  localparam int NW = (NC + RPW - 1) / RPW;

  int checks = 0, failures = 0;
  int n_acc = 0, n_rej = 0, n_null = 0;
  bit fin = 0;   // set when all runs and checks are complete

  bit [1:0] s1 [L][L][L], s2 [L][L][L];
  bit [7:0] jp [3][L][L][L];     // permutation of the bond to the +d neighbour
  logic [31:0] lut [16];
  logic [31:0] wheel [NW][$];

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  function automatic int md(int a); return (a % L + L) % L; endfunction

  function automatic bit [1:0] get_spin(bit q, int x, int y, int z);
    bit r2 = (((x + y + z) % 2) == 1) ^ q;
    return r2 ? s2[x][y][z] : s1[x][y][z];
  endfunction

  task automatic set_spin(bit q, int x, int y, int z, bit [1:0] v);
    bit r2 = (((x + y + z) % 2) == 1) ^ q;
    if (r2) s2[x][y][z] = v; else s1[x][y][z] = v;
  endtask

  function automatic bit [7:0] rand_perm();
    int v[4] = '{0, 1, 2, 3};
    v.shuffle();
    return {2'(v[3]), 2'(v[2]), 2'(v[1]), 2'(v[0])};
  endfunction

  function automatic int pi(bit [7:0] p, int v); return (p >> (2 * v)) & 3; endfunction

  // value of bit plane `var` at (x,y,z)
  function automatic bit plane_bit(int var_i, int x, int y, int z);
    if (var_i < 4) return get_spin(var_i / 2, x, y, z)[var_i % 2];
    return jp[(var_i - 4) / 8][x][y][z][(var_i - 4) % 8];
  endfunction

  task automatic rng_step(output logic [31:0] r [NC]);
    for (int w = 0; w < NW; w++)
      for (int n = 0; n < RPW; n++) begin
        int k;
        logic [31:0] inew;
        k = wheel[w].size();
        inew = wheel[w][k-24] + wheel[w][k-55];
        if (w * RPW + n < NC) r[w * RPW + n] = inew ^ wheel[w][k-61];
        wheel[w].push_back(inew);
        void'(wheel[w].pop_front());
      end
  endtask

  // satisfied bonds of site (x,y,z) on side q if it held value v
  function automatic int sat(bit q, int x, int y, int z, int v);
    int c = 0;
    int dx[3] = '{1, 0, 0}, dy[3] = '{0, 1, 0}, dz[3] = '{0, 0, 1};
    for (int d = 0; d < 3; d++) begin
      int xp = md(x + dx[d]), yp = md(y + dy[d]), zp = md(z + dz[d]);
      int xm = md(x - dx[d]), ym = md(y - dy[d]), zm = md(z - dz[d]);
      c += (v == pi(jp[d][x][y][z], get_spin(!q, xp, yp, zp)));
      c += (get_spin(!q, xm, ym, zm) == pi(jp[d][xm][ym][zm], v));
    end
    return c;
  endfunction

  task automatic model_half(bit q);
    logic [31:0] r [NC];
    for (int z = 0; z < L; z++)
      for (int b = 0; b < NB; b++) begin
        rng_step(r);
        for (int m = 0; m < NMEM; m++)
          for (int y = 0; y < L; y++) begin
            int x = b * NMEM + m;
            logic [31:0] rr = r[m * L + y];
            int so = get_spin(q, x, y, z);
            int sp = so ^ rr[31:30];
            int de = sat(q, x, y, z, so) - sat(q, x, y, z, sp);
            bit a = {rr[29:0], 2'b00} < lut[de + 6];
            if (sp == so) n_null++;
            else if (a) n_acc++;
            else n_rej++;
            if (a) set_spin(q, x, y, z, 2'(sp));
          end
      end
  endtask

  task automatic write_var(int v);
    for (int m = 0; m < NMEM; m++)
      for (int a = 0; a < L * NB; a++) begin
        int z = a / NB, x = (a % NB) * NMEM + m;
        logic [L-1:0] w;
        for (int y = 0; y < L; y++) w[y] = plane_bit(v, x, y, z);
        @(negedge clk);
        host_we = 1; host_var = 5'(v); host_mem = MW'(m); host_addr = AW'(a); host_wdata = w;
      end
    @(negedge clk);
    host_we = 0;
  endtask

  task automatic compare_spins(string tag);
    int bad = 0;
    for (int v = 0; v < 4; v++)
      for (int m = 0; m < NMEM; m++)
        for (int a = 0; a < L * NB; a++) begin
          int z = a / NB, x = (a % NB) * NMEM + m;
          host_re = 1; host_var = 5'(v); host_mem = MW'(m); host_addr = AW'(a);
          @(negedge clk);
          host_re = 0;
          for (int y = 0; y < L; y++) begin
            checks++;
            if (host_rdata[y] !== plane_bit(v, x, y, z)) begin
              bad++; failures++;
              if (bad < 4) $display("FAIL %s: plane %0d x=%0d y=%0d z=%0d", tag, v, x, y, z);
            end
          end
        end
    $display("potts %s: %0d spin bits compared, %0d differ", tag, 4 * L * L * L, bad);
  endtask

  task automatic run(string tag);
    int cyc = 0;
    int expect_cyc = NS * 2 * ((L + 3) * NB + 1);
    @(negedge clk);
    n_sweeps = NS; start = 1;
    @(negedge clk);
    start = 0;
    while (!done) begin
      @(negedge clk);
      cyc++;
      if (cyc > expect_cyc + 100) break;
    end
    chk(cyc == expect_cyc, $sformatf("potts %s: run length %0d, expected %0d", tag, cyc, expect_cyc));
    chk(sweep_count == 32'(NS), "potts sweep count");
    $display("potts %s: %0d sweeps in %0d clocks, %0d sites per update clock", tag, NS, cyc, NC);
    for (int s = 0; s < NS; s++) begin model_half(0); model_half(1); end
    compare_spins(tag);
  endtask

  initial begin
    rst_n = 0; host_we = 0; host_re = 0; host_var = '0; host_mem = '0; host_addr = '0;
    host_wdata = '0; lut_we = 0; lut_addr = '0; lut_wdata = '0; seed_we = 0; seed_wheel = '0;
    seed_idx = '0; seed_data = '0; start = 0; n_sweeps = '0;
    for (int x = 0; x < L; x++) for (int y = 0; y < L; y++) for (int z = 0; z < L; z++) begin
      s1[x][y][z] = 2'($urandom); s2[x][y][z] = 2'($urandom);
      for (int d = 0; d < 3; d++) jp[d][x][y][z] = rand_perm();
    end
    for (int i = 0; i < 16; i++) begin
      int de;
      de = i - 6;
      lut[i] = (de <= 0) ? 32'hFFFF_FFFF : 32'(longint'($exp(-BETA * de) * 4294967296.0));
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 16; i++) begin
      @(negedge clk);
      lut_we = 1; lut_addr = 5'(i); lut_wdata = lut[i];
    end
    @(negedge clk);
    lut_we = 0;
    for (int w = 0; w < NW; w++)
      for (int i = 0; i < 62; i++) begin
        logic [31:0] v;
        v = $urandom;
        wheel[w].push_back(v);
        @(negedge clk);
        seed_we = 1; seed_wheel = 8'(w); seed_idx = 6'(i); seed_data = v;
      end
    @(negedge clk);
    seed_we = 0;
    for (int v = 0; v < 28; v++) write_var(v);
    compare_spins("load");
    run("run 1");
    run("run 2");
    $display("potts mechanisms: accepted=%0d rejected=%0d null proposals=%0d", n_acc, n_rej, n_null);
    chk(n_acc > 0, "potts accept never happened");
    chk(n_rej > 0, "potts reject never happened");
    chk(n_null > 0, "potts null proposal never happened");
    fin = 1;
    if (FINISH) begin
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

  initial if (FINISH) begin
    #5ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

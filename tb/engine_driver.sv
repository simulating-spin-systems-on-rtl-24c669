// engine_driver: stimulus and reference model for end-to-end runs of
// ising_engine, shared by the reduced and the full-size testbenches.
//
// It loads a random sample (couplings Jx/Jy/Jz, field signs, dilution with
// about 15% empty sites), random spins for both replicas and random wheel
// seeds, then performs three runs: Metropolis without field (NS1 sweeps),
// heat bath with a random field (NS2 sweeps) and Metropolis with the field
// (1 sweep), reloading the LUT for each. After each run it reads P and Q back
// and compares every spin with a reference model that works on the two
// replicas in plain (x,y,z) coordinates, steps its own software copy of every
// Parisi-Rapuano wheel once per updated block, and computes the energies with
// integer arithmetic. Each run's length in clocks is checked against
// 2*((L+3)*N_B+1) per sweep. The mechanisms exercised (accepted and rejected
// Metropolis moves, heat-bath up/down choices, empty sites, field-term
// indices, updates across block edges, the algorithm switch) are counted and
// each must occur at least once (empty sites and field indices only when
// the engine has field and dilution memories; EA_ONLY describes one without). With FINISH set it ends the simulation and
// prints the result line; otherwise it raises `fin` for the testbench.
module engine_driver #(
  parameter int L   = spin_pkg::L_DEF,
  parameter int NB  = spin_pkg::NB_DEF,
  parameter int RPW = spin_pkg::RPW_DEF,
  parameter int NS1 = 2,
  parameter int NS2 = 1,
  parameter bit FINISH = 1,
  parameter bit EA_ONLY = 0,   // engine built without field and dilution memories
  parameter int NMEM = L / NB,
  parameter int NC   = NMEM * L,
  parameter int AW   = $clog2(L * NB),
  parameter int MW   = (NMEM > 1) ? $clog2(NMEM) : 1
) (
  input  logic                   clk,
  output logic                   rst_n,
  output logic                   host_we,
  output logic                   host_re,
  output spin_pkg::mem_sel_e     host_sel,
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
  output spin_pkg::algo_e        algo,
  output logic                   field_en,
  input  logic                   busy,
  input  logic                   done,
  input  logic [31:0]            sweep_count
);
  import spin_pkg::*;

  localparam int NW = (NC + RPW - 1) / RPW;
  localparam real BETA = 0.35;
  localparam real HABS = 0.5;

  int checks = 0, failures = 0;
  bit fin = 0;   // set when all runs and checks are complete

  // reference state, [x][y][z]
  bit s1 [L][L][L], s2 [L][L][L];
  bit jx [L][L][L], jy [L][L][L], jz [L][L][L], hs [L][L][L], xo [L][L][L];
  logic [31:0] lut [32];
  logic [31:0] wheel [NW][$];

  // mechanism counters
  int n_acc, n_rej, n_up, n_down, n_empty, n_field_idx, n_edge, n_switch;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  function automatic int pm(bit b); return b ? 1 : -1; endfunction
  function automatic int md(int a); return (a % L + L) % L; endfunction

  // P holds replica 1 on even sites, replica 2 on odd ones; Q the reverse
  function automatic bit get_spin(bit q, int x, int y, int z);
    bit r2 = (((x + y + z) % 2) == 1) ^ q;
    return r2 ? s2[x][y][z] : s1[x][y][z];
  endfunction

  task automatic set_spin(bit q, int x, int y, int z, bit v);
    bit r2 = (((x + y + z) % 2) == 1) ^ q;
    if (r2) s2[x][y][z] = v; else s1[x][y][z] = v;
  endtask

  function automatic logic [31:0] prob_word(real p);
    if (p >= 1.0) return 32'hFFFF_FFFF;
    return 32'(longint'(p * 4294967296.0));
  endfunction

  task automatic load_lut(algo_e a, bit fe);
    for (int i = 0; i < 32; i++) begin
      int e = (i % 16) - 6;
      real hf = fe ? ((i >= 16) ? HABS : -HABS) : 0.0;
      real p;
      if (a == ALG_METROPOLIS) begin
        real de = 2.0 * (e + hf);
        p = (de <= 0.0) ? 1.0 : $exp(-BETA * de);
      end else begin
        p = 1.0 / (1.0 + $exp(-2.0 * BETA * (e + hf)));
      end
      lut[i] = prob_word(p);
      @(negedge clk);
      lut_we = 1; lut_addr = 5'(i); lut_wdata = lut[i];
    end
    @(negedge clk);
    lut_we = 0;
  endtask

  task automatic write_var(mem_sel_e sel);
    for (int m = 0; m < NMEM; m++)
      for (int a = 0; a < L * NB; a++) begin
        int z = a / NB, x = (a % NB) * NMEM + m;
        logic [L-1:0] w;
        for (int y = 0; y < L; y++)
          case (sel)
            MEM_P:  w[y] = get_spin(0, x, y, z);
            MEM_Q:  w[y] = get_spin(1, x, y, z);
            MEM_JX: w[y] = jx[x][y][z];
            MEM_JY: w[y] = jy[x][y][z];
            MEM_JZ: w[y] = jz[x][y][z];
            MEM_H:  w[y] = hs[x][y][z];
            default: w[y] = xo[x][y][z];
          endcase
        @(negedge clk);
        host_we = 1; host_sel = sel; host_mem = MW'(m); host_addr = AW'(a); host_wdata = w;
      end
    @(negedge clk);
    host_we = 0;
  endtask

  task automatic compare_spins(string tag);
    int bad = 0;
    for (int q = 0; q < 2; q++)
      for (int m = 0; m < NMEM; m++)
        for (int a = 0; a < L * NB; a++) begin
          int z = a / NB, x = (a % NB) * NMEM + m;
          host_re = 1; host_sel = q ? MEM_Q : MEM_P; host_mem = MW'(m); host_addr = AW'(a);
          @(negedge clk);
          host_re = 0;
          for (int y = 0; y < L; y++) begin
            checks++;
            if (host_rdata[y] !== get_spin(q[0], x, y, z)) begin
              bad++;
              failures++;
              if (bad < 4) $display("FAIL %s: mem %s x=%0d y=%0d z=%0d got %0b", tag,
                                    q ? "Q" : "P", x, y, z, host_rdata[y]);
            end
          end
        end
    $display("%s: %0d spins compared, %0d differ", tag, 2 * L * L * L, bad);
  endtask

  // one step of every wheel: NC random numbers for one block
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

  task automatic model_half(bit q, algo_e a, bit fe_in);
    logic [31:0] r [NC];
    bit fe = fe_in && !EA_ONLY;
    for (int z = 0; z < L; z++)
      for (int b = 0; b < NB; b++) begin
        rng_step(r);
        for (int m = 0; m < NMEM; m++)
          for (int y = 0; y < L; y++) begin
            int x = b * NMEM + m, sum = 0, e, idx;
            bit so, f, hit, sn;
            int nx [6], ny [6], nz [6];
            bit jj [6];
            nx = '{md(x+1), md(x-1), x, x, x, x};
            ny = '{y, y, md(y+1), md(y-1), y, y};
            nz = '{z, z, z, z, md(z+1), md(z-1)};
            jj = '{jx[x][y][z], jx[md(x-1)][y][z], jy[x][y][z], jy[x][md(y-1)][z],
                   jz[x][y][z], jz[x][y][md(z-1)]};
            for (int j = 0; j < 6; j++)
              if (xo[nx[j]][ny[j]][nz[j]])
                sum += pm(jj[j]) * pm(get_spin(!q, nx[j], ny[j], nz[j]));
            so = get_spin(q, x, y, z);
            if (a == ALG_METROPOLIS) begin
              e = pm(so) * sum;
              f = fe && (pm(hs[x][y][z]) * pm(so) > 0);
            end else begin
              e = sum;
              f = fe && hs[x][y][z];
            end
            idx = (f ? 16 : 0) + e + 6;
            hit = r[m * L + y] < lut[idx];
            if (!xo[x][y][z]) begin
              sn = so;
              n_empty++;
            end else if (a == ALG_METROPOLIS) begin
              sn = hit ? !so : so;
              if (hit) n_acc++; else n_rej++;
            end else begin
              sn = hit;
              if (hit) n_up++; else n_down++;
            end
            if (f) n_field_idx++;
            if (NB > 1 && (m == 0 || m == NMEM - 1)) n_edge++;
            set_spin(q, x, y, z, sn);
          end
      end
  endtask

  task automatic run(algo_e a, bit fe, int ns, string tag);
    int cyc = 0;
    int expect_cyc = ns * 2 * ((L + 3) * NB + 1);
    if (a != algo) n_switch++;
    load_lut(a, fe);
    @(negedge clk);
    algo = a; field_en = fe; n_sweeps = ns; start = 1;
    @(negedge clk);
    start = 0;
    while (!done) begin
      @(negedge clk);
      cyc++;
      if (cyc > expect_cyc + 100) break;
    end
    chk(cyc == expect_cyc, $sformatf("%s run length %0d clocks, expected %0d", tag, cyc, expect_cyc));
    chk(sweep_count == 32'(ns), "sweep count");
    $display("%s: %0d sweeps in %0d clocks (%0d site updates per clock in the update stage)",
             tag, ns, cyc, NC);
    for (int s = 0; s < ns; s++) begin
      model_half(0, a, fe);
      model_half(1, a, fe);
    end
    compare_spins(tag);
  endtask

  initial if (FINISH) begin
    #5ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; host_we = 0; host_re = 0; host_sel = MEM_P; host_mem = '0; host_addr = '0;
    host_wdata = '0; lut_we = 0; lut_addr = '0; lut_wdata = '0; seed_we = 0; seed_wheel = '0;
    seed_idx = '0; seed_data = '0; start = 0; n_sweeps = '0; algo = ALG_METROPOLIS; field_en = 0;
    n_acc = 0; n_rej = 0; n_up = 0; n_down = 0; n_empty = 0; n_field_idx = 0; n_edge = 0;
    n_switch = 0;
    for (int x = 0; x < L; x++) for (int y = 0; y < L; y++) for (int z = 0; z < L; z++) begin
      s1[x][y][z] = 1'($urandom); s2[x][y][z] = 1'($urandom);
      jx[x][y][z] = 1'($urandom); jy[x][y][z] = 1'($urandom); jz[x][y][z] = 1'($urandom);
      hs[x][y][z] = 1'($urandom); xo[x][y][z] = EA_ONLY || ($urandom_range(0, 99) >= 15);
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
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
    write_var(MEM_P); write_var(MEM_Q); write_var(MEM_JX); write_var(MEM_JY);
    write_var(MEM_JZ);
    if (!EA_ONLY) begin write_var(MEM_H); write_var(MEM_X); end
    compare_spins("load");

    run(ALG_METROPOLIS, 1'b0, NS1, "metropolis");
    run(ALG_HEATBATH,   1'b1, NS2, "heat bath + field");
    run(ALG_METROPOLIS, 1'b1, 1,   "metropolis + field");

    $display("mechanisms: accepted=%0d rejected=%0d hb_up=%0d hb_down=%0d empty=%0d field_idx=%0d block_edge=%0d algo_switch=%0d",
             n_acc, n_rej, n_up, n_down, n_empty, n_field_idx, n_edge, n_switch);
    chk(n_acc > 0, "Metropolis accept never happened");
    chk(n_rej > 0, "Metropolis reject never happened");
    chk(n_up > 0 && n_down > 0, "heat-bath up/down never happened");
    chk(EA_ONLY || n_empty > 0, "no empty site updated");
    chk(EA_ONLY || n_field_idx > 0, "field index never used");
    chk(NB == 1 || n_edge > 0, "no block edge update");
    chk(n_switch >= 2, "algorithm switch");
    fin = 1;
    if (FINISH) begin
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end
endmodule

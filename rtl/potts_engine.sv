// potts_engine: Monte Carlo engine for the four-state glassy Potts model on a
// 3-D periodic lattice of size L^3, two replicas meshed as in ising_engine.
//
// Every bit of every variable has its own lattice_mem, so the memory layout
// and the block-per-clock schedule are those of the Ising code: the 2-bit
// spins use 2 bit-plane memories per P/Q side, each of the three coupling
// directions uses 8 bit-plane memories (the 8-bit permutation of the bond to
// the +x, +y or +z neighbour). With the defaults L = 32, N_B = 4 each variable
// bit is 8 memories of 32 bits x 128 words and 8 x 32 = 256 sites are updated
// per clock by potts_update_cells; NC/2 prob_lut copies of 16 words each
// serve two cells; rng_bank gives one 32-bit number per cell per clock.
// sweep_ctrl and plane_window are shared with the Ising code; the two spin
// bits stream through two windows.
//
// Host port (engine idle only): host_var selects the bit plane: 0/1 = P bit
// 0/1, 2/3 = Q bit 0/1, 4+k / 12+k / 20+k = bit k of the Jx / Jy / Jz
// permutations; host_mem, host_addr address a word as in lattice_mem.
// host_rdata is valid one clock after host_re. lut_*, seed_*, start,
// n_sweeps, busy, done and sweep_count behave as in ising_engine; a sweep
// takes 2*((L+3)*N_B+1) clocks.
//
// From the paper: 2-bit spins, 8-bit couplings, one memory per bit, the
// meshing scheme kept, 256 updates per clock. Design choices: Metropolis
// dynamics, the bit-plane numbering of the host port and the timing.
module potts_engine #(
  parameter int unsigned L   = spin_pkg::L_DEF,
  parameter int unsigned NB  = spin_pkg::POTTS_NB_DEF,
  parameter int unsigned RW  = spin_pkg::RW_DEF,
  parameter int unsigned RPW = spin_pkg::RPW_DEF,
  parameter int unsigned NMEM = L / NB,
  parameter int unsigned NC   = NMEM * L,
  parameter int unsigned AW   = $clog2(L * NB),
  parameter int unsigned MW   = (NMEM > 1) ? $clog2(NMEM) : 1
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  input  logic                                   host_we,
  input  logic                                   host_re,
  input  logic [4:0]                             host_var,
  input  logic [MW-1:0]                          host_mem,
  input  logic [AW-1:0]                          host_addr,
  input  logic [L-1:0]                           host_wdata,
  output logic [L-1:0]                           host_rdata,
  input  logic                                   lut_we,
  input  logic [spin_pkg::POTTS_LUT_AW-1:0]      lut_addr,
  input  logic [RW-1:0]                          lut_wdata,
  input  logic                                   seed_we,
  input  logic [7:0]                             seed_wheel,
  input  logic [$clog2(spin_pkg::WHEEL_LEN)-1:0] seed_idx,
  input  logic [RW-1:0]                          seed_data,
  input  logic                                   start,
  input  logic [31:0]                            n_sweeps,
  output logic                                   busy,
  output logic                                   done,
  output logic [31:0]                            sweep_count
);
  import spin_pkg::*;

  localparam int unsigned BW = (NB > 1) ? $clog2(NB) : 1;
  localparam int unsigned ZW = $clog2(L);
  localparam int unsigned NLUT = NC / 2;
  localparam int unsigned NVAR = 28;   // 4 spin bit planes + 3 x 8 coupling bit planes

  // ---------------------------------------------------------------- control
  logic          half, rd_valid, win_valid, pre_valid, proc_valid, rng_en;
  logic [ZW-1:0] rd_plane, pre_z, proc_z;
  logic [BW-1:0] rd_blk, win_blk, pre_b, proc_b;

  sweep_ctrl #(.L(L), .NB(NB)) u_ctrl (
    .clk, .rst_n, .start, .n_sweeps, .busy, .done, .half, .sweep_count,
    .rd_valid, .rd_plane, .rd_blk, .win_valid, .win_blk,
    .pre_valid, .pre_z, .pre_b, .proc_valid, .proc_z, .proc_b, .rng_en
  );

  function automatic logic [AW-1:0] waddr(input logic [ZW-1:0] z, input logic [BW-1:0] b);
    return AW'(int'(z) * NB + int'(b));
  endfunction

  logic [AW-1:0] rd_addr, pre_addr, proc_addr, jx_b_addr, jz_b_addr;
  always_comb begin
    rd_addr   = waddr(rd_plane, rd_blk);
    pre_addr  = waddr(pre_z, pre_b);
    proc_addr = waddr(proc_z, proc_b);
    jx_b_addr = waddr(pre_z, (pre_b == '0) ? BW'(NB - 1) : pre_b - 1'b1);
    jz_b_addr = waddr((pre_z == '0) ? ZW'(L - 1) : pre_z - 1'b1, pre_b);
  end

  // ---------------------------------------------------------------- memories
  logic [NVAR-1:0][NMEM-1:0][L-1:0] va, vb;   // port A / B read data per bit plane
  logic [NMEM-1:0][L-1:0]           new_b0, new_b1;

  for (genvar v = 0; v < int'(NVAR); v++) begin : g_var
    logic [NMEM-1:0] a_we;
    logic [AW-1:0]   a_addr, b_addr;
    logic            b_we;
    logic [NMEM-1:0][L-1:0] b_wdata;
    always_comb begin
      a_we = '0;
      a_we[host_mem] = host_we && !busy && host_var == 5'(v);
      b_wdata = (v % 2 == 0) ? new_b0 : new_b1;
      if (v < 4) begin
        // spin bit planes: the target side is read at pre, the source streams
        a_addr = !busy ? host_addr : ((half == 1'(v / 2)) ? pre_addr : rd_addr);
        b_addr = proc_addr;
        b_we   = proc_valid && half == 1'(v / 2);
      end else begin
        a_addr = !busy ? host_addr : pre_addr;
        b_addr = (v < 12) ? jx_b_addr : jz_b_addr;
        b_we   = 1'b0;
      end
    end
    lattice_mem #(.L(L), .NB(NB)) u_mem (
      .clk, .a_addr, .a_we, .a_wdata(host_wdata), .a_rdata(va[v]),
      .b_addr, .b_we, .b_wdata, .b_rdata(vb[v]));
  end

  logic [4:0]    rvar_q;
  logic [MW-1:0] rmem_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rvar_q <= '0;
      rmem_q <= '0;
    end else if (host_re && !busy) begin
      rvar_q <= host_var;
      rmem_q <= host_mem;
    end
  end
  assign host_rdata = (rvar_q < 5'(NVAR)) ? va[rvar_q][rmem_q] : '0;

  // ---------------------------------------------------------- plane windows
  logic [1:0][L-1:0][L-1:0] wm, wc, wp;   // per spin bit, [x][y]
  for (genvar k = 0; k < 2; k++) begin : g_win
    plane_window #(.L(L), .NB(NB)) u_win (
      .clk, .in_valid(win_valid), .in_blk(win_blk), .in_data(half ? va[k] : va[2 + k]),
      .plane_m(wm[k]), .plane_c(wc[k]), .plane_p(wp[k]));
  end

  logic [1:0][NMEM+1:0][L-1:0] c_col;
  logic [1:0][NMEM-1:0][L-1:0] m_col, p_col;
  always_comb begin
    for (int k = 0; k < 2; k++) begin
      for (int i = 0; i < int'(NMEM) + 2; i++) begin
        c_col[k][i] = wc[k][((int'(proc_b) * NMEM + i - 1 + L) % L)];
      end
      for (int i = 0; i < int'(NMEM); i++) begin
        m_col[k][i] = wm[k][(int'(proc_b) * NMEM + i)];
        p_col[k][i] = wp[k][(int'(proc_b) * NMEM + i)];
      end
    end
  end

  // ------------------------------------------------------- random numbers
  logic [NC-1:0][RW-1:0] rnd;
  rng_bank #(.NOUT(NC), .RW(RW), .RPW(RPW)) u_rng (
    .clk, .en(rng_en), .seed_we(seed_we && !busy), .seed_wheel, .seed_idx, .seed_data, .rnd);

  // ------------------------------------------------- update cells and LUTs
  logic [NC-1:0][POTTS_LUT_AW-1:0] idx;
  logic [NC-1:0][RW-1:0]           lval;
  logic [NC-1:0][1:0]              s_new;

  for (genvar i = 0; i < int'(NLUT); i++) begin : g_lut
    prob_lut #(.RW(RW), .AW(POTTS_LUT_AW)) u_lut (
      .clk, .rst_n, .we(lut_we && !busy), .waddr(lut_addr), .wdata(lut_wdata),
      .raddr0(idx[2*i]), .rdata0(lval[2*i]), .raddr1(idx[2*i+1]), .rdata1(lval[2*i+1]));
  end

  for (genvar m = 0; m < int'(NMEM); m++) begin : g_col
    for (genvar y = 0; y < int'(L); y++) begin : g_row
      localparam int unsigned C  = m * L + y;
      localparam int unsigned YP = (y + 1) % L;
      localparam int unsigned YM = (y + L - 1) % L;
      logic [5:0][1:0] nb;
      logic [5:0][7:0] perm;
      logic [1:0]      s_old;
      logic            acc;
      always_comb begin
        for (int k = 0; k < 2; k++) begin
          nb[0][k] = c_col[k][m+2][y];    // +x
          nb[1][k] = c_col[k][m][y];      // -x
          nb[2][k] = c_col[k][m+1][YP];   // +y
          nb[3][k] = c_col[k][m+1][YM];   // -y
          nb[4][k] = p_col[k][m][y];      // +z
          nb[5][k] = m_col[k][m][y];      // -z
          s_old[k] = half ? va[2 + k][m][y] : va[k][m][y];
        end
        for (int k = 0; k < 8; k++) begin
          perm[0][k] = va[4 + k][m][y];
          perm[1][k] = (m == 0) ? vb[4 + k][NMEM-1][y] : va[4 + k][(m + NMEM - 1) % NMEM][y];
          perm[2][k] = va[12 + k][m][y];
          perm[3][k] = va[12 + k][m][YM];
          perm[4][k] = va[20 + k][m][y];
          perm[5][k] = vb[20 + k][m][y];
        end
      end

      potts_update_cell #(.RW(RW)) u_cell (
        .s_old, .nb, .perm, .lut_idx(idx[C]), .lut_val(lval[C]), .rnd(rnd[C]),
        .accept(acc), .s_new(s_new[C]));

      assign new_b0[m][y] = s_new[C][0];
      assign new_b1[m][y] = s_new[C][1];
    end
  end

  a_host_idle: assert property (@(posedge clk) disable iff (!rst_n) (host_we || host_re) |-> !busy)
    else $error("potts_engine: host access while a run is busy");

endmodule

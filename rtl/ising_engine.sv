// ising_engine: Monte Carlo engine for Ising-like spin models on a 3-D
// periodic lattice of size L^3, two replicas simulated together.
//
// Replica meshing: the two replicas share the couplings, fields and dilutions
// of one sample. Memory P holds the sites of even parity (x+y+z) of replica 1
// and the odd sites of replica 2; memory Q holds the rest. All neighbours of a
// P site are therefore in Q at the neighbouring coordinates (and vice versa),
// so every site of P can be updated at once while Q is frozen. A sweep is a
// half sweep over P followed by one over Q (sweep_ctrl).
//
// Per clock one block of a horizontal plane, NC = (L/N_B) * L sites, is
// updated: the block of the target memory (old spins), of Jx, Jy, Jz, field
// and dilution is read at the pre stage; the neighbour memory and the
// dilutions stream through two plane_windows; NC ising_update_cells compute
// their LUT index, read one of NC/2 prob_lut copies (two cells per copy),
// compare with their own random number from rng_bank and the new block is
// written back through port B of the target memory in the same clock.
// Coupling bonds to x-1 and z-1 use port B of the Jx and Jz memories.
//
// Host port (engine idle only): host_we writes word host_addr of memory
// host_mem of variable host_sel; host_re reads it, host_rdata valid on the
// next clock. lut_* writes word lut_addr of every LUT copy. seed_* loads one
// word of one RNG wheel. start/n_sweeps run n_sweeps sweeps with the selected
// algo and field_en; done rises when they are complete. Addresses follow
// lattice_mem: site (x,y,z) is bit y of word z*N_B + x/(L/N_B) of memory
// x mod (L/N_B). Timing: a sweep takes 2*((L+3)*N_B+1) clocks.
//
// HAS_FIELD / HAS_DILUTION remove the field and dilution memories (and the
// dilution window) for builds that do not need them: with both cleared the
// engine is the pure EA code with 5 variables x L/N_B memories (80 at the
// default size), field_en is ignored and every site counts as occupied.
//
// From the paper: the P/Q meshing, memories per variable, one block per
// clock, the update cell / LUT / RNG chain, LUT shared by two cells, one
// random number per update. Design choices: the host port, the run-time
// algorithm and field switches, the plane window and the timing.
module ising_engine #(
  parameter int unsigned L   = spin_pkg::L_DEF,
  parameter int unsigned NB  = spin_pkg::NB_DEF,
  parameter int unsigned RW  = spin_pkg::RW_DEF,
  parameter int unsigned RPW = spin_pkg::RPW_DEF,
  parameter bit          HAS_FIELD    = 1'b1,
  parameter bit          HAS_DILUTION = 1'b1,
  parameter int unsigned NMEM = L / NB,
  parameter int unsigned NC   = NMEM * L,
  parameter int unsigned AW   = $clog2(L * NB),
  parameter int unsigned MW   = (NMEM > 1) ? $clog2(NMEM) : 1
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  // host load / read-back
  input  logic                                   host_we,
  input  logic                                   host_re,
  input  spin_pkg::mem_sel_e                     host_sel,
  input  logic [MW-1:0]                          host_mem,
  input  logic [AW-1:0]                          host_addr,
  input  logic [L-1:0]                           host_wdata,
  output logic [L-1:0]                           host_rdata,
  // probability tables
  input  logic                                   lut_we,
  input  logic [spin_pkg::LUT_AW-1:0]            lut_addr,
  input  logic [RW-1:0]                          lut_wdata,
  // random number wheels
  input  logic                                   seed_we,
  input  logic [7:0]                             seed_wheel,
  input  logic [$clog2(spin_pkg::WHEEL_LEN)-1:0] seed_idx,
  input  logic [RW-1:0]                          seed_data,
  // run control
  input  logic                                   start,
  input  logic [31:0]                            n_sweeps,
  input  spin_pkg::algo_e                        algo,
  input  logic                                   field_en,
  output logic                                   busy,
  output logic                                   done,
  output logic [31:0]                            sweep_count
);
  import spin_pkg::*;

  localparam int unsigned BW = (NB > 1) ? $clog2(NB) : 1;
  localparam int unsigned ZW = $clog2(L);
  localparam int unsigned NLUT = NC / 2;

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
  logic [NMEM-1:0] host_onehot;
  always_comb begin
    host_onehot = '0;
    host_onehot[host_mem] = host_we && !busy;
  end

  logic [NMEM-1:0][L-1:0] p_a, p_b, q_a, q_b, jx_a, jx_b, jy_a, jy_b, jz_a, jz_b;
  logic [NMEM-1:0][L-1:0] h_a, h_b, x_a, x_b, new_word;
  logic [AW-1:0] p_a_addr, q_a_addr, par_addr, x_a_addr;

  always_comb begin
    p_a_addr = !busy ? host_addr : (half == 1'b0 ? pre_addr : rd_addr);
    q_a_addr = !busy ? host_addr : (half == 1'b1 ? pre_addr : rd_addr);
    par_addr = !busy ? host_addr : pre_addr;
    x_a_addr = !busy ? host_addr : rd_addr;
  end

  lattice_mem #(.L(L), .NB(NB)) u_mem_p (
    .clk, .a_addr(p_a_addr), .a_we(host_sel == MEM_P ? host_onehot : '0), .a_wdata(host_wdata),
    .a_rdata(p_a), .b_addr(proc_addr), .b_we(proc_valid && half == 1'b0),
    .b_wdata(new_word), .b_rdata(p_b));
  lattice_mem #(.L(L), .NB(NB)) u_mem_q (
    .clk, .a_addr(q_a_addr), .a_we(host_sel == MEM_Q ? host_onehot : '0), .a_wdata(host_wdata),
    .a_rdata(q_a), .b_addr(proc_addr), .b_we(proc_valid && half == 1'b1),
    .b_wdata(new_word), .b_rdata(q_b));
  lattice_mem #(.L(L), .NB(NB)) u_mem_jx (
    .clk, .a_addr(par_addr), .a_we(host_sel == MEM_JX ? host_onehot : '0), .a_wdata(host_wdata),
    .a_rdata(jx_a), .b_addr(jx_b_addr), .b_we(1'b0), .b_wdata('0), .b_rdata(jx_b));
  lattice_mem #(.L(L), .NB(NB)) u_mem_jy (
    .clk, .a_addr(par_addr), .a_we(host_sel == MEM_JY ? host_onehot : '0), .a_wdata(host_wdata),
    .a_rdata(jy_a), .b_addr('0), .b_we(1'b0), .b_wdata('0), .b_rdata(jy_b));
  lattice_mem #(.L(L), .NB(NB)) u_mem_jz (
    .clk, .a_addr(par_addr), .a_we(host_sel == MEM_JZ ? host_onehot : '0), .a_wdata(host_wdata),
    .a_rdata(jz_a), .b_addr(jz_b_addr), .b_we(1'b0), .b_wdata('0), .b_rdata(jz_b));
  // Field and dilution memories exist only in builds for models that use them
  // (EA needs neither: every site occupied, no field).
  if (HAS_FIELD) begin : g_field
    lattice_mem #(.L(L), .NB(NB)) u_mem_h (
      .clk, .a_addr(par_addr), .a_we(host_sel == MEM_H ? host_onehot : '0), .a_wdata(host_wdata),
      .a_rdata(h_a), .b_addr('0), .b_we(1'b0), .b_wdata('0), .b_rdata(h_b));
  end else begin : g_no_field
    assign h_a = '0;
    assign h_b = '0;
  end
  if (HAS_DILUTION) begin : g_dil
    lattice_mem #(.L(L), .NB(NB)) u_mem_x (
      .clk, .a_addr(x_a_addr), .a_we(host_sel == MEM_X ? host_onehot : '0), .a_wdata(host_wdata),
      .a_rdata(x_a), .b_addr('0), .b_we(1'b0), .b_wdata('0), .b_rdata(x_b));
  end else begin : g_no_dil
    assign x_a = '1;
    assign x_b = '1;
  end

  // host read-back: remember what was asked, select on the next clock
  mem_sel_e      rsel_q;
  logic [MW-1:0] rmem_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rsel_q <= MEM_P;
      rmem_q <= '0;
    end else if (host_re && !busy) begin
      rsel_q <= host_sel;
      rmem_q <= host_mem;
    end
  end

  always_comb begin
    unique case (rsel_q)
      MEM_P:   host_rdata = p_a[rmem_q];
      MEM_Q:   host_rdata = q_a[rmem_q];
      MEM_JX:  host_rdata = jx_a[rmem_q];
      MEM_JY:  host_rdata = jy_a[rmem_q];
      MEM_JZ:  host_rdata = jz_a[rmem_q];
      MEM_H:   host_rdata = h_a[rmem_q];
      MEM_X:   host_rdata = x_a[rmem_q];
      default: host_rdata = '0;
    endcase
  end

  // ---------------------------------------------------------- plane windows
  logic [L-1:0][L-1:0] sm, sc, sp, dm, dc, dp;   // spins / dilution, [x][y]

  plane_window #(.L(L), .NB(NB)) u_win_spin (
    .clk, .in_valid(win_valid), .in_blk(win_blk), .in_data(half ? p_a : q_a),
    .plane_m(sm), .plane_c(sc), .plane_p(sp));
  if (HAS_DILUTION) begin : g_win_dil
    plane_window #(.L(L), .NB(NB)) u_win_dil (
      .clk, .in_valid(win_valid), .in_blk(win_blk), .in_data(x_a),
      .plane_m(dm), .plane_c(dc), .plane_p(dp));
  end else begin : g_all_occupied
    assign dm = '1;
    assign dc = '1;
    assign dp = '1;
  end

  // columns x = proc_b*NMEM - 1 .. proc_b*NMEM + NMEM of the window planes
  logic [NMEM+1:0][L-1:0] sc_col, dc_col;
  logic [NMEM-1:0][L-1:0] sm_col, sp_col, dm_col, dp_col;
  always_comb begin
    for (int k = 0; k < int'(NMEM) + 2; k++) begin
      sc_col[k] = sc[((int'(proc_b) * NMEM + k - 1 + L) % L)];
      dc_col[k] = dc[((int'(proc_b) * NMEM + k - 1 + L) % L)];
    end
    for (int k = 0; k < int'(NMEM); k++) begin
      sm_col[k] = sm[(int'(proc_b) * NMEM + k)];
      sp_col[k] = sp[(int'(proc_b) * NMEM + k)];
      dm_col[k] = dm[(int'(proc_b) * NMEM + k)];
      dp_col[k] = dp[(int'(proc_b) * NMEM + k)];
    end
  end

  // ------------------------------------------------------- random numbers
  logic [NC-1:0][RW-1:0] rnd;
  rng_bank #(.NOUT(NC), .RW(RW), .RPW(RPW)) u_rng (
    .clk, .en(rng_en), .seed_we(seed_we && !busy), .seed_wheel, .seed_idx, .seed_data, .rnd);

  // ------------------------------------------------- update cells and LUTs
  logic [NC-1:0][LUT_AW-1:0] idx;
  logic [NC-1:0][RW-1:0]     lval;
  logic [NC-1:0]             s_new;
  logic [NMEM-1:0][L-1:0]    s_old;

  assign s_old = half ? q_a : p_a;

  for (genvar i = 0; i < int'(NLUT); i++) begin : g_lut
    prob_lut #(.RW(RW)) u_lut (
      .clk, .rst_n, .we(lut_we && !busy), .waddr(lut_addr), .wdata(lut_wdata),
      .raddr0(idx[2*i]), .rdata0(lval[2*i]), .raddr1(idx[2*i+1]), .rdata1(lval[2*i+1]));
  end

  for (genvar m = 0; m < int'(NMEM); m++) begin : g_col
    for (genvar y = 0; y < int'(L); y++) begin : g_row
      localparam int unsigned C  = m * L + y;
      localparam int unsigned YP = (y + 1) % L;
      localparam int unsigned YM = (y + L - 1) % L;
      logic [5:0] nb, jc, xn;
      // neighbour order: +x, -x, +y, -y, +z, -z
      assign nb = {sm_col[m][y], sp_col[m][y], sc_col[m+1][YM], sc_col[m+1][YP],
                   sc_col[m][y], sc_col[m+2][y]};
      assign xn = {dm_col[m][y], dp_col[m][y], dc_col[m+1][YM], dc_col[m+1][YP],
                   dc_col[m][y], dc_col[m+2][y]};
      if (m == 0) begin : g_edge
        assign jc = {jz_b[m][y], jz_a[m][y], jy_a[m][YM], jy_a[m][y],
                     jx_b[NMEM-1][y], jx_a[m][y]};
      end else begin : g_inner
        assign jc = {jz_b[m][y], jz_a[m][y], jy_a[m][YM], jy_a[m][y],
                     jx_a[m-1][y], jx_a[m][y]};
      end

      ising_update_cell #(.RW(RW)) u_cell (
        .algo, .field_en(field_en && HAS_FIELD), .s_old(s_old[m][y]), .x_self(dc_col[m+1][y]), .h_bit(h_a[m][y]),
        .nb, .jc, .xn, .lut_idx(idx[C]), .lut_val(lval[C]), .rnd(rnd[C]), .s_new(s_new[C]));

      assign new_word[m][y] = s_new[C];
    end
  end

  a_host_idle: assert property (@(posedge clk) disable iff (!rst_n) (host_we || host_re) |-> !busy)
    else $error("ising_engine: host access while a run is busy");

endmodule

// tb_spin_fpga_top_full: the top at its default configuration (Ising code,
// L = 32, N_B = 2: 16 memories per variable, 512 update cells, 6 wheels of 96
// numbers). One Metropolis sweep, one heat-bath sweep with field and one
// Metropolis sweep with field; all 65536 spins of the two replicas are checked
// against the reference model of engine_driver after each run, and the run
// length of 2*((L+3)*N_B+1) = 142 clocks per sweep is checked.
module tb_spin_fpga_top_full;
  import spin_pkg::*;
  localparam int L = L_DEF, NB = NB_DEF;
  localparam int NMEM = L / NB, AW = $clog2(L * NB), MW = $clog2(NMEM);

  logic clk = 0;
  always #5 clk = ~clk;

  logic rst_n, host_we, host_re, lut_we, seed_we, start, field_en, busy, done;
  mem_sel_e host_sel;
  algo_e algo;
  logic [MW-1:0] host_mem;
  logic [AW-1:0] host_addr;
  logic [L-1:0] host_wdata, host_rdata;
  logic [4:0] lut_addr;
  logic [31:0] lut_wdata, seed_data, n_sweeps, sweep_count;
  logic [7:0] seed_wheel;
  logic [5:0] seed_idx;

  spin_fpga_top dut (
    .clk, .rst_n, .host_we, .host_re, .host_var({2'b00, host_sel}), .host_mem, .host_addr,
    .host_wdata, .host_rdata, .lut_we, .lut_addr, .lut_wdata, .seed_we, .seed_wheel,
    .seed_idx, .seed_data, .start, .n_sweeps, .algo, .field_en, .busy, .done, .sweep_count);
  engine_driver #(.NS1(1), .NS2(1)) drv (.*);
endmodule

// tb_potts_engine: end-to-end check of the Potts engine at L = 8, N_B = 2
// (4 memories per bit plane, 32 update cells, wheels of 16 numbers), two runs
// of two sweeps, against the reference model of potts_driver.
module tb_potts_engine;
  localparam int L = 8, NB = 2, RPW = 16;
  localparam int NMEM = L / NB, AW = $clog2(L * NB), MW = $clog2(NMEM);

  logic clk = 0;
  always #5 clk = ~clk;

  logic rst_n, host_we, host_re, lut_we, seed_we, start, busy, done;
  logic [4:0] host_var, lut_addr;
  logic [MW-1:0] host_mem;
  logic [AW-1:0] host_addr;
  logic [L-1:0] host_wdata, host_rdata;
  logic [31:0] lut_wdata, seed_data, n_sweeps, sweep_count;
  logic [7:0] seed_wheel;
  logic [5:0] seed_idx;

  potts_engine #(.L(L), .NB(NB), .RPW(RPW)) dut (
    .clk, .rst_n, .host_we, .host_re, .host_var, .host_mem, .host_addr, .host_wdata,
    .host_rdata, .lut_we, .lut_addr(lut_addr[3:0]), .lut_wdata, .seed_we, .seed_wheel,
    .seed_idx, .seed_data, .start, .n_sweeps, .busy, .done, .sweep_count);
  potts_driver #(.L(L), .NB(NB), .RPW(RPW), .NS(2)) drv (.*);
endmodule

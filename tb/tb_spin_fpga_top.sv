// tb_spin_fpga_top: end-to-end test of both FPGA configurations at reduced
// size (L = 8, N_B = 2, wheels of 16 numbers). The Ising configuration runs
// Metropolis, heat bath with field and Metropolis with field (engine_driver);
// the Potts configuration runs two Metropolis runs (potts_driver). Every spin
// is compared with the reference models after every run, run lengths are
// checked, and each mechanism must have happened.
module tb_spin_fpga_top;
  import spin_pkg::*;
  localparam int L = 8, NB = 2, RPW = 16;
  localparam int NMEM = L / NB, AW = $clog2(L * NB), MW = $clog2(NMEM);

  logic clk = 0;
  always #5 clk = ~clk;

  // Ising configuration
  logic i_rst_n, i_host_we, i_host_re, i_lut_we, i_seed_we, i_start, i_field_en, i_busy, i_done;
  mem_sel_e i_host_sel;
  algo_e i_algo;
  logic [MW-1:0] i_host_mem;
  logic [AW-1:0] i_host_addr;
  logic [L-1:0] i_host_wdata, i_host_rdata;
  logic [4:0] i_lut_addr;
  logic [31:0] i_lut_wdata, i_seed_data, i_n_sweeps, i_sweep_count;
  logic [7:0] i_seed_wheel;
  logic [5:0] i_seed_idx;

  spin_fpga_top #(.MODEL(MODEL_ISING), .L(L), .NB(NB), .RPW(RPW)) dut_ising (
    .clk, .rst_n(i_rst_n), .host_we(i_host_we), .host_re(i_host_re),
    .host_var({2'b00, i_host_sel}), .host_mem(i_host_mem), .host_addr(i_host_addr),
    .host_wdata(i_host_wdata), .host_rdata(i_host_rdata), .lut_we(i_lut_we),
    .lut_addr(i_lut_addr), .lut_wdata(i_lut_wdata), .seed_we(i_seed_we),
    .seed_wheel(i_seed_wheel), .seed_idx(i_seed_idx), .seed_data(i_seed_data),
    .start(i_start), .n_sweeps(i_n_sweeps), .algo(i_algo), .field_en(i_field_en),
    .busy(i_busy), .done(i_done), .sweep_count(i_sweep_count));

  engine_driver #(.L(L), .NB(NB), .RPW(RPW), .NS1(2), .NS2(2), .FINISH(0)) drv_ising (
    .clk, .rst_n(i_rst_n), .host_we(i_host_we), .host_re(i_host_re), .host_sel(i_host_sel),
    .host_mem(i_host_mem), .host_addr(i_host_addr), .host_wdata(i_host_wdata),
    .host_rdata(i_host_rdata), .lut_we(i_lut_we), .lut_addr(i_lut_addr),
    .lut_wdata(i_lut_wdata), .seed_we(i_seed_we), .seed_wheel(i_seed_wheel),
    .seed_idx(i_seed_idx), .seed_data(i_seed_data), .start(i_start), .n_sweeps(i_n_sweeps),
    .algo(i_algo), .field_en(i_field_en), .busy(i_busy), .done(i_done),
    .sweep_count(i_sweep_count));

  // Potts configuration
  logic p_rst_n, p_host_we, p_host_re, p_lut_we, p_seed_we, p_start, p_busy, p_done;
  logic [4:0] p_host_var, p_lut_addr;
  logic [MW-1:0] p_host_mem;
  logic [AW-1:0] p_host_addr;
  logic [L-1:0] p_host_wdata, p_host_rdata;
  logic [31:0] p_lut_wdata, p_seed_data, p_n_sweeps, p_sweep_count;
  logic [7:0] p_seed_wheel;
  logic [5:0] p_seed_idx;

  spin_fpga_top #(.MODEL(MODEL_POTTS), .L(L), .NB(NB), .RPW(RPW)) dut_potts (
    .clk, .rst_n(p_rst_n), .host_we(p_host_we), .host_re(p_host_re), .host_var(p_host_var),
    .host_mem(p_host_mem), .host_addr(p_host_addr), .host_wdata(p_host_wdata),
    .host_rdata(p_host_rdata), .lut_we(p_lut_we), .lut_addr(p_lut_addr),
    .lut_wdata(p_lut_wdata), .seed_we(p_seed_we), .seed_wheel(p_seed_wheel),
    .seed_idx(p_seed_idx), .seed_data(p_seed_data), .start(p_start), .n_sweeps(p_n_sweeps),
    .algo(ALG_METROPOLIS), .field_en(1'b0), .busy(p_busy), .done(p_done),
    .sweep_count(p_sweep_count));

  potts_driver #(.L(L), .NB(NB), .RPW(RPW), .NS(2), .FINISH(0)) drv_potts (
    .clk, .rst_n(p_rst_n), .host_we(p_host_we), .host_re(p_host_re), .host_var(p_host_var),
    .host_mem(p_host_mem), .host_addr(p_host_addr), .host_wdata(p_host_wdata),
    .host_rdata(p_host_rdata), .lut_we(p_lut_we), .lut_addr(p_lut_addr),
    .lut_wdata(p_lut_wdata), .seed_we(p_seed_we), .seed_wheel(p_seed_wheel),
    .seed_idx(p_seed_idx), .seed_data(p_seed_data), .start(p_start), .n_sweeps(p_n_sweeps),
    .busy(p_busy), .done(p_done), .sweep_count(p_sweep_count));

  initial begin
    fork
      wait (drv_ising.fin && drv_potts.fin);
      #5ms;
    join_any
    begin
      int checks, failures;
      checks   = drv_ising.checks + drv_potts.checks + 1;
      failures = drv_ising.failures + drv_potts.failures;
      if (!(drv_ising.fin && drv_potts.fin)) begin
        failures++;
        $display("watchdog expired");
      end
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    end
    $finish;
  end
endmodule

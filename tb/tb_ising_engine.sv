// tb_ising_engine: end-to-end runs of the engine at L = 8, N_B = 2
// (4 memories per variable, 32 update cells) with wheels of 16 numbers per
// clock (2 wheels), checked bit for bit against the reference model of
// engine_driver. Two builds: the general one with field and dilution
// memories, and the pure EA build without them.
module tb_ising_engine;
  import spin_pkg::*;
  localparam int L = 8, NB = 2, RPW = 16;
  localparam int NMEM = L / NB, AW = $clog2(L * NB), MW = $clog2(NMEM);

  logic clk = 0;
  always #5 clk = ~clk;

  // general build
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

  ising_engine #(.L(L), .NB(NB), .RPW(RPW)) dut (.*);
  engine_driver #(.L(L), .NB(NB), .RPW(RPW), .NS1(3), .NS2(2), .FINISH(0)) drv (.*);

  // EA build: no field, no dilution
  logic e_rst_n, e_host_we, e_host_re, e_lut_we, e_seed_we, e_start, e_field_en, e_busy, e_done;
  mem_sel_e e_host_sel;
  algo_e e_algo;
  logic [MW-1:0] e_host_mem;
  logic [AW-1:0] e_host_addr;
  logic [L-1:0] e_host_wdata, e_host_rdata;
  logic [4:0] e_lut_addr;
  logic [31:0] e_lut_wdata, e_seed_data, e_n_sweeps, e_sweep_count;
  logic [7:0] e_seed_wheel;
  logic [5:0] e_seed_idx;

  ising_engine #(.L(L), .NB(NB), .RPW(RPW), .HAS_FIELD(1'b0), .HAS_DILUTION(1'b0)) dut_ea (
    .clk, .rst_n(e_rst_n), .host_we(e_host_we), .host_re(e_host_re), .host_sel(e_host_sel),
    .host_mem(e_host_mem), .host_addr(e_host_addr), .host_wdata(e_host_wdata),
    .host_rdata(e_host_rdata), .lut_we(e_lut_we), .lut_addr(e_lut_addr),
    .lut_wdata(e_lut_wdata), .seed_we(e_seed_we), .seed_wheel(e_seed_wheel),
    .seed_idx(e_seed_idx), .seed_data(e_seed_data), .start(e_start), .n_sweeps(e_n_sweeps),
    .algo(e_algo), .field_en(e_field_en), .busy(e_busy), .done(e_done),
    .sweep_count(e_sweep_count));
  engine_driver #(.L(L), .NB(NB), .RPW(RPW), .NS1(2), .NS2(1), .FINISH(0), .EA_ONLY(1)) drv_ea (
    .clk, .rst_n(e_rst_n), .host_we(e_host_we), .host_re(e_host_re), .host_sel(e_host_sel),
    .host_mem(e_host_mem), .host_addr(e_host_addr), .host_wdata(e_host_wdata),
    .host_rdata(e_host_rdata), .lut_we(e_lut_we), .lut_addr(e_lut_addr),
    .lut_wdata(e_lut_wdata), .seed_we(e_seed_we), .seed_wheel(e_seed_wheel),
    .seed_idx(e_seed_idx), .seed_data(e_seed_data), .start(e_start), .n_sweeps(e_n_sweeps),
    .algo(e_algo), .field_en(e_field_en), .busy(e_busy), .done(e_done),
    .sweep_count(e_sweep_count));

  initial begin
    fork
      wait (drv.fin && drv_ea.fin);
      #5ms;
    join_any
    begin
      int checks, failures;
      checks   = drv.checks + drv_ea.checks + 1;
      failures = drv.failures + drv_ea.failures;
      if (!(drv.fin && drv_ea.fin)) begin
        failures++;
        $display("watchdog expired");
      end
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    end
    $finish;
  end
endmodule

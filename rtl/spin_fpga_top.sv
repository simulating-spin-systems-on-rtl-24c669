// spin_fpga_top: one FPGA of the machine, configured with one of the two
// simulation codes: the Ising-like engine (default, 512 updates per clock at
// L = 32) or the four-state Potts engine (256 updates per clock at L = 32).
// The choice is the MODEL parameter, standing for the choice of FPGA
// configuration; exactly one engine is built.
//
// The ports are the host load / read-back port, the LUT and RNG-seed load
// ports and the run control of the engine, in a common form:
//   host_var  Ising: 0 P, 1 Q, 2 Jx, 3 Jy, 4 Jz, 5 field, 6 dilution
//             Potts: 0/1 P bits, 2/3 Q bits, 4+k/12+k/20+k bit k of Jx/Jy/Jz
//   host_mem, host_addr: word address inside the variable, see lattice_mem
//   lut_addr  5 bits for Ising, the low 4 bits for Potts
//   algo, field_en: Ising only
// The host side (the paper's I/O interface to the host computer) and the
// clock generation are outside this module. Timing: a run of n sweeps takes
// n * 2*((L+3)*N_B+1) clocks from start to done.
module spin_fpga_top #(
  parameter spin_pkg::model_e MODEL = spin_pkg::MODEL_ISING,
  parameter int unsigned L   = spin_pkg::L_DEF,
  parameter int unsigned NB  = (MODEL == spin_pkg::MODEL_ISING) ? spin_pkg::NB_DEF
                                                                : spin_pkg::POTTS_NB_DEF,
  parameter int unsigned RPW = spin_pkg::RPW_DEF,
  parameter int unsigned NMEM = L / NB,
  parameter int unsigned AW   = $clog2(L * NB),
  parameter int unsigned MW   = (NMEM > 1) ? $clog2(NMEM) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                host_we,
  input  logic                host_re,
  input  logic [4:0]          host_var,
  input  logic [MW-1:0]       host_mem,
  input  logic [AW-1:0]       host_addr,
  input  logic [L-1:0]        host_wdata,
  output logic [L-1:0]        host_rdata,
  input  logic                lut_we,
  input  logic [4:0]          lut_addr,
  input  logic [31:0]         lut_wdata,
  input  logic                seed_we,
  input  logic [7:0]          seed_wheel,
  input  logic [5:0]          seed_idx,
  input  logic [31:0]         seed_data,
  input  logic                start,
  input  logic [31:0]         n_sweeps,
  input  spin_pkg::algo_e     algo,
  input  logic                field_en,
  output logic                busy,
  output logic                done,
  output logic [31:0]         sweep_count
);
  import spin_pkg::*;

  if (MODEL == MODEL_ISING) begin : g_ising
    ising_engine #(.L(L), .NB(NB), .RPW(RPW)) u_engine (
      .clk, .rst_n, .host_we, .host_re, .host_sel(mem_sel_e'(host_var[2:0])), .host_mem,
      .host_addr, .host_wdata, .host_rdata, .lut_we, .lut_addr, .lut_wdata,
      .seed_we, .seed_wheel, .seed_idx, .seed_data, .start, .n_sweeps, .algo, .field_en,
      .busy, .done, .sweep_count);
  end else begin : g_potts
    potts_engine #(.L(L), .NB(NB), .RPW(RPW)) u_engine (
      .clk, .rst_n, .host_we, .host_re, .host_var, .host_mem,
      .host_addr, .host_wdata, .host_rdata, .lut_we, .lut_addr(lut_addr[3:0]), .lut_wdata,
      .seed_we, .seed_wheel, .seed_idx, .seed_data, .start, .n_sweeps,
      .busy, .done, .sweep_count);
  end

endmodule

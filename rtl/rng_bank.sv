// rng_bank: the set of Parisi-Rapuano wheels that feeds every update cell.
//
// NOUT random numbers are needed per clock (one per update cell); one wheel
// gives at most RPW of them, so NW = ceil(NOUT/RPW) wheels run side by side and
// rnd[c] is output c % RPW of wheel c / RPW. Outputs of the last wheel beyond
// NOUT are left unused. All wheels advance together on `en`. Each wheel is
// seeded separately through seed_wheel/seed_idx/seed_data (one word per clock).
//
// From the paper: several wheels active at once, up to 96 numbers per wheel.
// Design choice: the assignment of wheel outputs to cells.
module rng_bank #(
  parameter int unsigned NOUT = spin_pkg::L_DEF * spin_pkg::L_DEF / spin_pkg::NB_DEF,
  parameter int unsigned RW   = spin_pkg::RW_DEF,
  parameter int unsigned RPW  = spin_pkg::RPW_DEF,
  parameter int unsigned NW   = (NOUT + RPW - 1) / RPW
) (
  input  logic                                   clk,
  input  logic                                   en,
  input  logic                                   seed_we,
  input  logic [7:0]                             seed_wheel,
  input  logic [$clog2(spin_pkg::WHEEL_LEN)-1:0] seed_idx,
  input  logic [RW-1:0]                          seed_data,
  output logic [NOUT-1:0][RW-1:0]                rnd
);

  logic [NW-1:0][RPW-1:0][RW-1:0] wr;

  for (genvar w = 0; w < int'(NW); w++) begin : g_wheel
    pr_rng #(.RW(RW), .RPW(RPW)) u_wheel (
      .clk      (clk),
      .en       (en),
      .seed_we  (seed_we && (seed_wheel == 8'(w))),
      .seed_idx (seed_idx),
      .seed_data(seed_data),
      .rnd      (wr[w])
    );
  end

  always_comb
    for (int c = 0; c < int'(NOUT); c++) rnd[c] = wr[c / RPW][c % RPW];

  initial assert (NW <= 256) else $error("rng_bank: at most 256 wheels");

endmodule

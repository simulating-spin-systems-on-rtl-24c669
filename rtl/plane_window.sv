// plane_window: three-plane neighbour window over a streamed lattice memory.
//
// To update block b of horizontal plane z, the update cells need the
// neighbour-memory contents of planes z-1, z and z+1, including the columns
// just outside the block (x neighbours across a block edge). The memories give
// one block (L/N_B vertical planes x L bits) per clock, so this module
// assembles the blocks of one horizontal plane and, when the last block
// (in_blk == NB-1) arrives, shifts the whole plane into a three-deep window:
// plane_m <= plane_c <= plane_p <= new plane. Planes are indexed [x][y].
// Streaming planes L-1, 0, 1, ..., L-1, 0 therefore presents, after each
// shift, the window (z-1, z, z+1) with periodic wrap, for z = 0 .. L-1 in turn,
// while the next plane is being read: one memory word per memory per clock.
//
// This window is a choice of this design: the paper states that one word is
// read from each memory per clock but not how neighbours in the adjacent
// planes and blocks reach the cells.
module plane_window #(
  parameter int unsigned L  = spin_pkg::L_DEF,
  parameter int unsigned NB = spin_pkg::NB_DEF,
  parameter int unsigned NMEM = L / NB,
  parameter int unsigned BW = (NB > 1) ? $clog2(NB) : 1
) (
  input  logic                          clk,
  input  logic                          in_valid,
  input  logic [BW-1:0]                 in_blk,
  input  logic [NMEM-1:0][L-1:0]        in_data,
  output logic [L-1:0][L-1:0]           plane_m,
  output logic [L-1:0][L-1:0]           plane_c,
  output logic [L-1:0][L-1:0]           plane_p
);

  logic [L-1:0][L-1:0] asm_q;   // blocks 0 .. NB-2 of the plane being read
  logic [L-1:0][L-1:0] full;    // assembled plane including the arriving block

  always_comb begin
    full = asm_q;
    for (int m = 0; m < int'(NMEM); m++) full[(NB-1)*NMEM + m] = in_data[m];
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      if (in_blk == BW'(NB-1)) begin
        plane_p <= full;
        plane_c <= plane_p;
        plane_m <= plane_c;
      end else begin
        for (int m = 0; m < int'(NMEM); m++) asm_q[int'(in_blk)*NMEM + m] <= in_data[m];
      end
    end
  end

  initial assert (NMEM * NB == L) else $error("plane_window: NB must divide L");

endmodule

// lattice_mem: storage of one lattice variable (spins, one coupling
// direction, field or dilution) as L/N_B block memories.
//
// The L^3 bits are split over NMEM = L/N_B memories of L-bit words and depth
// L*N_B. Vertical plane x (all y, all z) goes to memory x mod NMEM; within it,
// the word at address z*N_B + x/NMEM holds the L bits along y. Presenting one
// address to all memories therefore returns one block, NMEM x L sites, of
// horizontal plane z in one clock. For L = 16, N_B = 1 this is 16 memories of
// 16 x 16 bits; for L = 32, N_B = 2 it is 16 memories of 32 bits x 64 words,
// planes x and x+16 interleaved word by word.
//
// Both ports share one address across all NMEM memories; port A writes a
// single memory (host loading, a_we one-hot), port B writes all memories with
// their own words (write-back of updated spins). Read latency is one clock.
//
// From the paper: the memory count, width, height and plane placement.
// Design choice: the word-interleaved order of the planes within a memory.
module lattice_mem #(
  parameter int unsigned L    = spin_pkg::L_DEF,
  parameter int unsigned NB   = spin_pkg::NB_DEF,
  parameter int unsigned NMEM = L / NB,
  parameter int unsigned AW   = $clog2(L * NB)
) (
  input  logic                    clk,
  input  logic [AW-1:0]           a_addr,
  input  logic [NMEM-1:0]         a_we,
  input  logic [L-1:0]            a_wdata,
  output logic [NMEM-1:0][L-1:0]  a_rdata,
  input  logic [AW-1:0]           b_addr,
  input  logic                    b_we,
  input  logic [NMEM-1:0][L-1:0]  b_wdata,
  output logic [NMEM-1:0][L-1:0]  b_rdata
);

  for (genvar m = 0; m < int'(NMEM); m++) begin : g_ram
    lattice_ram #(.W(L), .DEPTH(L * NB)) u_ram (
      .clk    (clk),
      .a_we   (a_we[m]),
      .a_addr (a_addr),
      .a_wdata(a_wdata),
      .a_rdata(a_rdata[m]),
      .b_we   (b_we),
      .b_addr (b_addr),
      .b_wdata(b_wdata[m]),
      .b_rdata(b_rdata[m])
    );
  end

endmodule

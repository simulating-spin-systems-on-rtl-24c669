// lattice_ram: one block memory of a lattice variable, two synchronous ports.
//
// W-bit words, DEPTH words. Port A and port B each read (registered output,
// one clock of latency) and write. For the spin memories W = L and
// DEPTH = L * N_B: memory m holds the vertical planes x with x mod (L/N_B) = m,
// the word at address z*N_B + x/(L/N_B) holding the L spins along y of that
// plane at height z. Reading one address from every memory yields one block of
// a horizontal plane. A write and a read of the same port return the old word
// (read-first). Writing both ports to one address in the same clock is an
// error and is flagged by an assertion.
//
// From the paper: word width L, height L x N_B, two accesses per block per
// clock. Design choice: read-first behaviour, no reset (contents are loaded).
module lattice_ram #(
  parameter int unsigned W     = spin_pkg::L_DEF,
  parameter int unsigned DEPTH = spin_pkg::L_DEF * spin_pkg::NB_DEF,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          a_we,
  input  logic [AW-1:0] a_addr,
  input  logic [W-1:0]  a_wdata,
  output logic [W-1:0]  a_rdata,
  input  logic          b_we,
  input  logic [AW-1:0] b_addr,
  input  logic [W-1:0]  b_wdata,
  output logic [W-1:0]  b_rdata
);

  logic [W-1:0] mem [DEPTH];

  // Both ports in one process so that the array has a single driver.
  always_ff @(posedge clk) begin
    a_rdata <= mem[a_addr];
    b_rdata <= mem[b_addr];
    if (a_we) mem[a_addr] <= a_wdata;
    if (b_we) mem[b_addr] <= b_wdata;
  end

  a_no_collision: assert property (@(posedge clk) !(a_we && b_we && a_addr == b_addr))
    else $error("lattice_ram: both ports write address %0d", a_addr);

endmodule

// prob_lut: one copy of the probability look-up table, read by two update cells.
//
// DEPTH words of RW bits. Each word is an acceptance probability (Metropolis)
// or the probability of spin up (heat bath) scaled by 2^RW; the update cell
// compares it with a random number. The table is written by the host one word
// per clock (we/waddr/wdata) and read asynchronously through two ports, as a
// small distributed memory in logic. Words are cleared by reset.
//
// From the paper: the energy value used as a pointer into a LUT, and the
// replication of the LUT so that each instance is read by only two cells.
// Design choice: 32 entries (5-bit index), asynchronous reads, host writes.
module prob_lut #(
  parameter int unsigned RW    = spin_pkg::RW_DEF,
  parameter int unsigned AW    = spin_pkg::LUT_AW,
  parameter int unsigned DEPTH = 1 << AW
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [RW-1:0] wdata,
  input  logic [AW-1:0] raddr0,
  output logic [RW-1:0] rdata0,
  input  logic [AW-1:0] raddr1,
  output logic [RW-1:0] rdata1
);

  logic [DEPTH-1:0][RW-1:0] tbl;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  tbl <= '0;
    else if (we) tbl[waddr] <= wdata;
  end

  assign rdata0 = tbl[raddr0];
  assign rdata1 = tbl[raddr1];

endmodule

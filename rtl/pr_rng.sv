// pr_rng: one Parisi-Rapuano random-number wheel producing RPW numbers per clock.
//
// The wheel holds the last LEN generated words, oldest in wheel[0]. Per clock
// the generator unrolls the recurrence RPW times in combinational logic:
//   I(k) = I(k-TA) + I(k-TB)          (mod 2^RW)
//   R(k) = I(k) ^ I(k-TC)
// Words generated early in the cascade feed later ones when RPW > TA, exactly
// as the cascade of adders and XOR gates of the paper's hardware drawing. When
// `en` is high the wheel shifts by RPW positions at the clock edge and the new
// words fill the vacated positions; rnd[] always shows the numbers of the
// current step, so a consumer uses rnd[] in the same cycle it raises `en`.
//
// From the paper: the taps 24/55/61, the 32-bit word, the 62 stored words, up
// to 96 numbers per clock, and loading of the wheel with externally generated
// random values (seed_we/seed_idx/seed_data, written one word per clock).
// Design choice: the order of the outputs (rnd[n] is the n-th new word) and
// that a seed write takes priority over `en`.
module pr_rng #(
  parameter int unsigned RW  = spin_pkg::RW_DEF,
  parameter int unsigned RPW = spin_pkg::RPW_DEF,
  parameter int unsigned LEN = spin_pkg::WHEEL_LEN,
  parameter int unsigned TA  = spin_pkg::TAP_A,
  parameter int unsigned TB  = spin_pkg::TAP_B,
  parameter int unsigned TC  = spin_pkg::TAP_C
) (
  input  logic                       clk,
  input  logic                       en,
  input  logic                       seed_we,
  input  logic [$clog2(LEN)-1:0]     seed_idx,
  input  logic [RW-1:0]              seed_data,
  output logic [RPW-1:0][RW-1:0]     rnd
);

  logic [LEN-1:0][RW-1:0]     wheel;
  logic [LEN+RPW-1:0][RW-1:0] ext;    // old words followed by the new ones

  always_comb begin
    ext = '0;
    for (int i = 0; i < int'(LEN); i++) ext[i] = wheel[i];
    for (int n = 0; n < int'(RPW); n++) begin
      ext[LEN+n] = ext[LEN+n-TA] + ext[LEN+n-TB];
      rnd[n]     = ext[LEN+n] ^ ext[LEN+n-TC];
    end
  end

  always_ff @(posedge clk) begin
    if (seed_we)
      wheel[seed_idx] <= seed_data;
    else if (en)
      for (int i = 0; i < int'(LEN); i++) wheel[i] <= ext[i+RPW];
  end

  initial begin
    assert (TA < TB && TB <= TC && TC <= LEN)
      else $error("pr_rng: taps must satisfy TA < TB <= TC <= LEN");
  end

endmodule

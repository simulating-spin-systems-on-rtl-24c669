// spin_pkg: shared constants and types of the Ising-like Monte Carlo engine.
//
// Default sizes follow the paper's reference configuration: a 3-D lattice of
// linear size L = 32 split into N_B = 2 blocks per horizontal plane, giving
// L/N_B = 16 memories per lattice variable and 16 x 32 = 512 update cells
// (512 spin updates per clock). The random number generator is the
// Parisi-Rapuano shift register I(k) = I(k-24) + I(k-55), R(k) = I(k) ^ I(k-61)
// on 32-bit words, with one wheel delivering up to 96 numbers per clock.
// The 5-bit LUT index (32 entries) and the memory-select encoding of the host
// port are choices of this design.
package spin_pkg;

  // Lattice geometry (paper: L = 32, N_B = 2 on the Virtex4-LX160).
  localparam int unsigned L_DEF  = 32;
  localparam int unsigned NB_DEF = 2;

  // Random numbers (paper: 32-bit words, taps 24/55/61, 62 stored words,
  // up to 96 numbers per wheel per clock).
  localparam int unsigned RW_DEF       = 32;
  localparam int unsigned WHEEL_LEN    = 62;
  localparam int unsigned TAP_A        = 24;
  localparam int unsigned TAP_B        = 55;
  localparam int unsigned TAP_C        = 61;
  localparam int unsigned RPW_DEF      = 96;

  // Probability look-up table: index = {field_bit, energy + 6}.
  localparam int unsigned LUT_AW = 5;
  localparam int unsigned LUT_DEPTH = 1 << LUT_AW;

  // Four-state Potts code (paper: 256 updates per clock at L = 32): 8
  // memories per bit plane, N_B = 4; energy index 0..12 in a 16-entry LUT.
  localparam int unsigned POTTS_NB_DEF  = 4;
  localparam int unsigned POTTS_LUT_AW  = 4;

  // Lattice variables reachable through the host load / read-back port.
  typedef enum logic [2:0] {
    MEM_P  = 3'd0,   // spins: whites of replica 1, blacks of replica 2
    MEM_Q  = 3'd1,   // spins: blacks of replica 1, whites of replica 2
    MEM_JX = 3'd2,   // coupling of bond (x,y,z)-(x+1,y,z)
    MEM_JY = 3'd3,   // coupling of bond (x,y,z)-(x,y+1,z)
    MEM_JZ = 3'd4,   // coupling of bond (x,y,z)-(x,y,z+1)
    MEM_H  = 3'd5,   // sign of the external field at the site
    MEM_X  = 3'd6    // dilution: 1 = site occupied
  } mem_sel_e;

  // Update rule selected at run time.
  typedef enum logic {
    ALG_METROPOLIS = 1'b0,
    ALG_HEATBATH   = 1'b1
  } algo_e;

  // Which simulation code the FPGA is configured with.
  typedef enum logic {
    MODEL_ISING = 1'b0,   // EA / RFIM / DAFF, Metropolis or heat bath
    MODEL_POTTS = 1'b1    // four-state glassy Potts, Metropolis
  } model_e;

endpackage

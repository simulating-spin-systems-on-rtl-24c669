// sweep_ctrl: sequencer of the Monte Carlo sweeps.
//
// One sweep is two half sweeps. In half 0 the P memory is updated (its
// neighbours all live in Q); in half 1 the Q memory is updated from P. A half
// sweep visits the L*N_B blocks (plane z, block b) in order z = 0..L-1, b
// inner, one block per clock, and lasts T_HALF = (L+3)*N_B + 1 clocks, t = 0..:
//   t in [0, (L+2)*N_B)          rd_*:   read the neighbour memory, planes
//                                        L-1, 0, 1, ..., L-1, 0, one block per
//                                        clock (feeds plane_window)
//   t in [1, (L+2)*N_B]          win_*:  the read data arrives at the window
//   t in [3*N_B, (L+3)*N_B)      pre_*:  address of block (z,b) presented to
//                                        the target spin, coupling and field
//                                        memories (data back next clock)
//   t in [3*N_B+1, (L+3)*N_B]    proc_*: block (z,b) is updated and written back
// so the update runs at one block per clock once the window is primed, and
// the first 3*N_B+1 clocks of a half prime the window. The run starts on a
// `start` pulse when idle, performs n_sweeps sweeps (n_sweeps = 0 does none),
// then raises `done` until the next start. rng_en equals proc_valid so each
// updated block consumes one set of random numbers.
//
// From the paper: the checkerboard split into two memories updated
// alternately and one block of L*L/N_B sites per clock. Design choice: the
// priming schedule and all timing above.
module sweep_ctrl #(
  parameter int unsigned L  = spin_pkg::L_DEF,
  parameter int unsigned NB = spin_pkg::NB_DEF,
  parameter int unsigned BW = (NB > 1) ? $clog2(NB) : 1,
  parameter int unsigned ZW = $clog2(L)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [31:0]   n_sweeps,
  output logic          busy,
  output logic          done,
  output logic          half,        // 0: updating P, 1: updating Q
  output logic [31:0]   sweep_count, // completed sweeps of the current run
  output logic          rd_valid,
  output logic [ZW-1:0] rd_plane,
  output logic [BW-1:0] rd_blk,
  output logic          win_valid,
  output logic [BW-1:0] win_blk,
  output logic          pre_valid,
  output logic [ZW-1:0] pre_z,
  output logic [BW-1:0] pre_b,
  output logic          proc_valid,
  output logic [ZW-1:0] proc_z,
  output logic [BW-1:0] proc_b,
  output logic          rng_en
);

  localparam int unsigned T_HALF = (L + 3) * NB + 1;
  localparam int unsigned TW = $clog2(T_HALF + 1);
  localparam int unsigned RD_END  = (L + 2) * NB;  // first t with no read
  localparam int unsigned PRE_BEG = 3 * NB;
  localparam int unsigned PRE_END = (L + 3) * NB;

  logic [TW-1:0] t;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy        <= 1'b0;
      done        <= 1'b0;
      half        <= 1'b0;
      sweep_count <= '0;
      t           <= '0;
      rd_plane    <= '0;
      rd_blk      <= '0;
      pre_z       <= '0;
      pre_b       <= '0;
      win_valid   <= 1'b0;
      win_blk     <= '0;
      proc_valid  <= 1'b0;
      proc_z      <= '0;
      proc_b      <= '0;
    end else begin
      // delayed copies: window input and update stage
      win_valid  <= rd_valid;
      win_blk    <= rd_blk;
      proc_valid <= pre_valid;
      proc_z     <= pre_z;
      proc_b     <= pre_b;

      if (!busy) begin
        if (start) begin
          done        <= (n_sweeps == 0);
          busy        <= (n_sweeps != 0);
          half        <= 1'b0;
          sweep_count <= '0;
          t           <= '0;
          rd_plane    <= ZW'(L - 1);
          rd_blk      <= '0;
          pre_z       <= '0;
          pre_b       <= '0;
        end
      end else begin
        // read stream position
        if (rd_valid) begin
          if (rd_blk == BW'(NB - 1)) begin
            rd_blk   <= '0;
            rd_plane <= (rd_plane == ZW'(L - 1)) ? '0 : rd_plane + 1'b1;
          end else begin
            rd_blk <= rd_blk + 1'b1;
          end
        end
        // update position
        if (pre_valid) begin
          if (pre_b == BW'(NB - 1)) begin
            pre_b <= '0;
            pre_z <= (pre_z == ZW'(L - 1)) ? '0 : pre_z + 1'b1;
          end else begin
            pre_b <= pre_b + 1'b1;
          end
        end
        // half / sweep boundaries
        if (t == TW'(T_HALF - 1)) begin
          t        <= '0;
          rd_plane <= ZW'(L - 1);
          rd_blk   <= '0;
          pre_z    <= '0;
          pre_b    <= '0;
          half     <= ~half;
          if (half) begin
            sweep_count <= sweep_count + 1;
            if (sweep_count + 1 == n_sweeps) begin
              busy <= 1'b0;
              done <= 1'b1;
            end
          end
        end else begin
          t <= t + 1'b1;
        end
      end
    end
  end

  assign rd_valid  = busy && (t < TW'(RD_END));
  assign pre_valid = busy && (t >= TW'(PRE_BEG)) && (t < TW'(PRE_END));
  assign rng_en    = proc_valid;

  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy)
    else $error("sweep_ctrl: start while busy is ignored");

  initial assert (L % NB == 0 && L % 2 == 0 && L >= 4)
    else $error("sweep_ctrl: L must be even, at least 4 and a multiple of NB");

endmodule

// meas_sequencer: electrode multiplexing and measurement sequencing.
//
// Sixteen current and sixteen voltage electrodes are reached through four
// 8-to-1 analog multiplexers: for each kind, one multiplexer serves the
// odd-numbered electrodes (1, 3, .. 15) and one the even-numbered ones, so
// only odd/even pairs can be formed. A current pair is (c, c+i_skip) and a
// voltage pair (v, v+v_skip), electrode numbers modulo 16; the skips must be
// odd (1 = adjacent, the standard protocol; 7 = the wider voltage spacing
// used on the thorax). For every current pair c = 0..15 the voltage pairs
// v = 0..15 are visited and a measurement is made when
//   - the voltage pair shares no electrode with the current pair, and
//   - no_recip is clear, or v > c (the reciprocal (v, c) is then skipped).
// With adjacent pairs this gives 16 x 13 = 208 measurements per frame, or
// 104 without reciprocals. After each multiplexer switch the sequencer waits
// settle_cycles clocks for filters and switches to settle, waits until the
// acquisition path is idle, pulses acq_start together with the measurement's
// tag (`chan`), and moves on when acq_captured reports that the record is
// in. One candidate pair is examined per clock. frame_done pulses at the end
// of each frame; frames repeat while `run` is set.
// The odd/even multiplexing, the 16 x 13 frame, the settling pause and the
// optional omission of reciprocal measurements follow the published system.
// Which multiplexer feeds the + input is not given: here the odd-numbered
// electrode is +, and chan.i_pol / chan.v_pol flag pairs whose protocol
// order is the reverse, so the host can flip the sign.
module meas_sequencer
  import eit_pkg::*;
#(
  parameter int unsigned SETTLE_W = 24
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                run,
  input  logic [3:0]          i_skip,
  input  logic [3:0]          v_skip,
  input  logic                no_recip,
  input  logic [SETTLE_W-1:0] settle_cycles,
  output logic [SEL_W-1:0]    mux_i_odd,
  output logic [SEL_W-1:0]    mux_i_even,
  output logic [SEL_W-1:0]    mux_v_odd,
  output logic [SEL_W-1:0]    mux_v_even,
  output logic                mux_en,
  input  logic                acq_idle,
  output logic                acq_start,
  input  logic                acq_captured,
  output chan_t               chan,
  output logic                frame_done
);

  typedef enum logic [2:0] {S_IDLE, S_FIND, S_SETTLE, S_WAIT_IDLE, S_WAIT_CAP, S_NEXT} state_t;
  state_t state;

  logic [3:0]          ci, vi;           // first electrode of current / voltage pair (0-based)
  logic [3:0]          ci2, vi2;
  logic [15:0]         frame;
  logic [SETTLE_W-1:0] settle_cnt;
  logic                valid_pair, last_pair;

  assign ci2 = ci + i_skip;
  assign vi2 = vi + v_skip;

  always_comb begin
    valid_pair = (ci[0] != ci2[0]) && (vi[0] != vi2[0])      // odd/even only
              && (vi != ci) && (vi != ci2) && (vi2 != ci) && (vi2 != ci2)
              && (!no_recip || vi > ci);
    last_pair  = (ci == 4'd15) && (vi == 4'd15);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      ci         <= '0;
      vi         <= '0;
      frame      <= '0;
      settle_cnt <= '0;
      acq_start  <= 1'b0;
      frame_done <= 1'b0;
      mux_en     <= 1'b0;
      mux_i_odd  <= '0;
      mux_i_even <= '0;
      mux_v_odd  <= '0;
      mux_v_even <= '0;
      chan       <= '0;
    end else begin
      acq_start  <= 1'b0;
      frame_done <= 1'b0;
      unique case (state)
        S_IDLE: if (run) begin
          state <= S_FIND;
          ci    <= '0;
          vi    <= '0;
        end
        S_FIND: begin
          if (valid_pair) begin
            // switch the multiplexers (0-based even index = odd electrode number)
            mux_i_odd  <= ci[0] ? ci2[3:1] : ci[3:1];
            mux_i_even <= ci[0] ? ci[3:1]  : ci2[3:1];
            mux_v_odd  <= vi[0] ? vi2[3:1] : vi[3:1];
            mux_v_even <= vi[0] ? vi[3:1]  : vi2[3:1];
            mux_en     <= 1'b1;
            settle_cnt <= settle_cycles;
            state      <= S_SETTLE;
          end else begin
            state <= S_NEXT;
          end
        end
        S_SETTLE: begin
          if (settle_cnt == '0) state <= S_WAIT_IDLE;
          else settle_cnt <= settle_cnt - SETTLE_W'(1);
        end
        S_WAIT_IDLE: if (acq_idle) begin
          acq_start <= 1'b1;
          chan      <= '{frame: frame, i_elec: ci, v_elec: vi, i_pol: ci[0], v_pol: vi[0]};
          state     <= S_WAIT_CAP;
        end
        S_WAIT_CAP: if (acq_captured) state <= S_NEXT;
        S_NEXT: begin
          vi <= vi + 4'd1;
          if (vi == 4'd15) ci <= ci + 4'd1;
          if (last_pair) begin
            frame      <= frame + 16'd1;
            frame_done <= 1'b1;
            state      <= run ? S_FIND : S_IDLE;
            if (!run) mux_en <= 1'b0;
          end else begin
            state <= S_FIND;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A new acquisition is only started when the acquisition path is idle.
  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) $rose(acq_start) |-> $past(acq_idle));

endmodule

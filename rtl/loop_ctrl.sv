// loop_ctrl: sequencer of the closed-loop optimization.
//
// One iteration optimizes one Hadamard mode and follows the published timing
// diagram row by row:
//   S_PROBE_XFER   probe mask (mode pixels + 2*pi) streamed to the SLM, 13 us
//   S_MEASURE      mirror ramps 0 -> 2*pi; three DAQ triggers; 68 us window
//   S_WAIT_DAQ     the DAQ returns the three samples (49 us in the paper;
//                  here the wait lasts until they arrive)
//   S_COMPUTE      three-phase interferometry, a few clocks
//   S_UPDATE_XFER  optimum phase added to the mode pixels, mask streamed, 13 us
//   S_SETTLE       T_SETTLE (100 us) for the mirror to reach the new mask;
//                  the next Hadamard mode is computed meanwhile
// giving 13 + 68 + 49 + 13 + 100 = 243 us per mode with the DAQ of the paper.
// Modes 1 .. N_PIX-1 are visited in order; after the last one the basis
// restarts at mode 1 and `sweep_count` increments. Mode 0 (all pixels) is
// only a global phase and is skipped: this design's choice.
// Control: `run` is a level. Raising it in S_IDLE starts (or resumes) the
// optimization; dropping it lets the current iteration finish (S_SETTLE or
// S_WAIT_DAQ return to S_IDLE) so the SLM always holds a complete mask. The
// paper stops the process by hand when the gain is stable; the run level is
// how this design takes that command. `clear_mask` in S_IDLE flattens the
// mask and resets the mode index to the first mode.
// Handshakes with the datapath blocks are single-cycle start/done pulses.
module loop_ctrl #(
  parameter int unsigned N_PIX    = wfs_pkg::N_PIX,
  parameter int unsigned T_SETTLE = wfs_pkg::T_SETTLE_CYC,
  localparam int unsigned AW = $clog2(N_PIX),
  localparam int unsigned SW = $clog2(T_SETTLE + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          run,
  input  logic          clear_mask,
  // phase mask memory clear
  output logic          clr_start,
  input  logic          clr_busy,
  // Hadamard mode generator
  output logic          had_start,
  output logic [AW-1:0] had_mode,
  input  logic          had_busy,
  input  logic          had_done,
  // mask streamer
  output logic          str_start,
  output logic          str_update,
  input  logic          str_done,
  // DAQ triggers and samples
  output logic          trg_start,
  input  logic          trg_done,
  output logic          rx_arm,
  input  logic          rx_ready,
  // phase estimator
  output logic          psi_start,
  input  logic          psi_done,
  // status
  output wfs_pkg::loop_state_t state,
  output logic [AW-1:0] mode_idx,
  output logic [31:0]   iter_count,
  output logic [15:0]   sweep_count
);
  import wfs_pkg::*;

  logic [SW-1:0] settle_cnt;
  logic          mode_ready;   // mode buffer holds mode_idx
  logic [AW-1:0] next_mode;

  assign next_mode = (mode_idx == AW'(N_PIX - 1)) ? AW'(1) : mode_idx + 1'b1;
  assign had_mode  = (state == S_SETTLE) ? next_mode : mode_idx;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      mode_idx    <= AW'(1);
      mode_ready  <= 1'b0;
      settle_cnt  <= '0;
      iter_count  <= '0;
      sweep_count <= '0;
      clr_start   <= 1'b0;
      had_start   <= 1'b0;
      str_start   <= 1'b0;
      str_update  <= 1'b0;
      trg_start   <= 1'b0;
      rx_arm      <= 1'b0;
      psi_start   <= 1'b0;
    end else begin
      clr_start <= 1'b0;
      had_start <= 1'b0;
      str_start <= 1'b0;
      trg_start <= 1'b0;
      rx_arm    <= 1'b0;
      psi_start <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (clear_mask) begin
            clr_start  <= 1'b1;
            mode_idx   <= AW'(1);
            mode_ready <= 1'b0;
            state      <= S_CLEAR;
          end else if (run) begin
            if (mode_ready) begin
              str_start  <= 1'b1;
              str_update <= 1'b0;
              state      <= S_PROBE_XFER;
            end else begin
              had_start <= 1'b1;
              state     <= S_GEN_FIRST;
            end
          end
        end
        S_CLEAR: begin
          if (!clr_busy && !clr_start) state <= S_IDLE;
        end
        S_GEN_FIRST: begin
          if (had_done) begin
            mode_ready <= 1'b1;
            str_start  <= 1'b1;
            str_update <= 1'b0;
            state      <= S_PROBE_XFER;
          end
        end
        S_PROBE_XFER: begin
          if (str_done) begin
            trg_start <= 1'b1;
            rx_arm    <= 1'b1;
            state     <= S_MEASURE;
          end
        end
        S_MEASURE: begin
          if (trg_done) state <= S_WAIT_DAQ;
        end
        S_WAIT_DAQ: begin
          if (rx_ready) begin
            psi_start <= 1'b1;
            state     <= S_COMPUTE;
          end else if (!run) begin
            state <= S_IDLE;   // abandon the iteration, mask unchanged
          end
        end
        S_COMPUTE: begin
          if (psi_done) begin
            str_start  <= 1'b1;
            str_update <= 1'b1;
            state      <= S_UPDATE_XFER;
          end
        end
        S_UPDATE_XFER: begin
          if (str_done) begin
            settle_cnt <= '0;
            had_start  <= 1'b1;     // next mode, computed during the settling
            mode_ready <= 1'b0;
            state      <= S_SETTLE;
          end
        end
        S_SETTLE: begin
          if (settle_cnt != SW'(T_SETTLE - 1)) settle_cnt <= settle_cnt + 1'b1;
          if (settle_cnt == SW'(T_SETTLE - 1) && !had_busy && !had_start) begin
            mode_idx   <= next_mode;
            mode_ready <= 1'b1;
            iter_count <= iter_count + 1'b1;
            if (mode_idx == AW'(N_PIX - 1)) sweep_count <= sweep_count + 1'b1;
            if (run) begin
              str_start  <= 1'b1;
              str_update <= 1'b0;
              state      <= S_PROBE_XFER;
            end else begin
              state <= S_IDLE;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule

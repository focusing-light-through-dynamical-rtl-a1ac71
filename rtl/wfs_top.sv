// wfs_top: FPGA closed-loop wavefront optimizer for a MEMS phase modulator.
//
// The design focuses light through a scattering sample by optimizing the SLM
// phase mask one Hadamard mode at a time. Each iteration dephases half of
// the pixels (one Hadamard mode) from 0 to 2*pi, has the DAQ sample a
// single-speckle PMT signal at 0, 2*pi/3 and 4*pi/3, computes from the three
// values the phase that maximizes the signal, adds that phase to the mode's
// pixels and sends the new mask. With the default timing (80 MHz clock) an
// iteration lasts 243 us, the 4.1 kHz one-mode rate of the paper, when the
// DAQ returns its samples 49 us after the third trigger as in the paper.
//
// Blocks: loop_ctrl (sequencer), hadamard_gen (mode buffer), phase_mask_mem
// (current mask), mask_streamer (SLM transfers and mask update),
// daq_trigger_gen (acquisition triggers), daq_rx (sample receiver),
// psi3_phase (three-phase interferometry).
//
// External interfaces:
//   SLM    slm_valid/slm_addr/slm_code/slm_last, one pixel word per clock,
//          code = phase in units of 2*pi/2^PW (0 .. 4*pi, PW+1 bits); the
//          SLM driver turns codes into actuator voltages.
//   DAQ    daq_trig (pulse per acquisition, daq_trig_idx = 0..2) out;
//          daq_valid/daq_data sample stream in, three words per iteration.
//   Host   run (level), clear_mask (pulse while idle) and status outputs.
module wfs_top #(
  parameter int unsigned GRID     = wfs_pkg::GRID,
  parameter int unsigned PW       = wfs_pkg::PW,
  parameter int unsigned IW       = wfs_pkg::IW,
  parameter int unsigned T_RAMP   = wfs_pkg::T_RAMP_CYC,
  parameter int unsigned T_MEAS   = wfs_pkg::T_MEAS_CYC,
  parameter int unsigned T_SETTLE = wfs_pkg::T_SETTLE_CYC,
  parameter int unsigned TRIG_W   = wfs_pkg::TRIG_W_CYC,
  localparam int unsigned N_PIX = GRID * GRID,
  localparam int unsigned AW    = $clog2(N_PIX)
) (
  input  logic          clk,
  input  logic          rst_n,
  // host control and status
  input  logic          run,
  input  logic          clear_mask,
  output wfs_pkg::loop_state_t state,
  output logic [AW-1:0] mode_idx,
  output logic [31:0]   iter_count,
  output logic [15:0]   sweep_count,
  output logic [PW-1:0] last_phase,
  output logic [15:0]   daq_overrun,
  // SLM pixel stream
  output logic          slm_valid,
  output logic [AW-1:0] slm_addr,
  output logic [PW:0]   slm_code,
  output logic          slm_last,
  // DAQ
  output logic          daq_trig,
  output logic [1:0]    daq_trig_idx,
  input  logic          daq_valid,
  input  logic [IW-1:0] daq_data
);

  // controller handshakes
  logic          clr_start, clr_busy;
  logic          had_start, had_busy, had_done;
  logic [AW-1:0] had_mode;
  logic          str_start, str_update, str_done, str_busy;
  logic          trg_start, trg_done, trg_busy;
  logic          rx_arm, rx_ready, rx_done;
  logic          psi_start, psi_done, psi_busy;
  // datapath
  logic [AW-1:0] mem_rd_addr, mem_wr_addr, mode_rd_addr;
  logic [PW-1:0] mem_rd_data, mem_wr_data;
  logic          mem_we, mode_rd_bit;
  logic [IW-1:0] s0, s1, s2;

  loop_ctrl #(.N_PIX(N_PIX), .T_SETTLE(T_SETTLE)) u_ctrl (
    .clk, .rst_n, .run, .clear_mask,
    .clr_start, .clr_busy,
    .had_start, .had_mode, .had_busy, .had_done,
    .str_start, .str_update, .str_done,
    .trg_start, .trg_done,
    .rx_arm, .rx_ready,
    .psi_start, .psi_done,
    .state, .mode_idx, .iter_count, .sweep_count
  );

  hadamard_gen #(.N_PIX(N_PIX)) u_had (
    .clk, .rst_n, .start(had_start), .mode_idx(had_mode),
    .busy(had_busy), .done(had_done),
    .rd_addr(mode_rd_addr), .rd_bit(mode_rd_bit)
  );

  phase_mask_mem #(.N_PIX(N_PIX), .PW(PW)) u_mem (
    .clk, .rst_n,
    .rd_addr(mem_rd_addr), .rd_data(mem_rd_data),
    .we(mem_we), .wr_addr(mem_wr_addr), .wr_data(mem_wr_data),
    .clr(clr_start), .clr_busy
  );

  mask_streamer #(.GRID(GRID), .PW(PW)) u_str (
    .clk, .rst_n, .start(str_start), .update(str_update), .phase_opt(last_phase),
    .busy(str_busy), .done(str_done),
    .mem_rd_addr, .mem_rd_data, .mem_we, .mem_wr_addr, .mem_wr_data,
    .mode_rd_addr, .mode_rd_bit,
    .slm_valid, .slm_addr, .slm_code, .slm_last
  );

  daq_trigger_gen #(.T_RAMP(T_RAMP), .T_MEAS(T_MEAS), .TRIG_W(TRIG_W)) u_trg (
    .clk, .rst_n, .start(trg_start), .busy(trg_busy),
    .trig(daq_trig), .trig_idx(daq_trig_idx), .done(trg_done)
  );

  daq_rx #(.IW(IW)) u_rx (
    .clk, .rst_n, .arm(rx_arm), .s_valid(daq_valid), .s_data(daq_data),
    .i0(s0), .i1(s1), .i2(s2), .ready(rx_ready), .done(rx_done),
    .overrun(daq_overrun)
  );

  psi3_phase #(.IW(IW), .PW(PW)) u_psi (
    .clk, .rst_n, .start(psi_start), .i0(s0), .i1(s1), .i2(s2),
    .busy(psi_busy), .done(psi_done), .phase(last_phase)
  );

  // The streamer only runs in its two transfer states.
  assert property (@(posedge clk) disable iff (!rst_n)
                   str_busy |-> (state == wfs_pkg::S_PROBE_XFER ||
                                 state == wfs_pkg::S_UPDATE_XFER))
    else $error("wfs_top: SLM transfer outside a transfer state");
  // The sequencer never restarts a busy trigger window or estimator.
  assert property (@(posedge clk) disable iff (!rst_n) trg_start |-> !trg_busy)
    else $error("wfs_top: trigger window restarted while running");
  assert property (@(posedge clk) disable iff (!rst_n) psi_start |-> !psi_busy)
    else $error("wfs_top: estimator restarted while running");
  // A sample set never completes while the estimator is working on the last.
  assert property (@(posedge clk) disable iff (!rst_n) rx_done |-> !psi_busy)
    else $error("wfs_top: samples replaced during the estimate");
  // The mode buffer is never rewritten while a transfer reads it.
  assert property (@(posedge clk) disable iff (!rst_n) !(had_busy && str_busy))
    else $error("wfs_top: mode buffer written during an SLM transfer");

endmodule

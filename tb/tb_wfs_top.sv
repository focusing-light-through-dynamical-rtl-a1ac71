// tb_wfs_top: end-to-end test of the optimizer in closed loop with the
// behavioural mirror / scattering sample / PMT / DAQ model, at a reduced
// size: an 8 x 8 array (60 segments, 63 Hadamard modes) and all times scaled
// down (ramp and settling 300 clocks, window 204, DAQ latency 147).
// It checks
//  * that the focus intensity rises from a speckle value to an enhancement
//    of at least 15 (ideal phase-only maximum for 60 segments: about 47),
//  * every probe word: code = stored phase + 2*pi exactly on the pixels of
//    the current Walsh mode (parity of mode & address), 60 words per frame,
//  * the iteration period: two transfers, the window, the DAQ latency and
//    the settling, plus at most 40 clocks of handshakes and estimate,
//  * and it makes each mechanism happen, counting them: iterations, basis
//    restarts, probe and update transfers, triggers, a stop with the run
//    level, a resume, an abandoned wait for a stalled DAQ, a DAQ overrun
//    and a mask clear that restarts the basis and restores the speckle.
module tb_wfs_top;
  import wfs_pkg::*;
  localparam int unsigned GRID = 8, PW = 8, IW = 16;
  localparam int unsigned T_RAMP = 300, T_MEAS = 204, T_SETTLE = 300, TRIG_W = 4;
  localparam int unsigned DAQ_DELAY = 147;
  localparam int unsigned N_PIX = GRID * GRID, AW = $clog2(N_PIX);
  localparam int unsigned N_MODES = N_PIX - 1;

  logic clk = 1'b0, rst_n = 1'b0, run = 1'b0, clear_mask = 1'b0;
  loop_state_t state;
  logic [AW-1:0] mode_idx, slm_addr;
  logic [31:0] iter_count;
  logic [15:0] sweep_count, daq_overrun;
  logic [PW-1:0] last_phase;
  logic slm_valid, slm_last, daq_trig, daq_valid;
  logic [PW:0] slm_code;
  logic [1:0] daq_trig_idx;
  logic [IW-1:0] daq_data;
  logic inject_extra = 1'b0, hold_daq = 1'b0, probe_req = 1'b0;
  logic [31:0] focus_milli, mean_milli;

  int checks = 0, failures = 0;

  wfs_top #(.GRID(GRID), .PW(PW), .IW(IW), .T_RAMP(T_RAMP), .T_MEAS(T_MEAS),
            .T_SETTLE(T_SETTLE), .TRIG_W(TRIG_W)) dut (.*);

  tb_optics_daq_model #(.GRID(GRID), .PW(PW), .IW(IW), .T_MOVE(T_RAMP),
                        .DAQ_DELAY(DAQ_DELAY), .SEED(7)) u_model (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---- monitors ---------------------------------------------------------
  int cyc = 0, words = 0, n_probe = 0, n_update = 0, n_trig = 0, n_restart = 0;
  int n_stop = 0, n_resume = 0, n_abort = 0, n_overrun = 0, n_clear = 0;
  int last_probe_end = -1, period_min = 1 << 30, period_max = 0;
  bit trig_q = 1'b0, track_period = 1'b0;
  logic [15:0] sweep_q = '0;

  always @(negedge clk) begin
    cyc++;
    if (rst_n) begin
      if (daq_trig && !trig_q) n_trig++;
      trig_q = daq_trig;
      if (sweep_count != sweep_q) n_restart++;
      sweep_q = sweep_count;
      if (slm_valid) begin
        words++;
        if (state == S_PROBE_XFER)
          check(slm_code[PW] == 1'($countones(mode_idx & slm_addr) % 2),
                $sformatf("probe word %0d of mode %0d", slm_addr, mode_idx));
        else
          check(slm_code[PW] == 1'b0, "update word above 2*pi");
        if (slm_last) begin
          check(words == N_PIX - 4, $sformatf("%0d words in a frame", words));
          words = 0;
          if (state == S_PROBE_XFER) begin
            n_probe++;
            if (track_period && last_probe_end >= 0) begin
              if (cyc - last_probe_end < period_min) period_min = cyc - last_probe_end;
              if (cyc - last_probe_end > period_max) period_max = cyc - last_probe_end;
            end
            last_probe_end = cyc;
          end else begin
            n_update++;
          end
        end
      end
    end
  end

  task automatic enhancement(output real e);
    @(negedge clk);
    probe_req = 1'b1;
    @(negedge clk);
    probe_req = 1'b0;
    @(negedge clk);
    e = real'(focus_milli) / real'(mean_milli);
  endtask

  task automatic stop_and_settle();
    wait (state == S_UPDATE_XFER);
    @(negedge clk);
    run = 1'b0;
    wait (state == S_IDLE);
    n_stop++;
    repeat (T_RAMP + 10) @(negedge clk);
  endtask

  // ---- scenario ---------------------------------------------------------
  initial begin
    real e0, e1, e2, e3;
    int it0, lo;
    repeat (5) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    clear_mask = 1'b1;
    @(negedge clk);
    clear_mask = 1'b0;
    wait (state == S_IDLE);
    n_clear++;
    enhancement(e0);
    $display("initial speckle: enhancement %0.2f", e0);

    // optimize two full sweeps of the basis
    run = 1'b1;
    track_period = 1'b1;
    wait (iter_count >= 32'(2 * N_MODES));
    track_period = 1'b0;
    stop_and_settle();
    enhancement(e1);
    $display("after %0d iterations: enhancement %0.2f", iter_count, e1);
    check(e1 >= 15.0 && e1 > 4.0 * e0, $sformatf("enhancement %0.2f from %0.2f", e1, e0));
    check(sweep_count == 16'd2, $sformatf("sweep_count %0d", sweep_count));
    lo = 2 * (N_PIX + 1) + T_MEAS + DAQ_DELAY + T_SETTLE;
    check(period_min >= lo && period_max <= lo + 40,
          $sformatf("iteration period %0d..%0d, expected %0d..%0d", period_min, period_max, lo, lo + 40));

    // a spurious DAQ word while idle
    @(negedge clk);
    inject_extra = 1'b1;
    @(negedge clk);
    inject_extra = 1'b0;
    @(negedge clk);
    check(daq_overrun == 16'd1, "overrun not counted");
    n_overrun++;

    // resume, then stall the DAQ and abandon the wait
    run = 1'b1;
    n_resume++;
    wait (state == S_MEASURE);
    hold_daq = 1'b1;
    wait (state == S_WAIT_DAQ);
    repeat (DAQ_DELAY + 50) @(negedge clk);
    it0 = int'(iter_count);
    run = 1'b0;
    repeat (2) @(negedge clk);
    check(state == S_IDLE && int'(iter_count) == it0, "stalled wait not abandoned");
    n_abort++;
    hold_daq = 1'b0;          // the late samples reach the still-armed receiver;
    repeat (10) @(negedge clk);  // the next window re-arms it, so they are unused
    check(daq_overrun == 16'd1, $sformatf("overrun %0d after late samples", daq_overrun));

    // the abandoned iteration left the mask as it was
    repeat (T_RAMP + 10) @(negedge clk);
    enhancement(e2);
    check(e2 > 0.5 * e1, $sformatf("enhancement %0.2f after abandoned iteration", e2));

    // clear: basis restarts at mode 1, a flat mask brings the speckle back
    clear_mask = 1'b1;
    @(negedge clk);
    clear_mask = 1'b0;
    wait (state == S_IDLE);
    n_clear++;
    check(mode_idx == AW'(1), "clear did not restart the basis");
    run = 1'b1;
    it0 = int'(iter_count);
    // re-optimize one sweep from the flat mask
    wait (iter_count >= 32'(it0 + N_MODES));
    stop_and_settle();
    enhancement(e3);
    $display("re-optimized: enhancement %0.2f", e3);
    check(e3 >= 10.0, $sformatf("enhancement %0.2f after one sweep", e3));

    // every mechanism happened
    check(iter_count > 0, "no iteration");
    check(n_restart >= 2, "basis never restarted");
    check(n_probe > 0 && n_update > 0, "no probe or update transfer");
    check(n_trig >= 3 * int'(iter_count), $sformatf("%0d triggers", n_trig));
    check(n_stop >= 2 && n_resume >= 1 && n_abort == 1 && n_overrun == 1 && n_clear == 2,
          "a control mechanism did not happen");
    $display("iterations=%0d restarts=%0d probes=%0d updates=%0d triggers=%0d stops=%0d resumes=%0d aborts=%0d overruns=%0d clears=%0d",
             iter_count, n_restart, n_probe, n_update, n_trig, n_stop, n_resume, n_abort,
             daq_overrun, n_clear);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (600000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

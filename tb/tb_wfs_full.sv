// tb_wfs_full: the optimizer at its default size and timing (32 x 32 array,
// 1020 segments, 1023 Hadamard modes, 80 MHz) in closed loop with the
// behavioural mirror / sample / PMT / DAQ model, the DAQ returning its
// samples 49 us (3920 clocks) after the end of the third measurement (68 us)
// as in the published system. After a mask clear the loop runs one full sweep of the basis.
// Checks: every iteration lasts 243 us +/- 1 us (19440 +/- 80 clocks), the
// published one-mode rate of 4.1 kHz; the focus enhancement after one
// sweep reaches at least 120 (the published single-sweep value, reached
// here without measurement noise); the sweep counter and the number of
// triggers and transfers match the number of iterations.
module tb_wfs_full;
  import wfs_pkg::*;
  localparam int unsigned AW = $clog2(N_PIX);
  localparam int unsigned N_MODES = N_PIX - 1;
  // The DAQ model counts from the third trigger (2*T_RAMP/3 = 5333 clocks);
  // the paper counts 49 us from the end of the third measurement at 68 us
  // (5440 clocks): 5440 - 5333 + 3920.
  localparam int unsigned DAQ_DELAY = T_MEAS_CYC - (2 * T_RAMP_CYC) / 3 + 3920;

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

  wfs_top dut (.*);

  tb_optics_daq_model #(.GRID(GRID), .PW(PW), .IW(IW), .T_MOVE(T_RAMP_CYC),
                        .DAQ_DELAY(DAQ_DELAY), .SEED(3)) u_model (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int cyc = 0, n_probe = 0, n_update = 0, n_trig = 0, last_probe = -1;
  int period_min = 1 << 30, period_max = 0;
  bit trig_q = 1'b0;
  always @(negedge clk) begin
    cyc++;
    if (rst_n) begin
      if (daq_trig && !trig_q) n_trig++;
      trig_q = daq_trig;
      if (slm_valid && slm_last) begin
        if (state == S_PROBE_XFER) begin
          n_probe++;
          if (last_probe >= 0) begin
            if (cyc - last_probe < period_min) period_min = cyc - last_probe;
            if (cyc - last_probe > period_max) period_max = cyc - last_probe;
          end
          last_probe = cyc;
        end else n_update++;
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

  initial begin
    real e0, e1, us;
    repeat (5) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    clear_mask = 1'b1;
    @(negedge clk);
    clear_mask = 1'b0;
    wait (state == S_IDLE);
    enhancement(e0);
    $display("initial speckle: enhancement %0.2f", e0);
    run = 1'b1;
    wait (iter_count == 32'(N_MODES / 4));
    enhancement(e1);
    $display("after %0d modes: enhancement %0.1f", iter_count, e1);
    wait (iter_count == 32'(N_MODES / 2));
    enhancement(e1);
    $display("after %0d modes: enhancement %0.1f", iter_count, e1);
    wait (iter_count == 32'(N_MODES) - 1);
    wait (state == S_UPDATE_XFER);
    @(negedge clk);
    run = 1'b0;
    wait (state == S_IDLE);
    repeat (T_RAMP_CYC + 10) @(negedge clk);
    enhancement(e1);
    us = real'(period_max) * 1.0e6 / real'(CLK_HZ);
    $display("one sweep (%0d modes): enhancement %0.1f; iteration %0d..%0d clocks = %0.2f us, %0.2f kHz",
             iter_count, e1, period_min, period_max, us, 1.0e3 / us);
    check(iter_count == 32'(N_MODES) && sweep_count == 16'd1,
          $sformatf("iterations %0d sweeps %0d", iter_count, sweep_count));
    check(period_min >= 19440 - 80 && period_max <= 19440 + 80,
          $sformatf("iteration period %0d..%0d clocks", period_min, period_max));
    check(e1 >= 120.0, $sformatf("enhancement %0.1f after one sweep", e1));
    check(n_probe == int'(iter_count) && n_update == int'(iter_count) && n_trig == 3 * int'(iter_count),
          $sformatf("probes %0d updates %0d triggers %0d", n_probe, n_update, n_trig));
    check(daq_overrun == '0, "DAQ overrun");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (21_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_wfs_dynamic: focusing through dynamic samples, the main evaluation of
// the published system, at the default size and timing. Two copies of the
// optimizer run side by side, each in closed loop with a behavioural medium
// whose speckle decorrelates with a time constant tau: 30 ms (the fastest
// sample of the publication) and 340 ms (the slowest). The PMT carries
// uniform noise of +/-150 counts, about twice the mean speckle level, so the
// signal-to-noise ratio of the first modes is of order one, as in the
// published experiments. Each loop runs for
// 500 ms; the focus is read at the end of every iteration, when the optimum
// mask has settled, and averaged from 150 ms on (steady state, where
// optimization and decorrelation balance).
// Checks, after the published trends: the fast sample still gives a clear
// focus (enhancement >= 5; published about 10); the slow sample gives a
// focus at least three times stronger (published about 110, nearly
// proportional to tau); after the loop is stopped the fast sample's focus
// decays to below half within 3 tau. Each loop also keeps the 243 us period.
module tb_wfs_dynamic;
  import wfs_pkg::*;
  localparam int unsigned AW = $clog2(N_PIX);
  localparam int unsigned DAQ_DELAY = T_MEAS_CYC - (2 * T_RAMP_CYC) / 3 + 3920;
  localparam longint unsigned MS = CLK_HZ / 1000;

  logic clk = 1'b0, rst_n = 1'b0, run = 1'b0, clear_mask = 1'b0;
  logic inject_extra = 1'b0, hold_daq = 1'b0;
  int checks = 0, failures = 0;

  // per-loop signals: index 0 = tau 30 ms, index 1 = tau 340 ms
  loop_state_t state [2];
  logic [AW-1:0] mode_idx [2], slm_addr [2];
  logic [31:0] iter_count [2], focus_milli [2], mean_milli [2];
  logic [15:0] sweep_count [2], daq_overrun [2];
  logic [PW-1:0] last_phase [2];
  logic slm_valid [2], slm_last [2], daq_trig [2], daq_valid [2], probe_req [2];
  logic [PW:0] slm_code [2];
  logic [1:0] daq_trig_idx [2];
  logic [IW-1:0] daq_data [2];

  always #5 clk = ~clk;

  wfs_top dut0 (.clk, .rst_n, .run, .clear_mask, .state(state[0]), .mode_idx(mode_idx[0]),
    .iter_count(iter_count[0]), .sweep_count(sweep_count[0]), .last_phase(last_phase[0]),
    .daq_overrun(daq_overrun[0]), .slm_valid(slm_valid[0]), .slm_addr(slm_addr[0]),
    .slm_code(slm_code[0]), .slm_last(slm_last[0]), .daq_trig(daq_trig[0]),
    .daq_trig_idx(daq_trig_idx[0]), .daq_valid(daq_valid[0]), .daq_data(daq_data[0]));
  tb_optics_daq_model #(.GRID(GRID), .PW(PW), .IW(IW), .T_MOVE(T_RAMP_CYC), .DAQ_DELAY(DAQ_DELAY),
    .SEED(11), .NOISE(150), .TAU_CYC(30 * MS)) model0 (.clk, .rst_n, .slm_valid(slm_valid[0]),
    .slm_addr(slm_addr[0]), .slm_code(slm_code[0]), .slm_last(slm_last[0]), .daq_trig(daq_trig[0]),
    .inject_extra, .hold_daq, .daq_valid(daq_valid[0]), .daq_data(daq_data[0]),
    .probe_req(probe_req[0]), .focus_milli(focus_milli[0]), .mean_milli(mean_milli[0]));

  wfs_top dut1 (.clk, .rst_n, .run, .clear_mask, .state(state[1]), .mode_idx(mode_idx[1]),
    .iter_count(iter_count[1]), .sweep_count(sweep_count[1]), .last_phase(last_phase[1]),
    .daq_overrun(daq_overrun[1]), .slm_valid(slm_valid[1]), .slm_addr(slm_addr[1]),
    .slm_code(slm_code[1]), .slm_last(slm_last[1]), .daq_trig(daq_trig[1]),
    .daq_trig_idx(daq_trig_idx[1]), .daq_valid(daq_valid[1]), .daq_data(daq_data[1]));
  tb_optics_daq_model #(.GRID(GRID), .PW(PW), .IW(IW), .T_MOVE(T_RAMP_CYC), .DAQ_DELAY(DAQ_DELAY),
    .SEED(12), .NOISE(150), .TAU_CYC(340 * MS)) model1 (.clk, .rst_n, .slm_valid(slm_valid[1]),
    .slm_addr(slm_addr[1]), .slm_code(slm_code[1]), .slm_last(slm_last[1]), .daq_trig(daq_trig[1]),
    .inject_extra, .hold_daq, .daq_valid(daq_valid[1]), .daq_data(daq_data[1]),
    .probe_req(probe_req[1]), .focus_milli(focus_milli[1]), .mean_milli(mean_milli[1]));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // Read the focus at the end of every settling (optimum mask in place).
  longint cyc = 0;
  real    sum_e [2] = '{0.0, 0.0};
  int     n_e [2] = '{0, 0};
  bit     averaging = 1'b0, req_q [2] = '{1'b0, 1'b0}, manual_req = 1'b0;
  loop_state_t state_q [2];
  always @(negedge clk) begin
    cyc++;
    for (int k = 0; k < 2; k++) begin
      if (req_q[k] && averaging) begin
        sum_e[k] += real'(focus_milli[k]) / real'(mean_milli[k]);
        n_e[k]++;
      end
      req_q[k] = probe_req[k];
      probe_req[k] = (rst_n && state_q[k] == S_SETTLE && state[k] == S_PROBE_XFER) ||
                     (k == 0 && manual_req);
      state_q[k] = state[k];
    end
  end

  function automatic real enh(int k);
    return real'(focus_milli[k]) / real'(mean_milli[k]);
  endfunction

  initial begin
    real avg0, avg1, e_stop, e_late;
    longint t_run;
    state_q = '{S_IDLE, S_IDLE};
    repeat (5) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    clear_mask = 1'b1;
    @(negedge clk);
    clear_mask = 1'b0;
    wait (state[0] == S_IDLE && state[1] == S_IDLE);
    run = 1'b1;
    t_run = cyc;
    for (int t = 50; t <= 500; t += 50) begin
      wait (cyc >= t_run + longint'(t) * longint'(MS));
      if (t == 150) averaging = 1'b1;
      $display("t = %0d ms: enhancement tau 30 ms %0.1f, tau 340 ms %0.1f (%0d modes)",
               t, enh(0), enh(1), iter_count[0]);
    end
    averaging = 1'b0;
    avg0 = sum_e[0] / real'(n_e[0]);
    avg1 = sum_e[1] / real'(n_e[1]);
    $display("steady state: tau 30 ms -> %0.1f, tau 340 ms -> %0.1f", avg0, avg1);
    check(avg0 >= 5.0, $sformatf("fast sample enhancement %0.1f", avg0));
    check(avg1 >= 3.0 * avg0, $sformatf("slow sample %0.1f not 3x the fast one %0.1f", avg1, avg0));
    // stop and watch the fast sample's focus decay
    wait (state[0] == S_UPDATE_XFER);
    @(negedge clk);
    run = 1'b0;
    wait (state[0] == S_IDLE);
    repeat (T_RAMP_CYC + 10) @(negedge clk);
    manual_req = 1'b1;
    repeat (3) @(negedge clk);
    manual_req = 1'b0;
    e_stop = enh(0);
    repeat (90 * MS) @(negedge clk);
    manual_req = 1'b1;
    repeat (3) @(negedge clk);
    manual_req = 1'b0;
    e_late = enh(0);
    $display("fast sample after stop: %0.1f, 90 ms later: %0.1f", e_stop, e_late);
    check(e_late < 0.5 * e_stop, "focus did not decay after the stop");
    check(iter_count[0] == iter_count[1] && iter_count[0] >= 32'(500_000 / 243 - 3),
          $sformatf("iterations %0d / %0d in 500 ms", iter_count[0], iter_count[1]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (52_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

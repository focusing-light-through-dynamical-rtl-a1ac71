// tb_loop_ctrl: checks the sequencer against datapath stand-ins written here
// (fixed latencies for the mode generator, streamer, trigger window, DAQ
// and estimator) with a 16-pixel basis and a 50-clock settling time. Every
// handshake pulse is checked against the order of the iteration (probe,
// triggers, samples, estimate, update, settle + next mode), the mode index
// must walk 1..15 and restart at 1 with sweep_count counting the restarts,
// the settling must last T_SETTLE clocks, the iteration period must equal
// the sum of the stand-in latencies, dropping `run` must stop at the end of
// an iteration or abandon a wait for samples, and clear_mask must restart
// the basis at mode 1.
module tb_loop_ctrl;
  import wfs_pkg::*;
  localparam int unsigned N_PIX = 16, T_SETTLE = 50;
  localparam int unsigned AW = $clog2(N_PIX);
  localparam int L_STR = 20, L_TRG = 30, L_DAQ = 25, L_PSI = 5;

  logic clk = 1'b0, rst_n = 1'b0, run = 1'b0, clear_mask = 1'b0;
  logic clr_start, clr_busy = 1'b0;
  logic had_start, had_busy = 1'b0, had_done = 1'b0;
  logic [AW-1:0] had_mode, mode_idx;
  logic str_start, str_update, str_done = 1'b0;
  logic trg_start, trg_done = 1'b0, rx_arm, rx_ready = 1'b0;
  logic psi_start, psi_done = 1'b0;
  loop_state_t state;
  logic [31:0] iter_count;
  logic [15:0] sweep_count;
  int checks = 0, failures = 0;
  bit withhold_daq = 1'b0;

  loop_ctrl #(.N_PIX(N_PIX), .T_SETTLE(T_SETTLE)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // Datapath stand-ins: start pulse -> done pulse after a fixed latency.
  int c_clr = -1, c_had = -1, c_str = -1, c_trg = -1, c_daq = -1, c_psi = -1;
  always @(posedge clk) begin
    had_done <= 1'b0; str_done <= 1'b0; trg_done <= 1'b0; psi_done <= 1'b0;
    if (clr_start) begin clr_busy <= 1'b1; c_clr = N_PIX; end
    else if (c_clr > 0) c_clr--;
    else if (c_clr == 0) begin clr_busy <= 1'b0; c_clr = -1; end
    if (had_start) begin had_busy <= 1'b1; c_had = N_PIX; end
    else if (c_had > 0) c_had--;
    else if (c_had == 0) begin had_busy <= 1'b0; had_done <= 1'b1; c_had = -1; end
    if (str_start) c_str = L_STR;
    else if (c_str > 0) c_str--;
    else if (c_str == 0) begin str_done <= 1'b1; c_str = -1; end
    if (trg_start) c_trg = L_TRG;
    else if (c_trg > 0) c_trg--;
    else if (c_trg == 0) begin trg_done <= 1'b1; c_trg = -1; c_daq = L_DAQ; end
    if (rx_arm) rx_ready <= 1'b0;
    if (c_daq > 0) c_daq--;
    else if (c_daq == 0 && !withhold_daq) begin rx_ready <= 1'b1; c_daq = -1; end
    if (psi_start) c_psi = L_PSI;
    else if (c_psi > 0) c_psi--;
    else if (c_psi == 0) begin psi_done <= 1'b1; c_psi = -1; end
  end

  // Reference of the iteration order.
  typedef enum {E_PROBE, E_TRG, E_PSI, E_UPD, E_HAD} ev_t;
  ev_t expect_ev = E_PROBE;
  int  cyc = 0, t_upd_done = -1, t_probe = -1, period = -1, n_sweeps = 0;
  int  expect_mode = 1, n_stops = 0, n_aborts = 0;
  always @(negedge clk) begin
    cyc++;
    if (rst_n) begin
      if (str_start && !str_update) begin
        check(expect_ev == E_PROBE, $sformatf("probe out of order (%s)", expect_ev.name()));
        check(int'(mode_idx) == expect_mode, $sformatf("mode %0d, expected %0d", mode_idx, expect_mode));
        if (t_upd_done >= 0)
          check(cyc - t_upd_done == T_SETTLE, $sformatf("settling %0d", cyc - t_upd_done));
        if (t_probe >= 0) period = cyc - t_probe;
        t_probe = cyc;
        expect_ev = E_TRG;
      end
      if (trg_start) begin
        check(expect_ev == E_TRG && rx_arm, "trigger window out of order or DAQ not armed");
        expect_ev = E_PSI;
      end
      if (psi_start) begin
        check(expect_ev == E_PSI && rx_ready, "estimate out of order");
        expect_ev = E_UPD;
      end
      if (str_start && str_update) begin
        check(expect_ev == E_UPD, "update out of order");
        expect_ev = E_HAD;
      end
      if (had_start && state == S_SETTLE) begin
        check(expect_ev == E_HAD, "next mode out of order");
        check(int'(had_mode) == (expect_mode == N_PIX - 1 ? 1 : expect_mode + 1),
              $sformatf("next mode %0d", had_mode));
        t_upd_done = cyc;
        expect_mode = (expect_mode == N_PIX - 1) ? 1 : expect_mode + 1;
        expect_ev = E_PROBE;
      end
    end
  end

  initial begin
    int it0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    run = 1'b1;
    // first mode generated before the first probe
    wait (had_start);
    check(int'(had_mode) == 1, "first mode");
    // two sweeps of the 15-mode basis
    wait (iter_count == 32'd30);
    @(negedge clk);
    check(sweep_count == 16'd2, $sformatf("sweep_count %0d", sweep_count));
    // period = probe + window + DAQ + estimate + update + settle; each
    // start -> done -> next start handshake adds 3 clocks to a stand-in latency
    check(period == 2 * (L_STR + 3) + (L_TRG + L_DAQ + 3) + (L_PSI + 3) + T_SETTLE,
          $sformatf("iteration period %0d", period));
    // stop: run dropped after the estimate -> finishes the iteration, idles
    wait (state == S_UPDATE_XFER);
    it0 = int'(iter_count);
    run = 1'b0;
    wait (state == S_IDLE);
    check(int'(iter_count) == it0 + 1, "stop did not finish the iteration");
    n_stops++;
    t_upd_done = -1;
    repeat (100) @(negedge clk);
    check(state == S_IDLE, "not idle after stop");
    // resume without regenerating the mode
    run = 1'b1;
    @(negedge clk);
    @(negedge clk);
    check(state == S_PROBE_XFER, "resume did not go straight to the probe");
    // abandon a wait for samples
    wait (state == S_MEASURE);
    withhold_daq = 1'b1;
    wait (state == S_WAIT_DAQ);
    repeat (20) @(negedge clk);
    it0 = int'(iter_count);
    expect_mode = (int'(mode_idx) == N_PIX - 1) ? 1 : int'(mode_idx) + 1;
    run = 1'b0;
    @(negedge clk);
    @(negedge clk);
    check(state == S_IDLE && int'(iter_count) == it0, "wait for samples not abandoned");
    n_aborts++;
    withhold_daq = 1'b0;
    expect_mode = int'(mode_idx);
    expect_ev = E_PROBE;
    t_upd_done = -1;
    // clear: mask flattened, basis restarts at mode 1
    @(negedge clk);
    clear_mask = 1'b1;
    @(negedge clk);
    clear_mask = 1'b0;
    check(state == S_CLEAR, "clear not entered");
    wait (state == S_IDLE);
    check(int'(mode_idx) == 1, "clear did not restart the basis");
    expect_mode = 1;
    run = 1'b1;
    wait (iter_count == 32'(it0 + 3));
    check(n_stops == 1 && n_aborts == 1, "stop/abort not exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

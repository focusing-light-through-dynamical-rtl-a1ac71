// tb_daq_trigger_gen: checks the acquisition triggers at the default 80 MHz
// timing: rising edges 0, 2666 and 5333 clocks (0, 33.3 and 66.7 us, i.e.
// phases 0, 2*pi/3, 4*pi/3 of the 100 us ramp) after the first output cycle,
// each TRIG_W clocks wide with the right trig_idx, and done T_MEAS = 5440
// clocks (68 us) after the start cycle. A second start is ignored while busy.
module tb_daq_trigger_gen;
  localparam int unsigned T_RAMP = 8000, T_MEAS = 5440, TRIG_W = 8;

  logic clk = 1'b0, rst_n = 1'b0;
  logic start = 1'b0, busy, trig, done;
  logic [1:0] trig_idx;
  int checks = 0, failures = 0;

  daq_trigger_gen #(.T_RAMP(T_RAMP), .T_MEAS(T_MEAS), .TRIG_W(TRIG_W)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic window(bit restart_mid);
    int cyc, n_rise, high_len, done_cyc;
    int rise [3];
    logic trig_q;
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cyc = 1; n_rise = 0; trig_q = 1'b0; high_len = 0; done_cyc = -1;
    while (cyc < T_RAMP + 100) begin
      if (restart_mid && cyc == 3000) start = 1'b1; else start = 1'b0;
      if (trig && !trig_q) begin
        if (n_rise < 3) begin
          rise[n_rise] = cyc;
          check(trig_idx == 2'(n_rise), $sformatf("trig_idx %0d at trigger %0d", trig_idx, n_rise));
        end
        n_rise++;
      end
      if (trig) high_len++;
      if (done) begin
        check(done_cyc == -1, "done twice");
        done_cyc = cyc;
      end
      trig_q = trig;
      @(negedge clk);
      cyc++;
    end
    check(n_rise == 3, $sformatf("%0d triggers", n_rise));
    check(rise[0] == 1 && rise[1] == 1 + T_RAMP / 3 && rise[2] == 1 + (2 * T_RAMP) / 3,
          $sformatf("trigger edges %0d %0d %0d", rise[0], rise[1], rise[2]));
    check(high_len == 3 * TRIG_W, $sformatf("trigger high for %0d clocks", high_len));
    check(done_cyc == T_MEAS, $sformatf("done at %0d", done_cyc));
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    window(1'b0);
    window(1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

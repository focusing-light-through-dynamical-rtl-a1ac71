// tb_hadamard_gen: checks the Hadamard mode generator at its default order
// (1024). For a set of modes it measures the computation time (done must
// pulse N_PIX+1 clocks after start), reads back the whole buffer and
// compares every bit with the Walsh parity popcount(m & p) mod 2 computed
// here, checks that every mode m > 0 dephases exactly half of the pixels,
// and that two different modes are orthogonal (agree on exactly half).
module tb_hadamard_gen;
  localparam int unsigned N_PIX = 1024;
  localparam int unsigned AW = $clog2(N_PIX);

  logic clk = 1'b0, rst_n = 1'b0;
  logic start = 1'b0, busy, done, rd_bit;
  logic [AW-1:0] mode_idx = '0, rd_addr = '0;
  int checks = 0, failures = 0;
  bit row_prev [N_PIX];

  hadamard_gen #(.N_PIX(N_PIX)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic run_mode(int m, bit compare_prev);
    int cyc, ones, agree;
    bit b;
    @(negedge clk);
    mode_idx = AW'(m);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cyc = 1;
    while (!done) begin
      @(negedge clk);
      cyc++;
    end
    check(cyc == N_PIX + 1, $sformatf("mode %0d: done after %0d clocks", m, cyc));
    ones = 0; agree = 0;
    for (int p = 0; p < N_PIX; p++) begin
      rd_addr = AW'(p);
      @(negedge clk);
      b = ($countones(m & p) % 2) == 1;
      check(rd_bit == b, $sformatf("mode %0d pixel %0d", m, p));
      ones += int'(rd_bit);
      if (rd_bit == row_prev[p]) agree++;
      row_prev[p] = rd_bit;
    end
    if (m != 0) check(ones == N_PIX / 2, $sformatf("mode %0d has %0d dephased pixels", m, ones));
    if (compare_prev) check(agree == N_PIX / 2, $sformatf("mode %0d not orthogonal", m));
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run_mode(1, 0);
    run_mode(2, 1);
    run_mode(513, 1);
    run_mode(1023, 1);
    for (int k = 0; k < 4; k++) run_mode(1 + $urandom_range(N_PIX - 2), 0);
    // start while busy is ignored: the mode given first is kept
    @(negedge clk);
    mode_idx = AW'(5); start = 1'b1;
    @(negedge clk);
    mode_idx = AW'(6);
    @(negedge clk);
    start = 1'b0;
    wait (done);
    @(negedge clk);
    rd_addr = AW'(1);  // pixel 1: parity(5&1)=1, parity(6&1)=0
    @(negedge clk);
    check(rd_bit == 1'b1, "start while busy was not ignored");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

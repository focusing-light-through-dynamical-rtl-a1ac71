// tb_psi3_phase: checks the three-phase estimator. Samples are made from
// I_k = A + B*cos(2*pi*k/3 - theta) for random A, B and theta (real math
// here, rounded to integers); the block must return theta within one phase
// LSB (circularly), with done high exactly ITER+3 clocks after the start
// cycle. Also checked: the
// four axis directions, a full-scale case and equal samples (phase 0).
module tb_psi3_phase;
  localparam int unsigned IW = 16, PW = 8, ITER = 14;
  localparam real TWO_PI = 6.283185307179586;

  logic clk = 1'b0, rst_n = 1'b0;
  logic start = 1'b0, busy, done;
  logic [IW-1:0] i0 = '0, i1 = '0, i2 = '0;
  logic [PW-1:0] phase;
  int checks = 0, failures = 0;

  psi3_phase #(.IW(IW), .PW(PW), .ITER(ITER)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run(real a, real b, real theta, int tol);
    int cyc, expect_code, err;
    real t;
    @(negedge clk);
    i0 = IW'($rtoi(a + b * $cos(-theta) + 0.5));
    i1 = IW'($rtoi(a + b * $cos(TWO_PI / 3.0 - theta) + 0.5));
    i2 = IW'($rtoi(a + b * $cos(2.0 * TWO_PI / 3.0 - theta) + 0.5));
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    check(cyc == ITER + 3, $sformatf("latency %0d", cyc));
    t = theta / TWO_PI * real'(1 << PW);
    expect_code = $rtoi(t + 0.5) % (1 << PW);
    err = (int'(phase) - expect_code + (1 << PW)) % (1 << PW);
    if (err > (1 << (PW - 1))) err = (1 << PW) - err;
    check(err <= tol, $sformatf("A=%f B=%f theta=%f: got %0d want %0d", a, b, theta, phase, expect_code));
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run(1000.0, 800.0, 0.0, 1);
    run(1000.0, 800.0, TWO_PI / 4.0, 1);
    run(1000.0, 800.0, TWO_PI / 2.0, 1);
    run(1000.0, 800.0, 3.0 * TWO_PI / 4.0, 1);
    run(32767.0, 32767.0, 1.0, 1);
    for (int k = 0; k < 200; k++) begin
      real a, b, th;
      b  = 200.0 + real'($urandom_range(20000));
      a  = b + real'($urandom_range(10000));
      th = real'($urandom_range(100000)) / 100000.0 * TWO_PI;
      run(a, b, th, 1);
    end
    // equal samples: no modulation, phase 0
    @(negedge clk);
    i0 = 16'd500; i1 = 16'd500; i2 = 16'd500;
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    wait (done);
    #1 check(phase == '0, $sformatf("equal samples gave %0d", phase));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

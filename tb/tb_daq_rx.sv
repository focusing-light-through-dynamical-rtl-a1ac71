// tb_daq_rx: checks the DAQ sample receiver: three words after an arm, with
// random gaps, land in i0..i2 in order with one done pulse and ready held;
// words before an arm or beyond the third are dropped and counted as
// overrun; a new arm clears ready.
module tb_daq_rx;
  localparam int unsigned IW = 16;

  logic clk = 1'b0, rst_n = 1'b0;
  logic arm = 1'b0, s_valid = 1'b0, ready, done;
  logic [IW-1:0] s_data = '0, i0, i1, i2;
  logic [15:0] overrun;
  int checks = 0, failures = 0, n_done = 0, exp_overrun = 0;

  daq_rx #(.IW(IW)) dut (.*);
  always #5 clk = ~clk;
  always @(negedge clk) if (rst_n && done) n_done++;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic send(logic [IW-1:0] v);
    @(negedge clk);
    s_valid = 1'b1; s_data = v;
    @(negedge clk);
    s_valid = 1'b0;
    repeat ($urandom_range(5)) @(negedge clk);
  endtask

  initial begin
    logic [IW-1:0] a, b, c;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    send(16'h1234);                      // not armed
    exp_overrun++;
    for (int k = 0; k < 20; k++) begin
      a = IW'($urandom); b = IW'($urandom); c = IW'($urandom);
      @(negedge clk);
      arm = 1'b1;
      @(negedge clk);
      arm = 1'b0;
      check(!ready, "ready not cleared by arm");
      n_done = 0;
      send(a);
      check(!ready, "ready after one word");
      send(b);
      send(c);
      @(negedge clk);
      check(ready && n_done == 1, $sformatf("ready=%0d done pulses=%0d", ready, n_done));
      check(i0 == a && i1 == b && i2 == c, $sformatf("samples %h %h %h", i0, i1, i2));
      if (k % 4 == 3) begin
        send(16'hdead);                  // a fourth word
        exp_overrun++;
        check(i0 == a && i1 == b && i2 == c, "fourth word overwrote a sample");
      end
    end
    check(int'(overrun) == exp_overrun, $sformatf("overrun %0d, expected %0d", overrun, exp_overrun));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

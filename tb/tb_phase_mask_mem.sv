// tb_phase_mask_mem: checks the phase mask memory. A clear must take N_PIX
// clocks and leave every word zero; writes must be read back one clock
// later; writes during a clear are ignored; a write and a read of different
// addresses in the same clock both work (the streamer's write-back pattern).
module tb_phase_mask_mem;
  localparam int unsigned N_PIX = 1024, PW = 8;
  localparam int unsigned AW = $clog2(N_PIX);

  logic clk = 1'b0, rst_n = 1'b0;
  logic [AW-1:0] rd_addr = '0, wr_addr = '0;
  logic [PW-1:0] rd_data, wr_data = '0;
  logic we = 1'b0, clr = 1'b0, clr_busy;
  int checks = 0, failures = 0;
  logic [PW-1:0] ref_mem [N_PIX];

  phase_mask_mem #(.N_PIX(N_PIX), .PW(PW)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    int cyc;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // fill with random data
    for (int p = 0; p < N_PIX; p++) begin
      ref_mem[p] = PW'($urandom);
      we = 1'b1; wr_addr = AW'(p); wr_data = ref_mem[p];
      @(negedge clk);
    end
    we = 1'b0;
    // read back, with simultaneous writes to another address
    for (int p = 0; p < N_PIX; p++) begin
      rd_addr = AW'(p);
      we = (p > 0); wr_addr = AW'(p - 1);
      wr_data = ref_mem[(p + N_PIX - 1) % N_PIX] + 8'd1;
      @(negedge clk);
      check(rd_data == ref_mem[p], $sformatf("read %0d: %0d vs %0d", p, rd_data, ref_mem[p]));
    end
    we = 1'b1; wr_addr = AW'(N_PIX - 1); wr_data = ref_mem[N_PIX - 1] + 8'd1;
    @(negedge clk);
    we = 1'b0;
    for (int p = 0; p < N_PIX; p++) ref_mem[p] = ref_mem[p] + 8'd1;
    for (int p = 0; p < N_PIX; p += 37) begin
      rd_addr = AW'(p);
      @(negedge clk);
      check(rd_data == ref_mem[p], $sformatf("write-back %0d", p));
    end
    // clear, with a write attempt in the middle
    clr = 1'b1;
    @(negedge clk);
    clr = 1'b0;
    cyc = 0;
    while (clr_busy) begin
      if (cyc == 500) begin we = 1'b1; wr_addr = AW'(10); wr_data = 8'h55; end
      else we = 1'b0;
      @(negedge clk);
      cyc++;
    end
    we = 1'b0;
    check(cyc == N_PIX, $sformatf("clear took %0d clocks", cyc));
    for (int p = 0; p < N_PIX; p++) begin
      rd_addr = AW'(p);
      @(negedge clk);
      check(rd_data == '0, $sformatf("cleared word %0d = %0d", p, rd_data));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

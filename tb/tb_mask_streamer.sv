// tb_mask_streamer: checks the SLM mask streamer at the default 32 x 32
// array against memory and mode-buffer models held here (both with one clock
// of read latency, like the real blocks). A probe transfer must send the
// 1020 non-corner pixels in raster order with code = phase + 2*pi*mode_bit
// and write nothing back; an update transfer must add phase_opt (mod 2*pi)
// to the mode pixels only, write the sums back and send them. The last word
// must carry slm_last together with done, N_PIX+1 clocks after start.
module tb_mask_streamer;
  localparam int unsigned GRID = 32, PW = 8;
  localparam int unsigned N_PIX = GRID * GRID, AW = $clog2(N_PIX);

  logic clk = 1'b0, rst_n = 1'b0;
  logic start = 1'b0, update = 1'b0, busy, done;
  logic [PW-1:0] phase_opt = '0;
  logic [AW-1:0] mem_rd_addr, mem_wr_addr, mode_rd_addr, slm_addr;
  logic [PW-1:0] mem_rd_data, mem_wr_data;
  logic mem_we, mode_rd_bit, slm_valid, slm_last;
  logic [PW:0] slm_code;
  int checks = 0, failures = 0;

  logic [PW-1:0] mem [N_PIX];
  logic [PW-1:0] mem_before [N_PIX];
  logic          mode [N_PIX];

  mask_streamer #(.GRID(GRID), .PW(PW)) dut (.*);
  always #5 clk = ~clk;

  // memory and mode-buffer models
  always_ff @(posedge clk) begin
    mem_rd_data <= mem[mem_rd_addr];
    mode_rd_bit <= mode[mode_rd_addr];
    if (mem_we) mem[mem_wr_addr] <= mem_wr_data;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic bit corner(int p);
    return p == 0 || p == GRID - 1 || p == N_PIX - GRID || p == N_PIX - 1;
  endfunction

  int n_words, n_writes, next_pix, cyc, done_cyc;
  bit upd_mode;
  logic [PW-1:0] opt;

  always @(negedge clk) begin
    if (slm_valid) begin
      logic [PW:0] want;
      while (next_pix < N_PIX && corner(next_pix)) next_pix++;
      check(int'(slm_addr) == next_pix, $sformatf("address %0d, expected %0d", slm_addr, next_pix));
      if (upd_mode) want = {1'b0, mem_before[next_pix] + (mode[next_pix] ? opt : '0)};
      else          want = {mode[next_pix], mem_before[next_pix]};
      check(slm_code == want, $sformatf("pixel %0d code %0d, expected %0d", next_pix, slm_code, want));
      check(slm_last == (next_pix == N_PIX - 2), $sformatf("slm_last at %0d", next_pix));
      check(done == slm_last, "done without slm_last");
      if (slm_last) done_cyc = cyc;
      n_words++;
      next_pix++;
    end
    if (mem_we) begin
      n_writes++;
      check(upd_mode && mode[mem_wr_addr], $sformatf("write to %0d", mem_wr_addr));
    end
  end

  task automatic transfer(bit upd, logic [PW-1:0] o);
    for (int p = 0; p < N_PIX; p++) mem_before[p] = mem[p];
    upd_mode = upd; opt = o;
    n_words = 0; n_writes = 0; next_pix = 0; done_cyc = -1;
    @(negedge clk);
    start = 1'b1; update = upd; phase_opt = o;
    cyc = 0;
    @(negedge clk);
    start = 1'b0; update = 1'b0; phase_opt = '0;
    cyc = 1;
    while (busy || cyc < 5) begin @(negedge clk); cyc++; end
    check(n_words == N_PIX - 4, $sformatf("%0d words sent", n_words));
    check(done_cyc == N_PIX + 1, $sformatf("last word %0d clocks after start", done_cyc));
    if (upd) begin
      int n_mode = 0;
      for (int p = 0; p < N_PIX; p++) begin
        logic [PW-1:0] want;
        want = (mode[p] && !corner(p)) ? mem_before[p] + o : mem_before[p];
        check(mem[p] == want, $sformatf("memory word %0d = %0d, expected %0d", p, mem[p], want));
        n_mode += int'(mode[p] && !corner(p));
      end
      check(n_writes == n_mode, $sformatf("%0d write-backs, expected %0d", n_writes, n_mode));
    end else begin
      check(n_writes == 0, "probe wrote the memory");
    end
  endtask



  initial begin
    for (int p = 0; p < N_PIX; p++) begin
      mem[p]  = PW'($urandom);
      mode[p] = 1'($countones(p & 357) % 2);
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    transfer(1'b0, '0);
    transfer(1'b1, 8'd200);   // wraps for most pixels
    transfer(1'b0, '0);
    for (int p = 0; p < N_PIX; p++) mode[p] = 1'($urandom);
    transfer(1'b1, 8'd17);
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

// hadamard_gen: computes one Hadamard mode of the SLM into a 1-bit-per-pixel
// buffer.
//
// A mode splits the SLM into two halves: pixels whose bit is 1 are dephased,
// the others stay fixed as the reference. Rows are taken from the Sylvester
// (Walsh) Hadamard matrix of order N_PIX: pixel p belongs to the dephased half
// of mode m when popcount(m & p) is odd, which gives exactly half of the
// pixels for every m > 0. That construction and the one-pixel-per-clock
// schedule are this design's choices; the paper says only that the mode for
// the next iteration is computed in parallel with the current one.
//
// Interface: pulse `start` with `mode_idx`; `busy` is high for N_PIX cycles
// while the buffer is written, then `done` pulses for one cycle. A start
// while busy is ignored. `rd_bit` returns the buffer bit of `rd_addr` one
// clock after the address (registered read). The buffer must not be read
// during a computation, since it holds a mix of two modes then.
module hadamard_gen #(
  parameter int unsigned N_PIX = wfs_pkg::N_PIX,
  localparam int unsigned AW = $clog2(N_PIX)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [AW-1:0] mode_idx,
  output logic          busy,
  output logic          done,
  input  logic [AW-1:0] rd_addr,
  output logic          rd_bit
);

  logic          mode_buf [N_PIX];
  logic [AW-1:0] cnt;
  logic [AW-1:0] mode_q;
  logic          wr_bit;

  // Walsh function: parity of the common set bits of mode and pixel index.
  assign wr_bit = ^(mode_q & cnt);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      done   <= 1'b0;
      cnt    <= '0;
      mode_q <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy   <= 1'b1;
          cnt    <= '0;
          mode_q <= mode_idx;
        end
      end else begin
        cnt <= cnt + 1'b1;
        if (cnt == AW'(N_PIX - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (busy) mode_buf[cnt] <= wr_bit;
    rd_bit <= mode_buf[rd_addr];
  end

endmodule

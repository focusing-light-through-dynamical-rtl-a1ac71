// phase_mask_mem: the SLM phase mask, one PW-bit phase word per pixel.
//
// A simple dual-port memory: one registered read port (data one clock after
// the address) and one write port, so the mask streamer can read pixel p+1
// while it writes back the updated phase of pixel p. A `clr` pulse walks the
// whole memory writing zeros (a flat mask), one word per clock, with
// `clr_busy` high meanwhile; user writes are ignored during a clear. The
// flat starting mask and the clear are this design's choices; the paper
// only says that each optimum phase is added to the previous mask.
module phase_mask_mem #(
  parameter int unsigned N_PIX = wfs_pkg::N_PIX,
  parameter int unsigned PW    = wfs_pkg::PW,
  localparam int unsigned AW = $clog2(N_PIX)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [AW-1:0] rd_addr,
  output logic [PW-1:0] rd_data,
  input  logic          we,
  input  logic [AW-1:0] wr_addr,
  input  logic [PW-1:0] wr_data,
  input  logic          clr,
  output logic          clr_busy
);

  logic [PW-1:0] mem [N_PIX];
  logic [AW-1:0] clr_cnt;
  logic          w_en;
  logic [AW-1:0] w_addr;
  logic [PW-1:0] w_data;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      clr_busy <= 1'b0;
      clr_cnt  <= '0;
    end else if (!clr_busy) begin
      if (clr) begin
        clr_busy <= 1'b1;
        clr_cnt  <= '0;
      end
    end else begin
      clr_cnt <= clr_cnt + 1'b1;
      if (clr_cnt == AW'(N_PIX - 1)) clr_busy <= 1'b0;
    end
  end

  always_comb begin
    if (clr_busy) begin
      w_en   = 1'b1;
      w_addr = clr_cnt;
      w_data = '0;
    end else begin
      w_en   = we;
      w_addr = wr_addr;
      w_data = wr_data;
    end
  end

  always_ff @(posedge clk) begin
    if (w_en) mem[w_addr] <= w_data;
    rd_data <= mem[rd_addr];
  end

endmodule

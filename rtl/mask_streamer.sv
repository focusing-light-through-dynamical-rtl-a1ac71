// mask_streamer: sends a complete phase mask to the SLM, one pixel per clock.
//
// Two kinds of transfer start every iteration:
//  * probe  (update = 0): each pixel word is its stored phase, plus 2*pi on
//    the pixels of the current Hadamard mode. The mirror segments of the
//    mode then travel through a full 0 -> 2*pi extra phase while the DAQ
//    samples the PMT; the other half stays put as the reference.
//  * update (update = 1): `phase_opt` is added (modulo 2*pi) to the stored
//    phase of every mode pixel, the sum is written back to the mask memory
//    and the new mask is sent.
// The pixel stream is slm_valid / slm_addr / slm_code / slm_last. slm_code is
// PW+1 bits wide in units of 2*pi/2^PW, so it spans 0 .. 4*pi: the top bit is
// the 2*pi offset of the probe. The four corner positions of the GRID x GRID
// array hold no mirror segment and are not sent (SKIP_CORNERS), so the
// default 32 x 32 array yields 1020 words. The walk covers all N_PIX
// addresses, one per clock: the corners cost one idle clock each, and the
// last word leaves N_PIX + 1 clocks after `start` (N_PIX + 2 without corner
// skipping), i.e. 12.8 us at 80 MHz against the paper's 13 us. `done` is high in the cycle that carries slm_last.
// Memory and mode buffer reads have one clock of latency; the write-back of
// pixel p happens while pixel p+1 is read, so there is no hazard.
// From the paper: the 13 us mask transfer and the update rule "add the
// optimum phase of the mode to the previous mask". This design's choices:
// one mask with a 2*pi step to produce the dephasing (the mirror's travel
// makes it continuous), the code format, and sending corner-free raster
// order. Converting a phase code to an actuator voltage is left to the
// SLM driver downstream.
module mask_streamer #(
  parameter int unsigned GRID         = wfs_pkg::GRID,
  parameter int unsigned PW           = wfs_pkg::PW,
  parameter bit          SKIP_CORNERS = 1'b1,
  localparam int unsigned N_PIX = GRID * GRID,
  localparam int unsigned AW    = $clog2(N_PIX)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic          update,
  input  logic [PW-1:0] phase_opt,
  output logic          busy,
  output logic          done,
  // phase mask memory
  output logic [AW-1:0] mem_rd_addr,
  input  logic [PW-1:0] mem_rd_data,
  output logic          mem_we,
  output logic [AW-1:0] mem_wr_addr,
  output logic [PW-1:0] mem_wr_data,
  // Hadamard mode buffer
  output logic [AW-1:0] mode_rd_addr,
  input  logic          mode_rd_bit,
  // SLM pixel stream
  output logic          slm_valid,
  output logic [AW-1:0] slm_addr,
  output logic [PW:0]   slm_code,
  output logic          slm_last
);

  localparam logic [AW-1:0] LAST_ADDR = SKIP_CORNERS ? AW'(N_PIX - 2) : AW'(N_PIX - 1);

  function automatic logic is_corner(input logic [AW-1:0] a);
    return SKIP_CORNERS && (a == AW'(0) || a == AW'(GRID - 1) ||
                            a == AW'(N_PIX - GRID) || a == AW'(N_PIX - 1));
  endfunction

  // Stage A: address walk.
  logic [AW-1:0] a_cnt;
  logic          walking;
  logic          upd_q;
  logic [PW-1:0] opt_q;
  // Stage B: read data returns.
  logic          b_valid;
  logic [AW-1:0] b_addr;

  assign mem_rd_addr  = a_cnt;
  assign mode_rd_addr = a_cnt;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      walking <= 1'b0;
      a_cnt   <= '0;
      upd_q   <= 1'b0;
      opt_q   <= '0;
      b_valid <= 1'b0;
      b_addr  <= '0;
    end else begin
      b_valid <= walking;
      b_addr  <= a_cnt;
      if (!walking) begin
        if (start && !busy) begin
          walking <= 1'b1;
          a_cnt   <= '0;
          upd_q   <= update;
          opt_q   <= phase_opt;
        end
      end else begin
        a_cnt <= a_cnt + 1'b1;
        if (a_cnt == AW'(N_PIX - 1)) walking <= 1'b0;
      end
    end
  end

  // Stage B: new phase and SLM word.
  logic          b_active;
  logic [PW-1:0] b_new_phase;
  logic [PW:0]   b_code;
  always_comb begin
    b_active    = b_valid && !is_corner(b_addr);
    b_new_phase = mem_rd_data + ((upd_q && mode_rd_bit) ? opt_q : '0);
    if (upd_q) b_code = {1'b0, b_new_phase};
    else       b_code = {mode_rd_bit, mem_rd_data};
  end

  assign mem_we      = b_active && upd_q && mode_rd_bit;
  assign mem_wr_addr = b_addr;
  assign mem_wr_data = b_new_phase;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      slm_valid <= 1'b0;
      slm_addr  <= '0;
      slm_code  <= '0;
      slm_last  <= 1'b0;
    end else begin
      slm_valid <= b_active;
      slm_addr  <= b_addr;
      slm_code  <= b_code;
      slm_last  <= b_active && (b_addr == LAST_ADDR);
    end
  end

  assign busy = walking || b_valid || (slm_valid && !slm_last);
  assign done = slm_valid && slm_last;

endmodule

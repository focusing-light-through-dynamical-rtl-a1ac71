// tb_optics_daq_model: behavioural model (not synthesizable) of everything
// outside the FPGA in the feedback loop: the MEMS mirror, the scattering
// sample, the PMT on one speckle grain and the DAQ board.
//
// Mirror: pixel words arriving on the SLM stream are latched and applied all
// together when slm_last arrives (a frame-latched driver). From then on each
// segment travels linearly from its present phase to its new target in
// T_MOVE cycles (100 us in the paper), whatever the distance.
// Sample: each of the GRID*GRID pixels has a random complex transmission
// t_p (circular Gaussian, drawn from SEED); corner pixels carry no segment
// and send no light. The field at the focus is E = sum_p t_p*exp(i*phi_p);
// the PMT reports I = |E|^2 scaled so that a perfect focus,
// (sum_p |t_p|)^2, reads FULL_SCALE counts, plus optional uniform noise of
// +/- NOISE counts.
// DAQ: while rst_n is low the trigger input is ignored. On each rising
// edge of daq_trig it samples I; DAQ_DELAY cycles after
// the third sample (49 us in the paper) it sends the three values on
// daq_valid/daq_data, one per clock. `inject_extra` sends one spurious word
// at once (to provoke an overrun); while `hold_daq` is high the samples are
// not sent (a DAQ that has stalled).
// Observation: on a clock with `probe_req` high, focus_milli is loaded with
// the present intensity; mean_milli is the mean speckle intensity. Both are
// in thousandths of a count.
// Dynamic sample: with TAU_CYC > 0 the transmissions drift every UPD_CYC
// cycles as t <- rho*t + sqrt(1 - rho^2)*n, n a fresh circular Gaussian and
// rho = exp(-UPD_CYC / (2*TAU_CYC)), so the speckle intensity
// autocorrelation decays as exp(-t/TAU_CYC) (Brownian motion of the
// scatterers); the mean speckle intensity is unchanged on average.
// `mean_speckle` is the ensemble-average intensity sum_p |t_p|^2 in counts,
// the denominator of the enhancement.
module tb_optics_daq_model #(
  parameter int unsigned GRID       = 32,
  parameter int unsigned PW         = 8,
  parameter int unsigned IW         = 16,
  parameter int unsigned T_MOVE     = 8000,
  parameter int unsigned DAQ_DELAY  = 3920,
  parameter int unsigned SEED       = 1,
  parameter real         FULL_SCALE = 60000.0,
  parameter int unsigned NOISE      = 0,
  parameter longint unsigned TAU_CYC = 0,     // speckle decorrelation time, 0 = static
  parameter int unsigned UPD_CYC    = 8000,   // medium update step
  localparam int unsigned N_PIX = GRID * GRID,
  localparam int unsigned AW    = $clog2(N_PIX)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          slm_valid,
  input  logic [AW-1:0] slm_addr,
  input  logic [PW:0]   slm_code,
  input  logic          slm_last,
  input  logic          daq_trig,
  input  logic          inject_extra,
  input  logic          hold_daq,
  output logic          daq_valid,
  output logic [IW-1:0] daq_data,
  // observation: present focus intensity and mean speckle, in 1/1000 count
  input  logic          probe_req,
  output logic [31:0]   focus_milli,
  output logic [31:0]   mean_milli
);

  localparam real TWO_PI = 6.283185307179586;

  real     t_re [N_PIX];
  real     t_im [N_PIX];
  real     ph_from [N_PIX];   // phase (rad) at the start of the move
  real     ph_to   [N_PIX];   // target phase (rad)
  real     pending [N_PIX];   // latched, not yet applied
  longint  t_apply;           // cycle at which the last frame was applied
  longint  cyc;
  real     scale;
  real     mean_speckle;
  int      frames;

  function automatic bit corner(int p);
    return p == 0 || p == GRID - 1 || p == N_PIX - GRID || p == N_PIX - 1;
  endfunction

  function automatic real phase_at(int p, longint t);
    real f;
    f = real'(t - t_apply) / real'(T_MOVE);
    if (f > 1.0) f = 1.0;
    if (f < 0.0) f = 0.0;
    return ph_from[p] + f * (ph_to[p] - ph_from[p]);
  endfunction

  function automatic real intensity_at(longint t);
    real er, ei, ph;
    er = 0.0; ei = 0.0;
    for (int p = 0; p < N_PIX; p++) begin
      if (!corner(p)) begin
        ph = phase_at(p, t);
        er += t_re[p] * $cos(ph) - t_im[p] * $sin(ph);
        ei += t_re[p] * $sin(ph) + t_im[p] * $cos(ph);
      end
    end
    return (er * er + ei * ei) * scale;
  endfunction

  // Present PMT intensity in counts (used by the testbenches too).
  function automatic real intensity_now();
    return intensity_at(cyc);
  endfunction

  function automatic logic [IW-1:0] to_counts(real v);
    real n;
    n = v;
    if (NOISE != 0) n += real'($urandom_range(2 * NOISE)) - real'(NOISE);
    if (n < 0.0) n = 0.0;
    if (n > real'((1 << IW) - 1)) n = real'((1 << IW) - 1);
    return IW'($rtoi(n));
  endfunction

  initial begin
    real u1, u2, r, sum_abs, sum_sq;
    void'($urandom(SEED));
    sum_abs = 0.0; sum_sq = 0.0;
    for (int p = 0; p < N_PIX; p++) begin
      u1 = (real'($urandom_range(1_000_000)) + 1.0) / 1_000_001.0;
      u2 = real'($urandom_range(1_000_000)) / 1_000_000.0;
      r  = $sqrt(-2.0 * $ln(u1));
      t_re[p] = corner(p) ? 0.0 : r * $cos(TWO_PI * u2);
      t_im[p] = corner(p) ? 0.0 : r * $sin(TWO_PI * u2);
      sum_abs += $sqrt(t_re[p] * t_re[p] + t_im[p] * t_im[p]);
      sum_sq  += t_re[p] * t_re[p] + t_im[p] * t_im[p];
      ph_from[p] = 0.0; ph_to[p] = 0.0; pending[p] = 0.0;
    end
    scale        = FULL_SCALE / (sum_abs * sum_abs);
    mean_speckle = sum_sq * scale;
    mean_milli   = 32'($rtoi(mean_speckle * 1000.0));
    focus_milli  = '0;
    t_apply      = 0;
    cyc          = 0;
    frames       = 0;
  end

  function automatic void gauss(output real gr, output real gi);
    real u1, u2, r;
    u1 = (real'($urandom_range(1_000_000)) + 1.0) / 1_000_001.0;
    u2 = real'($urandom_range(1_000_000)) / 1_000_000.0;
    r  = $sqrt(-2.0 * $ln(u1));
    gr = r * $cos(TWO_PI * u2);
    gi = r * $sin(TWO_PI * u2);
  endfunction

  // Medium drift.
  always @(posedge clk) begin
    if (TAU_CYC != 0 && cyc != 0 && (cyc % longint'(UPD_CYC)) == 0) begin
      real rho, s, gr, gi;
      rho = $exp(-real'(UPD_CYC) / (2.0 * real'(TAU_CYC)));
      s   = $sqrt(1.0 - rho * rho);
      for (int p = 0; p < N_PIX; p++) begin
        if (!corner(p)) begin
          gauss(gr, gi);
          t_re[p] = rho * t_re[p] + s * gr;
          t_im[p] = rho * t_im[p] + s * gi;
        end
      end
    end
  end

  // Mirror.
  always @(posedge clk) begin
    if (probe_req) focus_milli <= 32'($rtoi(intensity_at(cyc) * 1000.0));
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (slm_valid) begin
      pending[int'(slm_addr)] = real'(slm_code) * TWO_PI / real'(1 << PW);
      if (slm_last) begin
        for (int p = 0; p < N_PIX; p++) begin
          ph_from[p] = phase_at(p, cyc);
          ph_to[p]   = pending[p];
        end
        t_apply = cyc;
        frames++;
      end
    end
  end

  // DAQ.
  logic          trig_q;
  logic [IW-1:0] samp [3];
  int            n_samp;
  longint        t_send;
  int            n_sent;
  initial begin
    trig_q = 1'b0; n_samp = 0; n_sent = 3; t_send = 0;
    daq_valid = 1'b0; daq_data = '0;
  end
  always @(posedge clk) begin
    trig_q    <= daq_trig;
    daq_valid <= 1'b0;
    if (!rst_n) begin
      // the FPGA outputs are not defined before its reset: ignore them
      n_samp = 0;
      n_sent = 3;
    end else if (daq_trig && !trig_q) begin
      samp[n_samp] = to_counts(intensity_at(cyc));
      n_samp++;
      if (n_samp == 3) begin
        n_samp = 0;
        n_sent = 0;
        t_send = cyc + longint'(DAQ_DELAY);
      end
    end
    if (n_sent < 3 && cyc >= t_send && !hold_daq) begin
      daq_valid <= 1'b1;
      daq_data  <= samp[n_sent];
      n_sent++;
    end else if (inject_extra) begin
      daq_valid <= 1'b1;
      daq_data  <= '0;
    end
  end

endmodule

// daq_trigger_gen: acquisition triggers during the 0 -> 2*pi dephasing.
//
// After the probe mask has reached the SLM the mode pixels travel linearly
// from their phase to phase + 2*pi in T_RAMP cycles (100 us). The DAQ must
// sample the PMT when the extra phase is 0, 2*pi/3 and 4*pi/3, that is at
// 0, T_RAMP/3 and 2*T_RAMP/3 cycles after `start`. Each trigger is a pulse of
// TRIG_W cycles on `trig`; `trig_idx` tells which one (0..2) is current.
// `done` pulses T_MEAS cycles (68 us) after `start`, the end of the third
// measurement, which is where the sequencer may stop waiting on the ramp.
// The three instants and the 68 us window follow the paper; the linear ramp
// and the 100 ns pulse width are this design's choices. A start while busy
// is ignored.
module daq_trigger_gen #(
  parameter int unsigned T_RAMP = wfs_pkg::T_RAMP_CYC,
  parameter int unsigned T_MEAS = wfs_pkg::T_MEAS_CYC,
  parameter int unsigned TRIG_W = wfs_pkg::TRIG_W_CYC,
  localparam int unsigned CW = $clog2(T_MEAS + 1)
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  output logic       busy,
  output logic       trig,
  output logic [1:0] trig_idx,
  output logic       done
);

  localparam int unsigned T1 = T_RAMP / 3;
  localparam int unsigned T2 = (2 * T_RAMP) / 3;

  logic [CW-1:0] cnt;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      cnt      <= '0;
      trig     <= 1'b0;
      trig_idx <= '0;
      done     <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        trig <= 1'b0;
        if (start) begin
          busy     <= 1'b1;
          cnt      <= '0;
          trig     <= 1'b1;
          trig_idx <= 2'd0;
        end
      end else begin
        cnt <= cnt + 1'b1;
        // cnt is the cycle index of the current output, counted from start
        if (cnt + 1'b1 == CW'(TRIG_W) || cnt + 1'b1 == CW'(T1 + TRIG_W) ||
            cnt + 1'b1 == CW'(T2 + TRIG_W))
          trig <= 1'b0;
        if (cnt + 1'b1 == CW'(T1)) begin
          trig     <= 1'b1;
          trig_idx <= 2'd1;
        end
        if (cnt + 1'b1 == CW'(T2)) begin
          trig     <= 1'b1;
          trig_idx <= 2'd2;
        end
        if (cnt + 1'b1 == CW'(T_MEAS - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  initial begin
    assert (T2 + TRIG_W <= T_MEAS && T_MEAS <= T_RAMP)
      else $error("daq_trigger_gen: third trigger must end inside the acquisition window");
  end

endmodule

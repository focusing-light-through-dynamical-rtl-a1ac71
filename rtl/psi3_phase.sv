// psi3_phase: three-step phase-shifting interferometry.
//
// The PMT intensity seen while the Hadamard mode is dephased by theta is
// I(theta) = A + B*cos(theta + delta). Three samples, at theta = 0, 2*pi/3
// and 4*pi/3, fix A, B and delta; the phase that maximizes I is
//     theta_opt = atan2( sqrt(3)*(I1 - I2), 2*I0 - I1 - I2 ).
// The paper names the three-phase algorithm; this formula and its CORDIC
// implementation are the standard form of it, chosen here.
//
// Implementation: on `start` the two arguments are formed (sqrt(3) as the
// fixed-point constant 7094/4096, the other argument scaled by 4096 to
// match), the vector is folded into the right half plane (adding pi to the
// angle when x < 0), then ITER CORDIC vectoring steps run, one per clock,
// accumulating the angle in 16-bit binary units (2^16 = 2*pi). The result is
// rounded to PW bits. Latency: `done` is high ITER + 3 clocks after the
// cycle in which `start` is high (one to load, one to fold, ITER steps, one
// to round); `phase` holds its value until the next result. With three equal
// samples (no modulation) the angle is 0. Residual angle error after 14
// steps is below 0.01 rad, well under one PW=8 LSB (0.0245 rad).
module psi3_phase #(
  parameter int unsigned IW   = wfs_pkg::IW,
  parameter int unsigned PW   = wfs_pkg::PW,
  parameter int unsigned ITER = 14
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [IW-1:0] i0,
  input  logic [IW-1:0] i1,
  input  logic [IW-1:0] i2,
  output logic          busy,
  output logic          done,
  output logic [PW-1:0] phase
);

  localparam int unsigned XW = IW + 18;   // headroom for scaling and CORDIC gain
  localparam int unsigned CW = $clog2(ITER + 1);

  // atan(2^-i) in units of 2*pi/65536.
  function automatic logic [15:0] atan_lut(input logic [CW-1:0] i);
    case (int'(i))
      0: return 16'd8192;
      1: return 16'd4836;
      2: return 16'd2555;
      3: return 16'd1297;
      4: return 16'd651;
      5: return 16'd326;
      6: return 16'd163;
      7: return 16'd81;
      8: return 16'd41;
      9: return 16'd20;
      10: return 16'd10;
      11: return 16'd5;
      12: return 16'd3;
      13: return 16'd1;
      14: return 16'd1;
      default: return 16'd0;
    endcase
  endfunction

  logic signed [XW-1:0] x, y;
  logic        [15:0]   z;
  logic        [CW-1:0] k;
  logic                 fold;   // fold stage pending

  // Arguments of atan2, formed from the raw samples.
  logic signed [IW+2:0] re_s, im_s;
  logic signed [XW-1:0] re_x, im_x;
  always_comb begin
    re_s = 2 * $signed({3'b000, i0}) - $signed({3'b000, i1}) - $signed({3'b000, i2});
    im_s = $signed({3'b000, i1}) - $signed({3'b000, i2});
    re_x = XW'(re_s) * XW'(4096);
    im_x = XW'(im_s) * XW'(7094);
  end

  logic signed [XW-1:0] xs, ys;
  assign xs = x >>> k;
  assign ys = y >>> k;

  // Angle rounded to the nearest PW-bit phase word.
  logic [PW-1:0] z_round;
  assign z_round = PW'((z + 16'(1 << (15 - PW))) >> (16 - PW));

  logic fin;   // last CORDIC step retired; result is rounded next clock
  logic zero;  // both arguments zero: angle undefined, report 0

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      done  <= 1'b0;
      fin   <= 1'b0;
      zero  <= 1'b0;
      fold  <= 1'b0;
      phase <= '0;
      x     <= '0;
      y     <= '0;
      z     <= '0;
      k     <= '0;
    end else begin
      done <= 1'b0;
      fin  <= 1'b0;
      if (fin) begin
        phase <= zero ? '0 : z_round;
        done  <= 1'b1;
      end
      if (!busy) begin
        if (start && !fin) begin
          busy <= 1'b1;
          fold <= 1'b1;
          zero <= (re_s == 0) && (im_s == 0);
          x    <= re_x;
          y    <= im_x;
          z    <= '0;
          k    <= '0;
        end
      end else if (fold) begin
        fold <= 1'b0;
        if (x < 0) begin
          x <= -x;
          y <= -y;
          z <= 16'h8000;
        end
      end else begin
        if (y >= 0) begin
          x <= x + ys;
          y <= y - xs;
          z <= z + atan_lut(k);
        end else begin
          x <= x - ys;
          y <= y + xs;
          z <= z - atan_lut(k);
        end
        k <= k + 1'b1;
        if (k == CW'(ITER - 1)) begin
          busy <= 1'b0;
          fin  <= 1'b1;
        end
      end
    end
  end

endmodule

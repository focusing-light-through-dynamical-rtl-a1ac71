// daq_rx: receives the three PMT samples of one iteration from the DAQ board.
//
// The DAQ digitizes the PMT on each trigger and forwards the values to the
// FPGA (about 49 us after the third measurement in the published system).
// Here the samples arrive as a word stream, `s_valid` qualifying `s_data`,
// in trigger order. An `arm` pulse opens a new set; the first three words
// after it land in i0, i1, i2 and `done` pulses with `ready` rising; `ready`
// stays high until the next `arm`. Words that arrive while not armed, or
// after the third, are dropped and counted in `overrun`. The word-stream
// link and the overrun count are this design's choices; the paper does not
// describe the link between the two boards.
module daq_rx #(
  parameter int unsigned IW = wfs_pkg::IW
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          arm,
  input  logic          s_valid,
  input  logic [IW-1:0] s_data,
  output logic [IW-1:0] i0,
  output logic [IW-1:0] i1,
  output logic [IW-1:0] i2,
  output logic          ready,
  output logic          done,
  output logic [15:0]   overrun
);

  logic       armed;
  logic [1:0] n;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      armed   <= 1'b0;
      n       <= '0;
      ready   <= 1'b0;
      done    <= 1'b0;
      overrun <= '0;
      i0      <= '0;
      i1      <= '0;
      i2      <= '0;
    end else begin
      done <= 1'b0;
      if (arm) begin
        armed <= 1'b1;
        ready <= 1'b0;
        n     <= '0;
      end else if (s_valid) begin
        if (armed) begin
          case (n)
            2'd0: i0 <= s_data;
            2'd1: i1 <= s_data;
            default: i2 <= s_data;
          endcase
          n <= n + 1'b1;
          if (n == 2'd2) begin
            armed <= 1'b0;
            ready <= 1'b1;
            done  <= 1'b1;
          end
        end else if (overrun != '1) begin
          overrun <= overrun + 1'b1;
        end
      end
    end
  end

endmodule

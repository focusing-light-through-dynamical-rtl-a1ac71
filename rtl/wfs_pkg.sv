// wfs_pkg: constants and types shared by the closed-loop wavefront optimizer.
//
// All times are expressed in clock cycles of CLK_HZ. The optimizer's schedule
// follows the published iteration of 243 us: 13 us mask transfer, 68 us
// acquisition window inside a 100 us dephasing ramp, 49 us sample transfer
// from the DAQ, 13 us optimum-mask transfer and 100 us mirror settling. The
// 80 MHz clock is this design's choice: at one pixel per clock it makes a
// 1024-slot mask transfer last 12.8 us, which is the 13 us the schedule
// needs. Phase words are unsigned fractions of 2*pi (PW bits), so phase
// arithmetic wraps modulo 2*pi by itself.
package wfs_pkg;

  // Clock and timing (cycles at CLK_HZ).
  localparam int unsigned CLK_HZ      = 80_000_000;
  localparam int unsigned T_RAMP_CYC  = 8000;   // 100 us, 0 -> 2*pi dephasing
  localparam int unsigned T_MEAS_CYC  = 5440;   // 68 us, end of third acquisition
  localparam int unsigned T_SETTLE_CYC = 8000;  // 100 us, optimum phase settling
  localparam int unsigned TRIG_W_CYC  = 8;      // 100 ns trigger pulse

  // SLM geometry: 32 x 32 grid, the four corners carry no segment (1020 used).
  localparam int unsigned GRID  = 32;
  localparam int unsigned N_PIX = GRID * GRID;  // Hadamard order

  // Word widths.
  localparam int unsigned PW = 8;   // phase word, LSB = 2*pi / 2^PW
  localparam int unsigned IW = 16;  // PMT sample from the DAQ

  // Sequencer states, one per row of the iteration timing diagram.
  typedef enum logic [3:0] {
    S_IDLE,        // not optimizing
    S_CLEAR,       // flattening the phase mask
    S_GEN_FIRST,   // computing the first Hadamard mode before the first iteration
    S_PROBE_XFER,  // sending mask + 2*pi on the mode pixels
    S_MEASURE,     // dephasing ramp, three DAQ triggers
    S_WAIT_DAQ,    // waiting for the three samples
    S_COMPUTE,     // three-phase interferometry
    S_UPDATE_XFER, // adding the optimum phase, writing back, sending the mask
    S_SETTLE       // mirror settling, next mode computed meanwhile
  } loop_state_t;

endpackage

// radar_pkg: constants and types shared by the pulse-radar baseband.
//
// The sizes follow the radar's published configuration: a 448-sample
// transmit chirp (also the number of complex multipliers, K), a 3136-sample
// receive window, 16-bit I/Q samples, a 42-bit correlation accumulator and
// 64-bit words towards the host. The complex sample is a packed struct with
// the in-phase part in the upper half.
package radar_pkg;

  localparam int unsigned K          = 448;   // chirp length = number of complex multipliers
  localparam int unsigned RX2_DEPTH  = 3136;  // receive window in samples
  localparam int unsigned SAMPLE_W   = 16;    // bits per I or Q sample
  localparam int unsigned ACC_W      = 42;    // correlation result per component
  localparam int unsigned HOST_W     = 64;    // FIFO word towards the host
  localparam int unsigned PRI_CYCLES = 1_200_000; // 10 ms at 120 MHz

  typedef struct packed {
    logic signed [SAMPLE_W-1:0] i;
    logic signed [SAMPLE_W-1:0] q;
  } cplx_t;

  // Saturate a 17-bit signed value to the 16-bit sample range.
  function automatic logic signed [SAMPLE_W-1:0] sat16(input logic signed [SAMPLE_W:0] v);
    if (v > 17'sd32767)       return 16'sh7fff;
    else if (v < -17'sd32768) return 16'sh8000;
    else                      return v[SAMPLE_W-1:0];
  endfunction

endpackage

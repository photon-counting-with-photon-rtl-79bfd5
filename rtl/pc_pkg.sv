// pc_pkg: types and constants shared by the photon-counting TDC/ACDC logic.
//
// The logic runs on one clock of 400 MHz, so one clock cycle is 2.5 ns, the
// trigger resolution of the system. A timestamp is {coarse, fine}: the coarse
// part counts clock cycles, the fine part counts delay-line taps, FINE_BITS of
// them spanning one cycle. With 8 + 8 bits one LSB is 2.5 ns / 256 = 9.77 ps and
// the timestamp wraps after 256 cycles = 640 ns, the TDC's full-scale range.
//
// Every result leaves the chip as a 48-bit record (record_t):
//   tag     2 bits  TAG_TIME for a START-to-STOP interval, TAG_COUNT for the
//                   per-acquisition channel pattern of the ACDC
//   acq_id  8 bits  acquisition number, incremented at every START
//   chan    6 bits  TIME: channel index (0 = CH1); COUNT: number of channels hit
//   payload 32 bits TIME: interval in fine LSBs (low 16 bits);
//                   COUNT: bit i set when channel i had an event in the window
// The 400 MHz clock, the tap count and the record layout are this design's own
// choices; the 2.5 ns resolution, the 640 ns range and the 8 channels are the
// system's figures.
`timescale 1ps/1ps
package pc_pkg;

  localparam int unsigned COARSE_BITS = 8;                       // 256 cycles = 640 ns
  localparam int unsigned FINE_BITS   = 8;                       // 256 taps per cycle
  localparam int unsigned TS_BITS     = COARSE_BITS + FINE_BITS; // 16-bit timestamp
  localparam int unsigned ID_BITS     = 8;
  localparam int unsigned CHF_BITS    = 6;
  localparam int unsigned PAYLOAD_BITS = 32;

  typedef logic [TS_BITS-1:0] ts_t;
  typedef logic [ID_BITS-1:0] acq_id_t;

  typedef enum logic [1:0] {
    TAG_NONE  = 2'd0,
    TAG_TIME  = 2'd1,
    TAG_COUNT = 2'd2
  } tag_e;

  typedef struct packed {
    tag_e                    tag;
    acq_id_t                 acq_id;
    logic [CHF_BITS-1:0]     chan;
    logic [PAYLOAD_BITS-1:0] payload;
  } record_t;

endpackage

// l0tp_pkg: types and constants shared by the NA62 Level-0 trigger processor.
//
// A primitive is one detector hit summary: a 32-bit timestamp counted in
// periods of the 40 MHz master clock (24.95 ns), an 8-bit fine time whose LSB
// is 1/256 of that period, and a 16-bit primitive ID whose bit 15 flags a
// calibration primitive. The fine-time LSB, the ID width and bit 15 follow the
// paper; the 32-bit timestamp width is this design's choice.
//
// A frame is 256 master-clock periods (6.4 us), so the frame number of a
// primitive is its timestamp above bit 8. The alignment RAMs hold 16384 slots
// (51.2 us at 3.125 ns per slot), the latency buffer is addressed by the low
// 16 bits of the timestamp, and the frame FIFOs are 8192 words deep.
package l0tp_pkg;

  localparam int TS_W       = 32;   // timestamp width (master-clock periods)
  localparam int FINE_W     = 8;    // fine time width (1/256 of a period)
  localparam int PID_W      = 16;   // primitive ID width
  localparam int FRAME_BITS = 8;    // 256 periods per 6.4 us frame
  localparam int NSRC       = 7;    // primitive sources (Ethernet input links)
  localparam int SRC_W      = 3;    // bits to number a source
  localparam int NMASK      = 16;   // trigger masks in the associative memory
  localparam int NDET       = 16;   // choke/error inputs from detectors
  localparam int ALIGN_AW   = 14;   // alignment RAM address bits (16384 slots)
  localparam int LAT_AW     = 16;   // latency buffer address bits (timestamp LSBs)
  localparam int WIN_W      = 12;   // timing-cut half window, in fine-time LSBs
  localparam int DS_W       = 16;   // downscaling factor width
  localparam int TIME_W     = TS_W + FINE_W;  // full time in fine-time LSBs
  localparam int SLOT_W     = TIME_W;         // slot number width

  typedef struct packed {
    logic [TS_W-1:0]   ts;
    logic [FINE_W-1:0] fine;
    logic [PID_W-1:0]  pid;
  } prim_t;

  // Entry of a frame FIFO: a primitive, or (eof = 1) the end of a frame.
  typedef struct packed {
    logic  eof;
    prim_t prim;
  } frame_word_t;

  typedef enum logic [3:0] {
    TK_NONE        = 4'd0,
    TK_PHYSICS     = 4'd1,   // a trigger mask of the associative memory
    TK_CONTROL     = 4'd2,   // minimum-bias trigger driven by the control detector
    TK_CALIB_PRIM  = 4'd3,   // calibration primitive (PID bit 15 set)
    TK_CALIB_NIM   = 4'd4,   // LKr calibration NIM signal
    TK_PERIODIC0   = 4'd5,
    TK_PERIODIC1   = 4'd6,
    TK_RANDOM      = 4'd7,
    TK_CHOKE_ON    = 4'd8,
    TK_CHOKE_OFF   = 4'd9,
    TK_ERROR_ON    = 4'd10,
    TK_ERROR_OFF   = 4'd11,
    TK_AUTOCHOKE_ON  = 4'd12,
    TK_AUTOCHOKE_OFF = 4'd13
  } trig_kind_e;

  // Everything known about one trigger: what the detectors and the PC farm receive.
  typedef struct packed {
    trig_kind_e                   kind;
    logic [TS_W-1:0]              ts;
    logic [FINE_W-1:0]            fine;
    logic [NMASK-1:0]             masks;   // masks that fired after downscaling
    logic [NSRC-1:0][PID_W-1:0]   gid;     // global primitive ID of each source
  } trig_t;

  localparam int TRIG_W = $bits(trig_t);

  // Slot number of a primitive time when fine_bits bits of fine time are used:
  // the time in fine-time LSBs with the unused fine bits dropped.
  function automatic logic [SLOT_W-1:0] slot_of(input logic [TS_W-1:0] ts,
                                                input logic [FINE_W-1:0] fine,
                                                input logic [1:0] fine_bits);
    logic [TIME_W-1:0] t;
    t = {ts, fine};
    return SLOT_W'(t >> (FINE_W - int'(fine_bits)));
  endfunction

  // |a - b| of two full times, in fine-time LSBs.
  function automatic logic [TIME_W-1:0] time_dist(input logic [TIME_W-1:0] a,
                                                  input logic [TIME_W-1:0] b);
    return (a >= b) ? a - b : b - a;
  endfunction

endpackage

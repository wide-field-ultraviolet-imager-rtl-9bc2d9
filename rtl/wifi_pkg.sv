// wifi_pkg: types and constants shared by the UV imager readout design.
//
// The readout has two modes, frame transfer and photon counting, selected at
// run time without any hardware change. In frame transfer mode every pixel is
// sent as a 16-bit packet holding the 8-bit pixel value together with 4-bit
// frame and row identifiers. In photon counting mode each detected photon
// event is sent as an event-list record of x, y and a time stamp.
// Field widths of the packet follow the paper; the field order within the
// packet, the event record layout and the fixed-point format are this
// design's own choices.
package wifi_pkg;

  // Sensor output: 8-bit pixels (the sensor also offers 10-bit output; the
  // 8-bit mode is the one the packet format carries).
  localparam int unsigned PIX_W = 8;

  // Sub-pixel resolution of the centroids: 4 fractional bits (1/16 pixel).
  localparam int unsigned FRAC_W = 4;

  typedef enum logic {
    MODE_FRAME_TRANSFER = 1'b0,
    MODE_PHOTON_COUNT   = 1'b1
  } readout_mode_e;

  // Frame-transfer packet, sent most significant byte first.
  typedef struct packed {
    logic [3:0]       frame_id;  // frame number modulo 16
    logic [3:0]       row_id;    // row number modulo 16
    logic [PIX_W-1:0] pixel;     // raw pixel value
  } frame_packet_t;

  // Photon event record, 48 bits, sent most significant byte first.
  // x and y are unsigned fixed point with FRAC_W fractional bits.
  typedef struct packed {
    logic [15:0] x_q;        // column centroid, 12.4
    logic [15:0] y_q;        // row centroid, 12.4
    logic [15:0] timestamp;  // frame counter at the time of the event
  } photon_event_t;

endpackage

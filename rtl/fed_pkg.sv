// fed_pkg: constants, types and helper functions shared by the FED readout RTL.
//
// The APV25 frame sizes (24-word header, 256 data words, 128 strips per chip),
// the 10-bit ADC width, the 8 front-end units of 12 fibres and the 2 kB
// cluster FIFO are the numbers of the FED design. The strip reordering
// formula, the TCS 4-bit codes, the event record layout and the CRC
// polynomial are this implementation's choices (the TCS codes and the
// APV25 readout order follow the CMS conventions as commonly documented).
package fed_pkg;

  localparam int ADC_W          = 10;   // AD9218 resolution
  localparam int VAL_W          = 11;   // signed pedestal-subtracted value
  localparam int HDR_WORDS      = 24;   // APV25 frame header words (two muxed chips)
  localparam int START_WORDS    = 6;    // 3 start bits x 2 chips
  localparam int ADDR_BITS      = 8;    // pipeline address bits per chip
  localparam int DATA_WORDS     = 256;  // data words per fibre frame
  localparam int STRIPS_PER_APV = 128;
  localparam int CH_PER_UNIT    = 12;
  localparam int N_UNITS        = 8;
  localparam int N_FIBRES       = CH_PER_UNIT * N_UNITS;  // 96
  localparam int PIPE_CELLS     = 192;  // APV25 analogue pipeline length
  localparam int ORBIT_BX       = 3564; // bunch crossings per LHC orbit

  // 4-bit TCS handshake codes (CMS fast-status convention).
  typedef enum logic [3:0] {
    TCS_DISCONNECTED = 4'b0000,
    TCS_WARN         = 4'b0001,
    TCS_OOS          = 4'b0010,
    TCS_BUSY         = 4'b0100,
    TCS_READY        = 4'b1000,
    TCS_ERROR        = 4'b1100
  } tcs_e;

  // Header information of one fibre frame, kept with its data.
  typedef struct packed {
    logic                 missing;   // no frame seen inside the time window
    logic [1:0]           err;       // APV25 error bits, 1 = error
    logic [ADDR_BITS-1:0] addr0;     // pipeline address of chip 0
    logic [ADDR_BITS-1:0] addr1;     // pipeline address of chip 1
  } frame_tag_t;

  // Word of the event buffer: 64 data bits and the S-LINK control flag,
  // which marks the header and trailer words of an event record.
  typedef struct packed {
    logic        ctrl;
    logic [63:0] data;
  } buf_word_t;

  // Severity of a TCS code, used to merge several status sources.
  function automatic logic [2:0] tcs_severity(logic [3:0] c);
    case (c)
      TCS_ERROR:        return 3'd5;
      TCS_DISCONNECTED: return 3'd5;
      TCS_OOS:          return 3'd4;
      TCS_BUSY:         return 3'd3;
      TCS_WARN:         return 3'd2;
      TCS_READY:        return 3'd1;
      default:          return 3'd5;
    endcase
  endfunction

  // Strip number (0..255) of data word `idx` of a fibre frame. Even words
  // come from chip 0, odd words from chip 1; within a chip the APV25 sends
  // channel 32*(n%4) + 8*(n/4) - 31*(n/16) as its n-th sample.
  function automatic logic [7:0] apv_strip(logic [7:0] idx);
    int n, ch;
    n  = int'(idx[7:1]);
    ch = 32 * (n % 4) + 8 * (n / 4) - 31 * (n / 16);
    return {idx[0], 7'(ch)};
  endfunction

  // CRC-16-CCITT (x^16 + x^12 + x^5 + 1) over one 64-bit word, MSB first.
  function automatic logic [15:0] crc16_word(logic [15:0] crc, logic [63:0] d);
    logic [15:0] c;
    logic        fb;
    c = crc;
    for (int i = 63; i >= 0; i--) begin
      fb = c[15] ^ d[i];
      c  = {c[14:0], 1'b0};
      if (fb) c = c ^ 16'h1021;
    end
    return c;
  endfunction

endpackage

// ct_pkg: types, constants and helper functions shared by the corner-turn
// firmware of one ICE motherboard FPGA.
//
// Packet format. Every packet that travels between corner-turn stages (over
// the backplane mesh, the inter-crate QSFP+ links or the GPU links) is a
// sequence of 32-bit words:
//   4 header words | data block | saturation-flag block | ADC-flag block | status word
// The header layout (which fields exist and their order, 16 bytes, a 48-bit
// timestamp split over two words) follows the packet drawing of the design.
// The drawing prints only bit numbers 31 and 0, so the field widths below are
// this design's choice, sized to the proportions of the drawing:
//   word0 = {stream_id[15:0], proto[3:0], hdr_len[3:0], cookie[7:0]}
//   word1 = {enc[3:0], nframes[3:0], nfreq[11:0], nant[11:0]}
//   word2 = {ancillary[15:0], timestamp[47:32]}
//   word3 = timestamp[31:0]
// Blocks are in frame-major, then channel, then antenna order: element
// (f,c,a) has index (f*NFREQ + c)*NANT + a. The data block holds one byte
// (4-bit real, 4-bit imaginary) per element, four per word, lowest byte
// first. The saturation-flag block holds one bit per element, 32 per word,
// bit 0 first. The ADC-flag block holds two bits per antenna per frame
// (bit 0 ADC overflow, bit 1 FFT overflow), 16 antennas per word.
//
// Link code. The FPGA-to-FPGA links use a reduced 10G-Ethernet-like code on a
// 32-bit data + 4-bit control word stream (XGMII style): idle, start and
// terminate characters and a CRC-32 word after the payload.
package ct_pkg;

  // ---------------------------------------------------------------- header
  localparam logic [7:0] CT_COOKIE   = 8'hC5;  // error-checking cookie
  localparam logic [3:0] CT_PROTO    = 4'h1;   // protocol version
  localparam logic [3:0] CT_HDR_LEN  = 4'd4;   // header length in words
  localparam logic [3:0] CT_ENC_4P4  = 4'h1;   // 4-bit real + 4-bit imaginary
  localparam int unsigned CT_HDR_WORDS = 4;

  typedef struct packed {
    logic [1:0] stage;   // corner-turn stage that built the packet (1..3)
    logic [3:0] crate;
    logic [3:0] slot;
    logic [5:0] lane;    // output stream number within the stage
  } stream_id_t;

  typedef struct packed {
    stream_id_t  sid;
    logic [3:0]  proto;
    logic [3:0]  hdr_len;
    logic [7:0]  cookie;
    logic [3:0]  enc;
    logic [3:0]  nframes;
    logic [11:0] nfreq;
    logic [11:0] nant;
    logic [15:0] ancillary;
    logic [47:0] timestamp;
  } ct_header_t;   // 128 bits = the 4 header words, word0 in [127:96]

  // One entry of a stage's programmable channel table: where an input
  // frequency channel goes (output stream and channel slot in that stream).
  typedef struct packed {
    logic        valid;
    logic [5:0]  dest;
    logic [11:0] slot;
  } map_entry_t;

  // Where one element of the current payload word of an aligned beat sits
  // in its input packet: frame f and antenna a (the channel is resolved
  // through the channel table).
  typedef struct packed {
    logic        valid;
    logic [3:0]  f;
    logic [11:0] a;
  } elem_t;

  // Block of the input packet that the current payload word belongs to.
  typedef enum logic [1:0] {SEG_DATA, SEG_FLAG, SEG_ADC, SEG_STATUS} seg_t;

  // --------------------------------------------------------- status word
  // [2:0]   a lane was missing at stage 1/2/3 (packet lost, data zeroed)
  // [6:4]   a lane at stage 1/2/3 had a CRC or cookie error
  // [10:8]  a buffer overflow (dropped frames) at stage 1/2/3 since the
  //         previous packet of that stream
  // [31:16] number of missing lane packets summed over all stages (saturating)
  localparam int unsigned ST_LOST = 0;
  localparam int unsigned ST_ERR  = 4;
  localparam int unsigned ST_OVF  = 8;

  // ------------------------------------------------------------ link code
  localparam logic [7:0] XG_IDLE  = 8'h07;
  localparam logic [7:0] XG_START = 8'hFB;
  localparam logic [7:0] XG_TERM  = 8'hFD;
  localparam logic [7:0] XG_PRE   = 8'h55;
  localparam logic [7:0] XG_SFD   = 8'hD5;
  localparam logic [31:0] XG_IDLE_WORD  = {4{XG_IDLE}};
  localparam logic [31:0] XG_START_WORD = {XG_PRE, XG_PRE, XG_PRE, XG_START};

  // ------------------------------------------------------------- CRC-32
  // IEEE 802.3 CRC-32, reflected polynomial 0xEDB88320, bytes processed
  // lowest byte of the word first, bits LSB first. Register starts at
  // 0xFFFFFFFF; the transmitted value is the bitwise complement.
  function automatic logic [31:0] crc32_bytes(input logic [31:0] crc,
                                              input logic [31:0] data,
                                              input int unsigned nbytes);
    logic [31:0] c;
    c = crc;
    for (int b = 0; b < 4; b++) begin
      if (b < nbytes) begin
        for (int i = 0; i < 8; i++) begin
          if ((c[0] ^ data[8*b+i]) == 1'b1) c = (c >> 1) ^ 32'hEDB88320;
          else                              c = c >> 1;
        end
      end
    end
    return c;
  endfunction

  function automatic logic [31:0] crc32_word(input logic [31:0] crc,
                                             input logic [31:0] data);
    return crc32_bytes(crc, data, 4);
  endfunction

  // ------------------------------------------------- block size helpers
  // Words of each block for a packet of nf frames, nc channels, na antennas.
  function automatic int unsigned data_words(input int unsigned nf,
                                             input int unsigned nc,
                                             input int unsigned na);
    return (nf * nc * na + 3) / 4;
  endfunction
  function automatic int unsigned flag_words(input int unsigned nf,
                                             input int unsigned nc,
                                             input int unsigned na);
    return (nf * nc * na + 31) / 32;
  endfunction
  function automatic int unsigned adc_words(input int unsigned nf,
                                            input int unsigned na);
    return (2 * nf * na + 31) / 32;
  endfunction
  function automatic int unsigned packet_words(input int unsigned nf,
                                               input int unsigned nc,
                                               input int unsigned na);
    return CT_HDR_WORDS + data_words(nf, nc, na) + flag_words(nf, nc, na)
           + adc_words(nf, na) + 1;
  endfunction

endpackage

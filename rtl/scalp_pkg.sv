// scalp_pkg: types and constants shared by the SCALP node routing layer.
//
// A SCALP node moves packets of 64-bit (8-byte) words between its local
// DMA channel and up to six neighbour nodes (north, south, east, west, top,
// bottom).  A packet is one header word followed by at most 64 payload
// words; the header carries the destination and source node in 3D
// coordinates.  The 8-byte word and the 64-word packet follow the paper; the
// header layout, the coordinate width and the port numbering are this
// design's own choices.
package scalp_pkg;

  // Word width: 8 bytes per word.
  localparam int unsigned DATA_W = 64;
  // Largest payload of one packet, in words.
  localparam int unsigned PKT_WORDS = 64;
  // Bits per coordinate axis (a 16x16x16 cube at most).
  localparam int unsigned COORD_W = 4;
  // Width of the header's payload-length field (0..64 needs 7 bits).
  localparam int unsigned LEN_W = 7;

  // Router ports: the local (DMA) port and the six neighbour directions.
  typedef enum logic [2:0] {
    P_LOCAL  = 3'd0,
    P_NORTH  = 3'd1,
    P_SOUTH  = 3'd2,
    P_EAST   = 3'd3,
    P_WEST   = 3'd4,
    P_TOP    = 3'd5,
    P_BOTTOM = 3'd6
  } port_e;
  localparam int unsigned NPORTS = 7;

  typedef struct packed {
    logic [COORD_W-1:0] z;
    logic [COORD_W-1:0] y;
    logic [COORD_W-1:0] x;
  } coord_t;

  // Header word, the first word of every packet.
  typedef struct packed {
    logic [DATA_W-2*3*COORD_W-LEN_W-1:0] user;  // free for software
    logic [LEN_W-1:0] len;                        // payload words that follow
    coord_t           src;
    coord_t           dst;
  } header_t;

  // One beat of an AXI-stream-like channel (valid/ready travel beside it).
  typedef struct packed {
    logic [DATA_W-1:0] data;
    logic              last;
  } beat_t;

  // CRC-32 (IEEE 802.3 polynomial, reflected form) of one 64-bit word,
  // starting from a running value.  Used by the link layer.
  function automatic logic [31:0] crc32_word(input logic [31:0] crc_in,
                                             input logic [DATA_W-1:0] word);
    logic [31:0] c;
    c = crc_in;
    for (int i = 0; i < DATA_W; i++) begin
      if (c[0] ^ word[i]) c = (c >> 1) ^ 32'hEDB8_8320;
      else                c = c >> 1;
    end
    return c;
  endfunction

endpackage

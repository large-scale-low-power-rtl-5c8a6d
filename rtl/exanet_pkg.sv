// exanet_pkg: types and constants shared by the ExaNet network IP.
//
// The EXApacket is a 128-bit header, a payload of up to 4096 bytes carried
// in 128-bit words, and a 128-bit footer. Field order and the bit positions
// 63, 47, 39, 31 and 0 of each 64-bit row come from the published packet
// drawing; the remaining field edges were read off its bit grid and are
// marked "grid" below. The first row of each drawing is taken to be the low
// 64 bits of the 128-bit word (this design's choice).
//
// On the 64-bit serial link a packet is framed by a MAGIC word and a START
// word; credit words travel as control words. The values of MAGIC, START and
// of the credit tag are this design's own, as is the split of the 22-bit
// coordinate field into X, Y, Z and local-port sub-fields.
package exanet_pkg;

  localparam int unsigned WORD_W = 128;  // router bus width
  localparam int unsigned LINK_W = 64;   // APElink <-> transceiver width
  localparam int unsigned COORD_W = 4;   // bits per lattice coordinate (assumed)
  localparam int unsigned NDIM = 3;      // X, Y, Z
  localparam int unsigned MAX_PAYLOAD_BYTES = 4096;
  localparam int unsigned MAX_PAYLOAD_WORDS = MAX_PAYLOAD_BYTES / 16;

  // 22-bit coordinate field (assumed layout)
  typedef struct packed {
    logic [7:0]         rsvd;
    logic [1:0]         port;  // intra-tile port at the destination node
    logic [COORD_W-1:0] z;
    logic [COORD_W-1:0] y;
    logic [COORD_W-1:0] x;
  } coord_t;

  // 128-bit header. Low row (bits 63:0): size, packet type, destination
  // coordinates, protocol domain, virtual channel. High row (127:64): EDAC,
  // reserved, destination memory address.
  typedef struct packed {
    logic [15:0] edac;       // 127:112
    logic [7:0]  rsvd1;      // 111:104
    logic [39:0] dest_addr;  // 103:64
    logic [1:0]  rsvd0;      //  63:62 (grid)
    logic [13:0] size;       //  61:48 payload size in bytes (grid)
    logic [4:0]  ptype;      //  47:43 (grid)
    coord_t      dest;       //  42:21 (grid)
    logic [15:0] proto;      //  20:5  (grid)
    logic [4:0]  vc;         //   4:0  (grid)
  } hdr_t;

  // 128-bit footer. Low row: user, valid, source coordinates, channel id.
  // High row: CRC (63:32 of the row), user.
  typedef struct packed {
    logic [31:0] crc;        // 127:96
    logic [31:0] user_lo;    //  95:64
    logic [23:0] user_hi;    //  63:40
    logic [3:0]  valid;      //  39:36 (grid)
    coord_t      src;        //  35:14 (grid)
    logic [13:0] chan;       //  13:0  (grid)
  } ftr_t;

  // Link control words (values assumed)
  localparam logic [63:0] LINK_MAGIC = 64'hA5E1_1AC0_FFEE_5A5A;
  localparam logic [63:0] LINK_START = 64'h5AA5_0000_57A7_0001;
  localparam logic [15:0] CREDIT_TAG = 16'hC7ED;

  // Credit word: cumulative counts (modulo) of 128-bit words the receiver
  // has freed in each virtual channel's header/footer and payload FIFO, plus
  // an 8-bit health field for fault signalling.
  typedef struct packed {
    logic [15:0] tag;
    logic [7:0]  health;
    logic [11:0] vc1_data;
    logic [7:0]  vc1_hf;
    logic [11:0] vc0_data;
    logic [7:0]  vc0_hf;
  } credit_t;

  // One word on the crossbar
  typedef struct packed {
    logic              valid;
    logic              hf;    // 1: header or footer, 0: payload
    logic [WORD_W-1:0] data;
  } xword_t;

  // Number of 128-bit payload words for a size in bytes
  function automatic logic [12:0] payload_words(input logic [13:0] size);
    logic [14:0] s;
    s = {1'b0, size} + 15'd15;
    return s[14:4] > 11'(MAX_PAYLOAD_WORDS) ? 13'(MAX_PAYLOAD_WORDS) : {2'b00, s[14:4]};
  endfunction

  // --- header SECDED code: extended Hamming (120,112) over the 112 header
  // bits outside the EDAC field; EDAC[7:0] = {overall parity, 7 check bits},
  // EDAC[15:8] is sent as zero.
  function automatic logic [111:0] ecc_data(input hdr_t h);
    return {h.rsvd1, h.dest_addr, h.rsvd0, h.size, h.ptype, h.dest, h.proto, h.vc};
  endfunction

  function automatic logic [6:0] ecc_check_bits(input logic [111:0] d);
    logic [6:0] p;
    int unsigned idx;
    p = '0;
    idx = 0;
    for (int unsigned pos = 1; pos < 120; pos++) begin
      if ((pos & (pos - 1)) != 0) begin
        if (d[idx]) p = p ^ 7'(pos);
        idx++;
      end
    end
    return p;
  endfunction

  // data index of Hamming position pos (pos not a power of two)
  function automatic int unsigned ecc_pos_to_idx(input logic [6:0] pos);
    int unsigned idx;
    int unsigned r;
    idx = 0;
    r = 0;
    for (int unsigned q = 1; q < 120; q++) begin
      if ((q & (q - 1)) != 0) begin
        if (q == 32'(pos)) r = idx;
        idx++;
      end
    end
    return r;
  endfunction

endpackage

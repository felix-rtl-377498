// felix_pkg: types and constants shared by the FELIX firmware model.
//
// Holds the 256-bit block format that the Central Router exchanges with the
// DMA engine through the ToHost and FromHost FIFOs, the request and
// completion headers the DMA engine puts on the PCIe side, the GBT frame
// constants and the scrambler used by the GBT link.
//
// The 256-bit FIFO width and the 8 E-links per
// GBT link follow the paper. Every bit layout defined here (block header,
// request header, GBT frame layout, scrambler polynomial) is this design's
// own choice; the paper gives none of them.
package felix_pkg;

  localparam int unsigned DATA_W      = 256;  // Wupper user FIFO width
  localparam int unsigned BLK_BYTES   = 28;   // payload bytes per 256-bit block
  localparam int unsigned ELINK_ID_W  = 11;
  localparam int unsigned SEQ_W       = 5;

  // ---------------------------------------------------------------------
  // Block: one 256-bit FIFO word. Bits [31:0] are the header, bits
  // [255:32] carry up to 28 payload bytes, byte k in bits [32+8k +: 8].
  // ---------------------------------------------------------------------
  localparam logic [7:0] BLK_MARKER = 8'hAB;

  typedef struct packed {
    logic [7:0]            marker;   // always BLK_MARKER
    logic [ELINK_ID_W-1:0] elink;    // {link, e-link}
    logic [SEQ_W-1:0]      seq;      // per E-link block counter
    logic                  eoc;      // last block of a chunk
    logic [4:0]            nbytes;   // valid payload bytes, 1..28
    logic [1:0]            rsvd;
  } blk_hdr_t;                       // 32 bits

  typedef struct packed {
    logic [BLK_BYTES*8-1:0] payload;
    blk_hdr_t               hdr;
  } block_t;                         // 256 bits

  // ---------------------------------------------------------------------
  // PCIe request/completion headers (one full 256-bit beat each).
  // ---------------------------------------------------------------------
  typedef enum logic [3:0] {
    REQ_MEM_READ  = 4'h0,
    REQ_MEM_WRITE = 4'h1
  } req_type_e;

  typedef struct packed {
    logic [DATA_W-96-1:0] rsvd;
    logic [7:0]           tag;
    req_type_e            req_type;
    logic [19:0]          nwords;    // payload length in 256-bit words
    logic [63:0]          addr;      // byte address in host memory
  } rq_hdr_t;

  typedef struct packed {
    logic [DATA_W-48-1:0] rsvd;
    logic [7:0]           tag;
    logic [19:0]          nwords;    // payload words that follow
    logic [19:0]          status;    // 0 = successful completion
  } rc_hdr_t;

  // ---------------------------------------------------------------------
  // GBT frame: 120 bits = header(4) | IC(2) | EC(2) | data(80) | FEC(32).
  // IC, EC and data (the 84 bits after the header) are scrambled; the
  // header is sent as is so that the receiver can find the frame.
  // ---------------------------------------------------------------------
  localparam int unsigned FRAME_W  = 120;
  localparam logic [3:0]  HDR_DATA = 4'b0101;
  localparam logic [3:0]  HDR_IDLE = 4'b0110;

  // Self-synchronising scrambler, x^21 + x^19 + 1, on four 21-bit lanes.
  // Bit i of a lane is sent after bit i-1; y[n] = x[n] ^ y[n-19] ^ y[n-21].
  function automatic logic [20:0] scramble21(input logic [20:0] x,
                                             input logic [20:0] y_prev);
    logic [41:0] h;
    h = {21'b0, y_prev};
    for (int i = 0; i < 21; i++) begin
      h[21+i] = x[i] ^ h[21+i-19] ^ h[21+i-21];
    end
    return h[41:21];
  endfunction

  function automatic logic [20:0] descramble21(input logic [20:0] y,
                                               input logic [20:0] y_prev);
    logic [41:0] h;
    logic [20:0] x;
    h = {y, y_prev};
    for (int i = 0; i < 21; i++) begin
      x[i] = h[21+i] ^ h[21+i-19] ^ h[21+i-21];
    end
    return x;
  endfunction

  // Eight-bit check word per 21-bit lane, standing in for the FEC field:
  // byte-wise XOR of the lane padded to 24 bits.
  function automatic logic [7:0] lane_check(input logic [20:0] y);
    logic [23:0] p;
    p = {3'b0, y};
    return p[7:0] ^ p[15:8] ^ p[23:16];
  endfunction

endpackage

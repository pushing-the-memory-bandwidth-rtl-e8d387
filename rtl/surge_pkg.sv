// surge_pkg: types and constants shared by the salvage-link datapath.
//
// The link carries 68-byte flits, each with a 64-byte payload, as in the
// CXL link model this design follows. A flit here is laid out as a 2-byte
// header holding the protocol ID, the 64-byte payload, and a 2-byte check
// field (CRC-16). The 68-byte size and the 64-byte payload come from the
// source design; the split of the remaining 4 bytes into header and CRC, the
// protocol-ID encoding and the CRC polynomial (CCITT, 0x1021, init 0xFFFF)
// are this design's own choices.
package surge_pkg;

  localparam int unsigned FLIT_BYTES    = 68;
  localparam int unsigned PAYLOAD_BYTES = 64;
  localparam int unsigned HDR_BYTES     = 2;
  localparam int unsigned CRC_BYTES     = FLIT_BYTES - PAYLOAD_BYTES - HDR_BYTES;

  localparam int unsigned FLIT_W    = FLIT_BYTES * 8;     // 544
  localparam int unsigned PAYLOAD_W = PAYLOAD_BYTES * 8;  // 512
  localparam int unsigned HDR_W     = HDR_BYTES * 8;      // 16
  localparam int unsigned CRC_W     = CRC_BYTES * 8;      // 16

  // Protocol carried by a flit. CXL.cache shares the .cache/.mem stack.
  typedef enum logic [3:0] {
    PROTO_NONE  = 4'h0,
    PROTO_IO    = 4'h1,
    PROTO_CACHE = 4'h2,
    PROTO_MEM   = 4'h3
  } proto_e;

  typedef logic [PAYLOAD_W-1:0] payload_t;

  typedef struct packed {
    logic [11:0] rsvd;
    proto_e      proto;
  } flit_hdr_t;

  typedef struct packed {
    flit_hdr_t         hdr;
    payload_t          payload;
    logic [CRC_W-1:0]  crc;
  } flit_t;

  // Width of the wrap-around event counters.
  localparam int unsigned CNT_W = 32;
  typedef logic [CNT_W-1:0] cnt_t;

  // Event counters of the host-side multiplexing and arbitration stage.
  typedef struct packed {
    cnt_t tx_io;         // I/O flits sent on the link
    cnt_t tx_mem;        // .cache/.mem flits sent on the link
    cnt_t tx_mem_stall;  // cycles a memory flit waited behind an I/O flit
    cnt_t rx_io;         // I/O flits delivered to the CXL.io stack
    cnt_t rx_mem;        // .cache/.mem flits delivered to the .cache/.mem stack
    cnt_t rx_crc_err;    // received flits dropped for a bad CRC
    cnt_t rx_proto_err;  // received flits dropped for an unknown protocol ID
  } arb_stats_t;

  // Event counters of the 2-port CXL multiplexer.
  typedef struct packed {
    cnt_t dn_io;         // flits steered to the I/O device
    cnt_t dn_mem;        // flits steered to the salvage memory
    cnt_t dn_drop;       // flits dropped for an unknown protocol ID
    cnt_t up_io;         // flits merged from the I/O device
    cnt_t up_mem;        // flits merged from the salvage memory
    cnt_t up_mem_stall;  // cycles a salvage-memory flit waited behind an I/O flit
  } mux_stats_t;

  // True for the protocols handled by the .cache/.mem stack, which the
  // multiplexer sends to the salvage memory.
  function automatic logic is_cachemem(proto_e p);
    return (p == PROTO_CACHE) || (p == PROTO_MEM);
  endfunction

  // CRC-16/CCITT over header and payload, most significant bit first.
  function automatic logic [CRC_W-1:0] flit_crc(flit_hdr_t hdr, payload_t payload);
    logic [HDR_W+PAYLOAD_W-1:0] d;
    logic [15:0] c;
    logic        fb;
    d = {hdr, payload};
    c = 16'hFFFF;
    for (int i = HDR_W + PAYLOAD_W - 1; i >= 0; i--) begin
      fb = c[15] ^ d[i];
      c  = {c[14:0], 1'b0};
      if (fb) c = c ^ 16'h1021;
    end
    return c;
  endfunction

  // Builds a complete flit from a protocol ID and a payload.
  function automatic flit_t make_flit(proto_e p, payload_t payload);
    flit_t f;
    f.hdr.rsvd  = '0;
    f.hdr.proto = p;
    f.payload   = payload;
    f.crc       = flit_crc(f.hdr, payload);
    return f;
  endfunction

endpackage

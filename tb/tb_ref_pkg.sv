// tb_ref_pkg: reference functions for the testbenches, written apart from
// the RTL so that checks do not reuse the code they check.
//
// ref_crc computes the flit CRC-16 (CCITT polynomial 0x1021, initial value
// 0xFFFF, most significant bit first) byte by byte over the 66 bytes of
// header and payload, instead of the bitwise loop of the design. ref_flit
// assembles the 544-bit flit {header, payload, crc} as a plain bit vector.
//
// It also defines the request/response format the behavioural memory
// model understands inside a 64-byte payload (testbench convention only):
//   [511:504] opcode  [503:488] tag  [487:456] word address  [255:0] data
package tb_ref_pkg;

  localparam logic [7:0] OP_RD      = 8'h01;
  localparam logic [7:0] OP_WR      = 8'h02;
  localparam logic [7:0] OP_RD_RESP = 8'h81;
  localparam logic [7:0] OP_WR_ACK  = 8'h82;

  localparam logic [3:0] P_IO    = 4'h1;
  localparam logic [3:0] P_CACHE = 4'h2;
  localparam logic [3:0] P_MEM   = 4'h3;

  function automatic logic [15:0] ref_crc(logic [15:0] hdr, logic [511:0] payload);
    logic [527:0] d;
    logic [15:0]  c;
    logic [7:0]   b;
    d = {hdr, payload};
    c = 16'hFFFF;
    for (int k = 65; k >= 0; k--) begin
      b = d[k*8 +: 8];
      c = c ^ {b, 8'h00};
      for (int j = 0; j < 8; j++)
        c = c[15] ? ((c << 1) ^ 16'h1021) : (c << 1);
    end
    return c;
  endfunction

  function automatic logic [543:0] ref_flit(logic [3:0] proto, logic [511:0] payload);
    logic [15:0] hdr;
    hdr = {12'h000, proto};
    return {hdr, payload, ref_crc(hdr, payload)};
  endfunction

  function automatic logic [511:0] rand_payload();
    logic [511:0] p;
    for (int i = 0; i < 16; i++) p[i*32 +: 32] = $urandom;
    return p;
  endfunction

  function automatic logic [511:0] mem_req(logic [7:0] op, logic [15:0] tag,
                                           logic [31:0] addr, logic [255:0] data);
    logic [511:0] p;
    p = '0;
    p[511:504] = op;
    p[503:488] = tag;
    p[487:456] = addr;
    p[255:0]   = data;
    return p;
  endfunction

  // I/O packet payload: sequence number, source id, and a fill derived from
  // both, so a receiver can check every bit without a copy of what was sent.
  function automatic logic [511:0] io_payload(logic [31:0] seq, logic [7:0] id);
    logic [511:0] p;
    logic [31:0]  w;
    w = (seq * 32'h9E3779B9) ^ {24'h0, id};
    p = '0;
    for (int i = 0; i < 15; i++) p[i*32 +: 32] = w + i;
    p[511:480] = seq;
    p[479:472] = id;
    return p;
  endfunction

endpackage

// flexbus_arbiter: the multiplexing and arbitration stage of a CXL
// controller whose link carries both CXL.io and CXL.mem traffic.
//
// It sits between the two data link layers of the controller (PCIe/CXL.io,
// and CXL.cache/.mem) and the physical link. This is the hardware hook of
// the salvaging scheme: idle I/O bandwidth on an I/O link is reused for
// memory traffic by letting both kinds of traffic share the link flit by flit.
//
// Transmit: each data link layer hands over 64-byte payloads. The stage
// wraps a payload into a 68-byte flit (protocol ID, payload, CRC-16) and
// merges the two streams with strict I/O priority, as the source design
// configures the Flex Bus arbiter (the link belongs to the I/O device).
// Memory flits go out only in cycles without an I/O flit. A payload accepted
// in cycle t leaves on link_tx in cycle t+1; one flit per cycle at most.
//
// Receive: each flit's CRC is checked and the flit is steered by protocol ID
// to the CXL.io stack or to the .cache/.mem stack, combinationally, with
// back-pressure passed straight through. Flits with a bad CRC or an unknown
// protocol ID are dropped and counted; link-level retry, which a full CXL
// link layer would perform, is outside this block.
//
// All handshakes are valid/ready: a transfer happens in a cycle where both
// are high, and a sender keeps valid and data steady until then. The flit
// format, the CRC and the handshakes are this design's choices; the source
// design gives the 68-byte flit with a 64-byte payload and the I/O-first
// policy. Reset is synchronous, active low, and clears the counters.
module flexbus_arbiter
  import surge_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  // from the CXL.io data link layer
  input  logic       io_tx_valid,
  input  payload_t   io_tx_data,
  output logic       io_tx_ready,
  // from the CXL.cache/.mem data link layer
  input  logic       mem_tx_valid,
  input  payload_t   mem_tx_data,
  output logic       mem_tx_ready,
  // to the link
  output logic       link_tx_valid,
  output flit_t      link_tx_flit,
  input  logic       link_tx_ready,
  // from the link
  input  logic       link_rx_valid,
  input  flit_t      link_rx_flit,
  output logic       link_rx_ready,
  // to the CXL.io data link layer
  output logic       io_rx_valid,
  output payload_t   io_rx_data,
  input  logic       io_rx_ready,
  // to the CXL.cache/.mem data link layer
  output logic       mem_rx_valid,
  output proto_e     mem_rx_proto,
  output payload_t   mem_rx_data,
  input  logic       mem_rx_ready,
  // statistics
  output arb_stats_t stats
);

  // ---------------- transmit: wrap and merge, I/O first ----------------
  flit_t io_flit, mem_flit;

  assign io_flit  = make_flit(PROTO_IO,  io_tx_data);
  assign mem_flit = make_flit(PROTO_MEM, mem_tx_data);

  prio_merge2 #(.W(FLIT_W), .CNT_W(CNT_W)) u_tx_merge (
    .clk            (clk),
    .rst_n          (rst_n),
    .hi_valid       (io_tx_valid),
    .hi_data        (io_flit),
    .hi_ready       (io_tx_ready),
    .lo_valid       (mem_tx_valid),
    .lo_data        (mem_flit),
    .lo_ready       (mem_tx_ready),
    .out_valid      (link_tx_valid),
    .out_data       (link_tx_flit),
    .out_ready      (link_tx_ready),
    .hi_count       (stats.tx_io),
    .lo_count       (stats.tx_mem),
    .lo_stall_count (stats.tx_mem_stall)
  );

  // ---------------- receive: check and steer by protocol ----------------
  logic rx_crc_ok, rx_is_io, rx_is_mem, rx_drop_crc, rx_drop_proto;

  assign rx_crc_ok     = (flit_crc(link_rx_flit.hdr, link_rx_flit.payload) == link_rx_flit.crc);
  assign rx_is_io      = rx_crc_ok && (link_rx_flit.hdr.proto == PROTO_IO);
  assign rx_is_mem     = rx_crc_ok && is_cachemem(link_rx_flit.hdr.proto);
  assign rx_drop_crc   = !rx_crc_ok;
  assign rx_drop_proto = rx_crc_ok && !rx_is_io && !rx_is_mem;

  assign io_rx_valid   = link_rx_valid && rx_is_io;
  assign io_rx_data    = link_rx_flit.payload;
  assign mem_rx_valid  = link_rx_valid && rx_is_mem;
  assign mem_rx_proto  = link_rx_flit.hdr.proto;
  assign mem_rx_data   = link_rx_flit.payload;

  always_comb begin
    if (rx_is_io)       link_rx_ready = io_rx_ready;
    else if (rx_is_mem) link_rx_ready = mem_rx_ready;
    else                link_rx_ready = 1'b1;  // dropped flits are always taken
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      stats.rx_io        <= '0;
      stats.rx_mem       <= '0;
      stats.rx_crc_err   <= '0;
      stats.rx_proto_err <= '0;
    end else if (link_rx_valid && link_rx_ready) begin
      if (rx_is_io)      stats.rx_io        <= stats.rx_io + 1'b1;
      if (rx_is_mem)     stats.rx_mem       <= stats.rx_mem + 1'b1;
      if (rx_drop_crc)   stats.rx_crc_err   <= stats.rx_crc_err + 1'b1;
      if (rx_drop_proto) stats.rx_proto_err <= stats.rx_proto_err + 1'b1;
    end
  end

  // A sender on the link keeps its flit until it is taken.
  a_rx_hold: assert property (@(posedge clk) disable iff (!rst_n)
                              link_rx_valid && !link_rx_ready |=> link_rx_valid && $stable(link_rx_flit));

endmodule

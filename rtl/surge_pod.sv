// surge_pod: a pod of servers sharing pooled salvage memory.
//
// Each of the N_SERVERS servers has its own salvage-capable CXL interface
// (surge_port): the controller's arbitration stage and a 2-port CXL
// multiplexer whose port 0 goes to that server's I/O device and whose port 1,
// the salvage link, goes to one head of a multi-headed CXL Type-3 memory
// device shared by the whole pod. The shared device, the I/O devices, the
// CPUs with their primary DDR memory, the CXL transaction and data link
// layers and the PHYs are standard parts and stay outside; their
// connections are the ports of this module, one array element per server.
//
// Pooling lets any server whose I/O link has spare bandwidth reach the
// salvage memory, which raises the chance that the provisioned memory is
// used: with per-server probability P of spare I/O bandwidth, the pooled
// memory is reachable by some server with probability 1-(1-P)^N. The
// default pod size of 8 follows the source design's observation that the
// benefit flattens beyond about eight servers.
//
// Servers are independent in this module; they meet only in the pooled
// device outside. Timing per server is that of surge_port. Reset is
// synchronous, active low.
module surge_pod
  import surge_pkg::*;
#(
  parameter int unsigned N_SERVERS = 8
) (
  input  logic       clk,
  input  logic       rst_n,
  // CXL.io data link layers, one per server
  input  logic       io_tx_valid    [N_SERVERS],
  input  payload_t   io_tx_data     [N_SERVERS],
  output logic       io_tx_ready    [N_SERVERS],
  output logic       io_rx_valid    [N_SERVERS],
  output payload_t   io_rx_data     [N_SERVERS],
  input  logic       io_rx_ready    [N_SERVERS],
  // CXL.cache/.mem data link layers, one per server
  input  logic       mem_tx_valid   [N_SERVERS],
  input  payload_t   mem_tx_data    [N_SERVERS],
  output logic       mem_tx_ready   [N_SERVERS],
  output logic       mem_rx_valid   [N_SERVERS],
  output proto_e     mem_rx_proto   [N_SERVERS],
  output payload_t   mem_rx_data    [N_SERVERS],
  input  logic       mem_rx_ready   [N_SERVERS],
  // primary links to each server's I/O device
  output logic       iodev_dn_valid [N_SERVERS],
  output flit_t      iodev_dn_flit  [N_SERVERS],
  input  logic       iodev_dn_ready [N_SERVERS],
  input  logic       iodev_up_valid [N_SERVERS],
  input  flit_t      iodev_up_flit  [N_SERVERS],
  output logic       iodev_up_ready [N_SERVERS],
  // salvage links to the heads of the pooled memory device
  output logic       sm_dn_valid    [N_SERVERS],
  output flit_t      sm_dn_flit     [N_SERVERS],
  input  logic       sm_dn_ready    [N_SERVERS],
  input  logic       sm_up_valid    [N_SERVERS],
  input  flit_t      sm_up_flit     [N_SERVERS],
  output logic       sm_up_ready    [N_SERVERS],
  // statistics, one set per server
  output arb_stats_t arb_stats      [N_SERVERS],
  output mux_stats_t mux_stats      [N_SERVERS]
);

  for (genvar s = 0; s < N_SERVERS; s++) begin : g_server
    surge_port u_port (
      .clk            (clk),
      .rst_n          (rst_n),
      .io_tx_valid    (io_tx_valid[s]),
      .io_tx_data     (io_tx_data[s]),
      .io_tx_ready    (io_tx_ready[s]),
      .io_rx_valid    (io_rx_valid[s]),
      .io_rx_data     (io_rx_data[s]),
      .io_rx_ready    (io_rx_ready[s]),
      .mem_tx_valid   (mem_tx_valid[s]),
      .mem_tx_data    (mem_tx_data[s]),
      .mem_tx_ready   (mem_tx_ready[s]),
      .mem_rx_valid   (mem_rx_valid[s]),
      .mem_rx_proto   (mem_rx_proto[s]),
      .mem_rx_data    (mem_rx_data[s]),
      .mem_rx_ready   (mem_rx_ready[s]),
      .iodev_dn_valid (iodev_dn_valid[s]),
      .iodev_dn_flit  (iodev_dn_flit[s]),
      .iodev_dn_ready (iodev_dn_ready[s]),
      .iodev_up_valid (iodev_up_valid[s]),
      .iodev_up_flit  (iodev_up_flit[s]),
      .iodev_up_ready (iodev_up_ready[s]),
      .sm_dn_valid    (sm_dn_valid[s]),
      .sm_dn_flit     (sm_dn_flit[s]),
      .sm_dn_ready    (sm_dn_ready[s]),
      .sm_up_valid    (sm_up_valid[s]),
      .sm_up_flit     (sm_up_flit[s]),
      .sm_up_ready    (sm_up_ready[s]),
      .arb_stats      (arb_stats[s]),
      .mux_stats      (mux_stats[s])
    );
  end

endmodule

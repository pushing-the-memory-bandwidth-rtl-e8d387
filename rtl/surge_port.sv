// surge_port: one server's salvage-capable CXL interface.
//
// The controller's multiplexing and arbitration stage (flexbus_arbiter)
// drives the CPU side of the 2-port CXL multiplexer (cxl_mux2). Port 0 of
// the multiplexer is the primary link to the I/O device; port 1 is the
// salvage link to salvage memory. Memory traffic the OS has placed in
// salvage memory travels over the same CPU interface as the I/O traffic,
// and gets the link only when the I/O device leaves it idle, which is the
// salvaging idea of the source design.
//
// Interface: payload streams to and from the CXL.io and CXL.cache/.mem data
// link layers (the layers themselves are standard IP and stay outside), and
// flit streams to and from the two devices. Latency through the block
// without contention: CPU to device two cycles (arbiter register, then
// multiplexer register); device to CPU one cycle (multiplexer merge
// register, then combinational steering in the arbiter). All handshakes are
// valid/ready; reset is synchronous, active low.
module surge_port
  import surge_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  // CXL.io data link layer side
  input  logic       io_tx_valid,
  input  payload_t   io_tx_data,
  output logic       io_tx_ready,
  output logic       io_rx_valid,
  output payload_t   io_rx_data,
  input  logic       io_rx_ready,
  // CXL.cache/.mem data link layer side
  input  logic       mem_tx_valid,
  input  payload_t   mem_tx_data,
  output logic       mem_tx_ready,
  output logic       mem_rx_valid,
  output proto_e     mem_rx_proto,
  output payload_t   mem_rx_data,
  input  logic       mem_rx_ready,
  // primary link to the I/O device
  output logic       iodev_dn_valid,
  output flit_t      iodev_dn_flit,
  input  logic       iodev_dn_ready,
  input  logic       iodev_up_valid,
  input  flit_t      iodev_up_flit,
  output logic       iodev_up_ready,
  // salvage link to salvage memory
  output logic       sm_dn_valid,
  output flit_t      sm_dn_flit,
  input  logic       sm_dn_ready,
  input  logic       sm_up_valid,
  input  flit_t      sm_up_flit,
  output logic       sm_up_ready,
  // statistics
  output arb_stats_t arb_stats,
  output mux_stats_t mux_stats
);

  logic  link_dn_valid, link_dn_ready, link_up_valid, link_up_ready;
  flit_t link_dn_flit, link_up_flit;

  flexbus_arbiter u_arb (
    .clk           (clk),
    .rst_n         (rst_n),
    .io_tx_valid   (io_tx_valid),
    .io_tx_data    (io_tx_data),
    .io_tx_ready   (io_tx_ready),
    .mem_tx_valid  (mem_tx_valid),
    .mem_tx_data   (mem_tx_data),
    .mem_tx_ready  (mem_tx_ready),
    .link_tx_valid (link_dn_valid),
    .link_tx_flit  (link_dn_flit),
    .link_tx_ready (link_dn_ready),
    .link_rx_valid (link_up_valid),
    .link_rx_flit  (link_up_flit),
    .link_rx_ready (link_up_ready),
    .io_rx_valid   (io_rx_valid),
    .io_rx_data    (io_rx_data),
    .io_rx_ready   (io_rx_ready),
    .mem_rx_valid  (mem_rx_valid),
    .mem_rx_proto  (mem_rx_proto),
    .mem_rx_data   (mem_rx_data),
    .mem_rx_ready  (mem_rx_ready),
    .stats         (arb_stats)
  );

  cxl_mux2 u_mux (
    .clk           (clk),
    .rst_n         (rst_n),
    .host_dn_valid (link_dn_valid),
    .host_dn_flit  (link_dn_flit),
    .host_dn_ready (link_dn_ready),
    .host_up_valid (link_up_valid),
    .host_up_flit  (link_up_flit),
    .host_up_ready (link_up_ready),
    .io_dn_valid   (iodev_dn_valid),
    .io_dn_flit    (iodev_dn_flit),
    .io_dn_ready   (iodev_dn_ready),
    .io_up_valid   (iodev_up_valid),
    .io_up_flit    (iodev_up_flit),
    .io_up_ready   (iodev_up_ready),
    .sm_dn_valid   (sm_dn_valid),
    .sm_dn_flit    (sm_dn_flit),
    .sm_dn_ready   (sm_dn_ready),
    .sm_up_valid   (sm_up_valid),
    .sm_up_flit    (sm_up_flit),
    .sm_up_ready   (sm_up_ready),
    .stats         (mux_stats)
  );

endmodule

// cxl_mux2: 2-port CXL multiplexer that bifurcates one CPU CXL link.
//
// The CPU-side port connects to the controller's multiplexing and
// arbitration stage. Port 0, the primary link, goes to the I/O device (for
// example a NIC); port 1, the salvage link, goes to a CXL Type-3 memory
// device, the salvage memory. This is the bifurcation of the source design:
// each kind of traffic is directed to the device it belongs to.
//
// Downstream (CPU to devices): each flit is steered by its protocol ID.
// CXL.io flits go to port 0; CXL.cache and CXL.mem flits go to port 1.
// Flits with any other ID are dropped and counted. Each downstream output
// has a one-entry register stage, so a flit taken in cycle t is offered to
// its device in cycle t+1. A flit waiting for a busy port holds back the
// flits behind it (in-order, no bypass).
//
// Upstream (devices to CPU): flits from both ports are merged into the
// CPU-side port with strict I/O priority, the same policy the source design
// sets for the controller's arbiter; output registered, one flit per cycle.
//
// The multiplexer does not check CRCs; that is done at the controller.
// Handshakes are valid/ready. The register stages, the drop rule and the
// upstream priority are this design's choices where the source design only
// names the multiplexer and its function. Reset is synchronous, active low.
module cxl_mux2
  import surge_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  // CPU side, downstream in
  input  logic       host_dn_valid,
  input  flit_t      host_dn_flit,
  output logic       host_dn_ready,
  // CPU side, upstream out
  output logic       host_up_valid,
  output flit_t      host_up_flit,
  input  logic       host_up_ready,
  // port 0: primary link to the I/O device
  output logic       io_dn_valid,
  output flit_t      io_dn_flit,
  input  logic       io_dn_ready,
  input  logic       io_up_valid,
  input  flit_t      io_up_flit,
  output logic       io_up_ready,
  // port 1: salvage link to the salvage memory
  output logic       sm_dn_valid,
  output flit_t      sm_dn_flit,
  input  logic       sm_dn_ready,
  input  logic       sm_up_valid,
  input  flit_t      sm_up_flit,
  output logic       sm_up_ready,
  // statistics
  output mux_stats_t stats
);

  // ---------------- downstream: steer by protocol ----------------
  logic dn_to_io, dn_to_sm, dn_drop;
  logic io_slice_ready, sm_slice_ready;

  assign dn_to_io = (host_dn_flit.hdr.proto == PROTO_IO);
  assign dn_to_sm = is_cachemem(host_dn_flit.hdr.proto);
  assign dn_drop  = !dn_to_io && !dn_to_sm;

  always_comb begin
    if (dn_to_io)      host_dn_ready = io_slice_ready;
    else if (dn_to_sm) host_dn_ready = sm_slice_ready;
    else               host_dn_ready = 1'b1;
  end

  flit_slice #(.W(FLIT_W)) u_io_slice (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (host_dn_valid && dn_to_io),
    .in_data   (host_dn_flit),
    .in_ready  (io_slice_ready),
    .out_valid (io_dn_valid),
    .out_data  (io_dn_flit),
    .out_ready (io_dn_ready)
  );

  flit_slice #(.W(FLIT_W)) u_sm_slice (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (host_dn_valid && dn_to_sm),
    .in_data   (host_dn_flit),
    .in_ready  (sm_slice_ready),
    .out_valid (sm_dn_valid),
    .out_data  (sm_dn_flit),
    .out_ready (sm_dn_ready)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      stats.dn_io   <= '0;
      stats.dn_mem  <= '0;
      stats.dn_drop <= '0;
    end else if (host_dn_valid && host_dn_ready) begin
      if (dn_to_io) stats.dn_io   <= stats.dn_io + 1'b1;
      if (dn_to_sm) stats.dn_mem  <= stats.dn_mem + 1'b1;
      if (dn_drop)  stats.dn_drop <= stats.dn_drop + 1'b1;
    end
  end

  // ---------------- upstream: merge, I/O first ----------------
  prio_merge2 #(.W(FLIT_W), .CNT_W(CNT_W)) u_up_merge (
    .clk            (clk),
    .rst_n          (rst_n),
    .hi_valid       (io_up_valid),
    .hi_data        (io_up_flit),
    .hi_ready       (io_up_ready),
    .lo_valid       (sm_up_valid),
    .lo_data        (sm_up_flit),
    .lo_ready       (sm_up_ready),
    .out_valid      (host_up_valid),
    .out_data       (host_up_flit),
    .out_ready      (host_up_ready),
    .hi_count       (stats.up_io),
    .lo_count       (stats.up_mem),
    .lo_stall_count (stats.up_mem_stall)
  );

  a_dn_hold: assert property (@(posedge clk) disable iff (!rst_n)
                              host_dn_valid && !host_dn_ready |=> host_dn_valid && $stable(host_dn_flit));

endmodule

// nic_model: behavioural model of the I/O device (a NIC) on the primary link.
// Behavioural only; not part of the design.
//
// Egress (host to NIC): takes flits with ready asserted in RDY_PCT percent of
// cycles and checks each one: CXL.io protocol ID, correct CRC, and an I/O
// payload whose sequence number follows the previous one (io_payload of
// tb_ref_pkg, source id HOST_ID). Ingress (NIC to host): offers a new
// packet in RX_PCT percent of cycles, numbered from 0 with source id
// NIC_ID. If CORRUPT_AT is not negative, the packet with that number is sent
// once with one payload bit flipped, so the host must drop it for its CRC.
module nic_model
  import tb_ref_pkg::*;
#(
  parameter int          RX_PCT     = 10,
  parameter int          RDY_PCT    = 100,
  parameter int          CORRUPT_AT = -1,
  parameter logic [7:0]  NIC_ID     = 8'h80,
  parameter logic [7:0]  HOST_ID    = 8'h00
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         enable,
  input  logic         dn_valid,
  input  logic [543:0] dn_flit,
  output logic         dn_ready,
  output logic         up_valid,
  output logic [543:0] up_flit,
  input  logic         up_ready,
  output int           rx_count,
  output int           tx_count,
  output int           err_count
);

  logic [31:0]  tx_seq;
  logic [543:0] nf;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      dn_ready  <= 1'b0;
      up_valid  <= 1'b0;
      up_flit   <= '0;
      tx_seq    <= '0;
      rx_count  <= 0;
      tx_count  <= 0;
      err_count <= 0;
    end else begin
      dn_ready <= ($urandom % 100) < RDY_PCT;
      if (dn_valid && dn_ready) begin
        if (dn_flit != ref_flit(P_IO, io_payload(rx_count, HOST_ID))) begin
          err_count <= err_count + 1;
          $display("NIC %0h: bad egress flit %0d", NIC_ID, rx_count);
        end
        rx_count <= rx_count + 1;
      end
      if (up_valid && up_ready) begin
        up_valid <= 1'b0;
        tx_count <= tx_count + 1;
      end
      if ((!up_valid || up_ready) && enable && (($urandom % 100) < RX_PCT)) begin
        up_valid <= 1'b1;
        nf = ref_flit(P_IO, io_payload(tx_seq, NIC_ID));
        if (CORRUPT_AT >= 0 && tx_seq == CORRUPT_AT) nf[300] = ~nf[300];
        up_flit  <= nf;
        tx_seq   <= tx_seq + 1;
      end
    end
  end

endmodule

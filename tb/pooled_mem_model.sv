// pooled_mem_model: behavioural model of the pooled salvage memory, a CXL
// Type-3 multi-headed memory device with one head per server of the pod.
// Behavioural only; not part of the design.
//
// Each head takes request flits (ready in RDY_PCT percent of cycles),
// checks protocol ID and CRC, and executes the request on one shared array
// of MEM_WORDS 256-bit words at the moment it is taken, so accesses from
// all heads are ordered by acceptance cycle (lower head first within a
// cycle). The response (read data or write acknowledgement, same tag) is
// offered LAT cycles later, in order per head, through a per-head queue.
// Request format: see tb_ref_pkg. If PROTO_ERR_HEAD is not negative, that
// head sends one extra flit with an unknown protocol ID after its first
// response, which the host must drop. concurrent counts cycles in which
// two or more heads took a request.
module pooled_mem_model
  import tb_ref_pkg::*;
#(
  parameter int N              = 8,
  parameter int MEM_WORDS      = 1024,
  parameter int LAT            = 20,
  parameter int RDY_PCT        = 100,
  parameter int PROTO_ERR_HEAD = -1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         dn_valid [N],
  input  logic [543:0] dn_flit  [N],
  output logic         dn_ready [N],
  output logic         up_valid [N],
  output logic [543:0] up_flit  [N],
  input  logic         up_ready [N],
  output int           req_count [N],
  output int           err_count,
  output int           concurrent
);

  logic [255:0] mem [MEM_WORDS];
  logic [543:0] rq_flit [N][$];
  longint       rq_time [N][$];
  longint       now;
  bit           proto_err_sent;
  int           taken;
  logic [511:0] p, r;

  initial for (int i = 0; i < MEM_WORDS; i++) mem[i] = '0;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      now <= 0;
      err_count <= 0;
      concurrent <= 0;
      proto_err_sent <= 0;
      for (int h = 0; h < N; h++) begin
        dn_ready[h]  <= 1'b0;
        up_valid[h]  <= 1'b0;
        up_flit[h]   <= '0;
        req_count[h] <= 0;
        rq_flit[h].delete();
        rq_time[h].delete();
      end
    end else begin
      now <= now + 1;
      taken = 0;
      for (int h = 0; h < N; h++) begin
        dn_ready[h] <= ($urandom % 100) < RDY_PCT;
        if (dn_valid[h] && dn_ready[h]) begin
          taken++;
          req_count[h] <= req_count[h] + 1;
          p = dn_flit[h][527:16];
          if (dn_flit[h][543:528] != {12'h0, P_MEM} || dn_flit[h][15:0] != ref_crc(dn_flit[h][543:528], p)) begin
            err_count <= err_count + 1;
            $display("MEM head %0d: malformed request", h);
          end else if (p[511:504] == OP_WR) begin
            mem[p[456 +: 32] % MEM_WORDS] <= p[255:0];
            r = mem_req(OP_WR_ACK, p[503:488], p[487:456], '0);
            rq_flit[h].push_back(ref_flit(P_MEM, r));
            rq_time[h].push_back(now + LAT);
          end else begin
            r = mem_req(OP_RD_RESP, p[503:488], p[487:456], mem[p[456 +: 32] % MEM_WORDS]);
            rq_flit[h].push_back(ref_flit(P_MEM, r));
            rq_time[h].push_back(now + LAT);
          end
        end
        if (up_valid[h] && up_ready[h]) up_valid[h] <= 1'b0;
        if (!up_valid[h] || up_ready[h]) begin
          if (PROTO_ERR_HEAD == h && !proto_err_sent && req_count[h] > 0 && rq_flit[h].size() == 0) begin
            up_valid[h] <= 1'b1;
            up_flit[h]  <= ref_flit(4'hE, '0);
            proto_err_sent <= 1;
          end else if (rq_flit[h].size() > 0 && rq_time[h][0] <= now) begin
            up_valid[h] <= 1'b1;
            up_flit[h]  <= rq_flit[h].pop_front();
            void'(rq_time[h].pop_front());
          end
        end
      end
      if (taken >= 2) concurrent <= concurrent + 1;
    end
  end

endmodule

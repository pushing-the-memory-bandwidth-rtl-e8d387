// tb_surge_pod: end-to-end test of a full pod at the default size.
//
// Eight servers, each with its own NIC model on the primary link, share one
// pooled salvage memory model through their salvage links. Every server
// runs a different I/O load, written RX_TX with low, med and high meaning
// 10, 50 and 80 percent of the link's flit slots (host receive = NIC
// ingress, host transmit = egress), covering the I/O scenarios low_low,
// low_high, high_low, med_med and high_high. While the I/O traffic runs,
// each server's memory stack writes a private block of salvage memory and
// reads it back, with up to 8 requests outstanding.
//
// Checks: every read returns what that server wrote; every I/O packet
// arrives intact and in order at both ends (except one corrupted packet,
// which must be dropped for its CRC); all counters agree with the models;
// a server with low_low I/O finishes its memory work before a server with
// high_high I/O (memory only gets the link slots I/O leaves idle). Each
// mechanism must occur at least once: memory held back by I/O priority on
// transmit and on the upstream merge, CRC drop, unknown-protocol drop,
// back-pressure on a salvage link, and two or more servers using the
// pooled memory in the same cycle.
module tb_surge_pod;
  import surge_pkg::*;
  import tb_ref_pkg::*;

  localparam int N      = 8;
  localparam int WORDS  = 128;           // words per server block
  localparam int NOPS   = 2 * WORDS;     // writes then reads
  localparam int MAXOUT = 8;
  localparam int CORRUPT_SERVER = 2;
  localparam int CORRUPT_SEQ    = 5;
  localparam int PERR_SERVER    = 3;
  // RX (NIC to host) and TX (host to NIC) load per server, percent of slots
  localparam int RXP [N] = '{10, 10, 80, 50, 80, 10, 50, 80};
  localparam int TXP [N] = '{10, 80, 10, 50, 80, 10, 50, 80};

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic       io_tx_valid [N], io_tx_ready [N], io_rx_valid [N], io_rx_ready [N];
  payload_t   io_tx_data [N], io_rx_data [N];
  logic       mem_tx_valid [N], mem_tx_ready [N], mem_rx_valid [N], mem_rx_ready [N];
  payload_t   mem_tx_data [N], mem_rx_data [N];
  proto_e     mem_rx_proto [N];
  logic       iodev_dn_valid [N], iodev_dn_ready [N], iodev_up_valid [N], iodev_up_ready [N];
  flit_t      iodev_dn_flit [N], iodev_up_flit [N];
  logic       sm_dn_valid [N], sm_dn_ready [N], sm_up_valid [N], sm_up_ready [N];
  flit_t      sm_dn_flit [N], sm_up_flit [N];
  arb_stats_t arb_stats [N];
  mux_stats_t mux_stats [N];

  surge_pod dut (.*);

  // ---------------- device models ----------------
  logic nic_en;
  int   nic_rx [N], nic_tx [N], nic_err [N];

  for (genvar s = 0; s < N; s++) begin : g_nic
    nic_model #(
      .RX_PCT     (RXP[s]),
      .RDY_PCT    (95),
      .CORRUPT_AT (s == CORRUPT_SERVER ? CORRUPT_SEQ : -1),
      .NIC_ID     (8'(8'h80 + s)),
      .HOST_ID    (8'(s))
    ) u_nic (
      .clk (clk), .rst_n (rst_n), .enable (nic_en),
      .dn_valid (iodev_dn_valid[s]), .dn_flit (iodev_dn_flit[s]), .dn_ready (iodev_dn_ready[s]),
      .up_valid (iodev_up_valid[s]), .up_flit (iodev_up_flit[s]), .up_ready (iodev_up_ready[s]),
      .rx_count (nic_rx[s]), .tx_count (nic_tx[s]), .err_count (nic_err[s])
    );
  end

  int mem_req_cnt [N], mem_err, mem_conc;

  pooled_mem_model #(
    .N (N), .MEM_WORDS (2048), .LAT (20), .RDY_PCT (80), .PROTO_ERR_HEAD (PERR_SERVER)
  ) u_mem (
    .clk (clk), .rst_n (rst_n),
    .dn_valid (sm_dn_valid), .dn_flit (sm_dn_flit), .dn_ready (sm_dn_ready),
    .up_valid (sm_up_valid), .up_flit (sm_up_flit), .up_ready (sm_up_ready),
    .req_count (mem_req_cnt), .err_count (mem_err), .concurrent (mem_conc)
  );

  // ---------------- checking ----------------
  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL @%0t: %s", $time, what);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    for (int s = 0; s < N; s++) $display("  server %0d: issued %0d done %0d outstanding %0d", s, op_issued[s], op_done[s], outstanding[s]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [255:0] wdata(int s, int k);
    return {8{32'(s * 32'h01000193 + k * 32'h2545F491 + 1)}};
  endfunction

  // host-side drivers and scoreboards, one set per server
  logic         host_io_en;
  int           io_sent [N], io_got [N], io_exp [N];
  int           op_issued [N], op_done [N], outstanding [N];
  longint       done_cycle [N];
  longint       cycle;
  logic [511:0] exp_resp [N][$];
  int           sm_bp_cycles;
  int           bad_rx;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cycle <= 0;
      sm_bp_cycles <= 0;
      bad_rx <= 0;
      for (int s = 0; s < N; s++) begin
        io_tx_valid[s]  <= 1'b0;  io_tx_data[s] <= '0;  io_rx_ready[s]  <= 1'b1;
        mem_tx_valid[s] <= 1'b0;  mem_tx_data[s] <= '0; mem_rx_ready[s] <= 1'b1;
        io_sent[s] <= 0; io_got[s] <= 0; io_exp[s] <= 0;
        op_issued[s] <= 0; op_done[s] <= 0; outstanding[s] <= 0; done_cycle[s] <= 0;
        exp_resp[s].delete();
      end
    end else begin
      cycle <= cycle + 1;
      for (int s = 0; s < N; s++) begin
        automatic int iss = op_issued[s];
        automatic int outs = outstanding[s];
        if (sm_dn_valid[s] && !sm_dn_ready[s]) sm_bp_cycles <= sm_bp_cycles + 1;
        // I/O egress
        if (io_tx_valid[s] && io_tx_ready[s]) begin
          io_tx_valid[s] <= 1'b0;
          io_sent[s] <= io_sent[s] + 1;
        end
        if ((!io_tx_valid[s] || io_tx_ready[s]) && host_io_en && (($urandom % 100) < TXP[s])) begin
          io_tx_valid[s] <= 1'b1;
          io_tx_data[s]  <= io_payload(io_sent[s] + ((io_tx_valid[s] && io_tx_ready[s]) ? 1 : 0), 8'(s));
        end
        // I/O ingress
        if (io_rx_valid[s] && io_rx_ready[s]) begin
          automatic int e = io_exp[s];
          if (s == CORRUPT_SERVER && e == CORRUPT_SEQ) e++;
          if (io_rx_data[s] != io_payload(e, 8'(8'h80 + s))) begin
            bad_rx <= bad_rx + 1;
            $display("server %0d: bad I/O packet, expected seq %0d", s, e);
          end
          io_exp[s] <= e + 1;
          io_got[s] <= io_got[s] + 1;
        end
        // memory requests
        if (mem_tx_valid[s] && mem_tx_ready[s]) begin
          mem_tx_valid[s] <= 1'b0;
          iss++;
          outs++;
        end
        if ((!mem_tx_valid[s] || mem_tx_ready[s]) && iss < NOPS && outs < MAXOUT &&
            (iss < WORDS || op_done[s] >= WORDS || iss - WORDS < op_done[s])) begin
          automatic int k = iss % WORDS;
          automatic logic [31:0] a = 32'(s * 256 + k);
          mem_tx_valid[s] <= 1'b1;
          if (iss < WORDS) begin
            mem_tx_data[s] <= mem_req(OP_WR, 16'(iss), a, wdata(s, k));
            exp_resp[s].push_back(mem_req(OP_WR_ACK, 16'(iss), a, '0));
          end else begin
            mem_tx_data[s] <= mem_req(OP_RD, 16'(iss), a, '0);
            exp_resp[s].push_back(mem_req(OP_RD_RESP, 16'(iss), a, wdata(s, k)));
          end
        end
        // memory responses
        mem_rx_ready[s] <= ($urandom % 10) != 0;
        if (mem_rx_valid[s] && mem_rx_ready[s]) begin
          if (exp_resp[s].size() == 0 || mem_rx_data[s] != exp_resp[s][0] || mem_rx_proto[s] != PROTO_MEM) begin
            bad_rx <= bad_rx + 1;
            $display("server %0d: bad memory response", s);
          end
          if (exp_resp[s].size() != 0) void'(exp_resp[s].pop_front());
          outs--;
          op_done[s] <= op_done[s] + 1;
          if (op_done[s] + 1 == NOPS) done_cycle[s] <= cycle;
        end
        op_issued[s]   <= iss;
        outstanding[s] <= outs;
      end
    end
  end

  function automatic bit all_done();
    for (int s = 0; s < N; s++) if (op_done[s] != NOPS) return 0;
    return 1;
  endfunction

  int n_tx_stall, n_up_stall, n_crc, n_perr;

  initial begin
    nic_en = 0; host_io_en = 0;
    repeat (4) @(posedge clk);
    rst_n <= 1;
    nic_en = 1; host_io_en = 1;
    while (!all_done()) @(posedge clk);
    @(posedge clk);
    nic_en = 0; host_io_en = 0;
    repeat (60) @(posedge clk);
    #1;

    n_tx_stall = 0; n_up_stall = 0; n_crc = 0; n_perr = 0;
    for (int s = 0; s < N; s++) begin
      check(op_done[s] == NOPS && exp_resp[s].size() == 0, $sformatf("server %0d memory work complete", s));
      check(mux_stats[s].dn_mem == NOPS && mem_req_cnt[s] == NOPS, $sformatf("server %0d: %0d requests on its salvage link", s, mux_stats[s].dn_mem));
      check(arb_stats[s].rx_mem == NOPS, $sformatf("server %0d: responses delivered", s));
      check(nic_rx[s] == io_sent[s] && mux_stats[s].dn_io == io_sent[s], $sformatf("server %0d: egress I/O %0d sent, %0d at NIC", s, io_sent[s], nic_rx[s]));
      check(io_got[s] == nic_tx[s] - (s == CORRUPT_SERVER ? 1 : 0), $sformatf("server %0d: ingress I/O %0d sent, %0d received", s, nic_tx[s], io_got[s]));
      check(nic_err[s] == 0, $sformatf("server %0d: NIC saw clean packets", s));
      check(arb_stats[s].rx_crc_err == (s == CORRUPT_SERVER ? 1 : 0), $sformatf("server %0d CRC drops", s));
      check(arb_stats[s].rx_proto_err == (s == PERR_SERVER ? 1 : 0), $sformatf("server %0d protocol drops", s));
      n_tx_stall += arb_stats[s].tx_mem_stall;
      n_up_stall += mux_stats[s].up_mem_stall;
      n_crc      += arb_stats[s].rx_crc_err;
      n_perr     += arb_stats[s].rx_proto_err;
      $display("server %0d RX%0d_TX%0d: mem done at cycle %0d, io out %0d in %0d, tx stalls %0d, up stalls %0d",
               s, RXP[s], TXP[s], done_cycle[s], io_sent[s], io_got[s], arb_stats[s].tx_mem_stall, mux_stats[s].up_mem_stall);
    end
    check(mem_err == 0, "memory model saw well-formed requests only");
    check(bad_rx == 0, $sformatf("%0d bad packets or responses at the hosts", bad_rx));
    check(done_cycle[0] < done_cycle[4], "low_low server finishes memory work before high_high server");
    check(done_cycle[5] < done_cycle[7], "second low_low server before second high_high server");

    $display("mechanisms: tx priority stalls %0d, upstream priority stalls %0d, CRC drops %0d, protocol drops %0d, salvage back-pressure cycles %0d, concurrent pooled cycles %0d",
             n_tx_stall, n_up_stall, n_crc, n_perr, sm_bp_cycles, mem_conc);
    check(n_tx_stall > 0,   "memory held back by I/O priority on transmit");
    check(n_up_stall > 0,   "memory held back by I/O priority upstream");
    check(n_crc > 0,        "CRC drop happened");
    check(n_perr > 0,       "protocol drop happened");
    check(sm_bp_cycles > 0, "salvage link back-pressure happened");
    check(mem_conc > 0,     "pooled memory used by several servers at once");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

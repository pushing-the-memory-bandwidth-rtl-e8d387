// tb_cxl_mux2: self-checking test of the 2-port CXL multiplexer.
//
// Directed part: steering of CXL.io flits to the I/O port and of .mem and
// .cache flits to the salvage port with one cycle of latency, dropping of
// unknown protocol IDs, in-order blocking when the salvage port stalls,
// upstream merge with strict I/O priority and its stall counter, and one
// flit per cycle throughput. Random part: random protocols, payloads and
// device readiness in both directions, checked against per-port
// scoreboards. Flits are built with the reference function of tb_ref_pkg.
module tb_cxl_mux2;
  import surge_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic  host_dn_valid, host_dn_ready, host_up_valid, host_up_ready;
  flit_t host_dn_flit, host_up_flit;
  logic  io_dn_valid, io_dn_ready, io_up_valid, io_up_ready;
  flit_t io_dn_flit, io_up_flit;
  logic  sm_dn_valid, sm_dn_ready, sm_up_valid, sm_up_ready;
  flit_t sm_dn_flit, sm_up_flit;
  mux_stats_t stats;

  cxl_mux2 dut (.*);

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
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [543:0] f [6];
  logic [543:0] q_io [$], q_sm [$], q_up_io [$], q_up_sm [$];
  logic [3:0]   pr;
  int n, n_dn_io, n_dn_sm, n_drop;

  initial begin
    host_dn_valid = 0; host_dn_flit = '0; host_up_ready = 1;
    io_dn_ready = 1; io_up_valid = 0; io_up_flit = '0;
    sm_dn_ready = 1; sm_up_valid = 0; sm_up_flit = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;

    // ---- 1: steering, one-cycle latency ----
    f[0] = ref_flit(P_IO, rand_payload());
    f[1] = ref_flit(P_MEM, rand_payload());
    f[2] = ref_flit(P_CACHE, rand_payload());
    f[3] = ref_flit(4'h9, rand_payload());
    host_dn_valid = 1; host_dn_flit = f[0];
    @(posedge clk); #1;
    check(io_dn_valid && io_dn_flit == f[0] && !sm_dn_valid, "I/O flit to port 0 after one cycle");
    host_dn_flit = f[1];
    @(posedge clk); #1;
    check(sm_dn_valid && sm_dn_flit == f[1] && !io_dn_valid, ".mem flit to salvage port");
    host_dn_flit = f[2];
    @(posedge clk); #1;
    check(sm_dn_valid && sm_dn_flit == f[2] && !io_dn_valid, ".cache flit to salvage port");
    host_dn_flit = f[3];
    #1 check(host_dn_ready, "unknown protocol taken");
    @(posedge clk); #1;
    host_dn_valid = 0;
    check(!sm_dn_valid && !io_dn_valid, "unknown protocol dropped");
    check(stats.dn_drop == 1 && stats.dn_io == 1 && stats.dn_mem == 2, "downstream counters");

    // ---- 2: salvage port stalls, traffic behind it waits ----
    sm_dn_ready = 0;
    host_dn_valid = 1; host_dn_flit = f[1];
    @(posedge clk); #1;
    host_dn_flit = f[2];
    #1 check(!host_dn_ready, "second .mem flit waits for the stalled port");
    @(posedge clk); #1;
    check(sm_dn_valid && sm_dn_flit == f[1], "stalled flit held");
    sm_dn_ready = 1;
    @(posedge clk); #1;
    check(sm_dn_valid && sm_dn_flit == f[2], "queued flit follows");
    host_dn_valid = 0;
    @(posedge clk); #1;

    // ---- 3: upstream priority ----
    f[4] = ref_flit(P_IO, rand_payload());
    f[5] = ref_flit(P_MEM, rand_payload());
    io_up_valid = 1; io_up_flit = f[4]; sm_up_valid = 1; sm_up_flit = f[5];
    #1 check(io_up_ready && !sm_up_ready, "I/O wins the upstream merge");
    @(posedge clk); #1;
    io_up_valid = 0;
    check(host_up_valid && host_up_flit == f[4], "I/O flit upstream first");
    #1 check(sm_up_ready, "salvage flit taken when I/O idle");
    @(posedge clk); #1;
    sm_up_valid = 0;
    check(host_up_valid && host_up_flit == f[5], "salvage flit upstream next");
    check(stats.up_mem_stall == 1 && stats.up_io == 1 && stats.up_mem == 1, "upstream counters");
    @(posedge clk); #1;

    // ---- 4: throughput ----
    n = 0;
    host_dn_valid = 1;
    for (int i = 0; i < 16; i++) begin
      host_dn_flit = ref_flit(P_MEM, payload_t'(i));
      @(posedge clk); if (sm_dn_valid) n++; #1;
    end
    host_dn_valid = 0;
    @(posedge clk); if (sm_dn_valid) n++; #1;
    check(n == 16, $sformatf("16 flits in 16 cycles, got %0d", n));

    // ---- 5: random ----
    n_dn_io = stats.dn_io; n_dn_sm = stats.dn_mem; n_drop = stats.dn_drop;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      if (!host_dn_valid || host_dn_ready) begin
        host_dn_valid = ($urandom % 3) != 0;
        case ($urandom % 8)
          0: pr = 4'hF;
          1, 2, 3: pr = P_IO;
          4: pr = P_CACHE;
          default: pr = P_MEM;
        endcase
        host_dn_flit = ref_flit(pr, rand_payload());
      end
      if (!io_up_valid || io_up_ready) begin io_up_valid = ($urandom % 3) == 0; io_up_flit = ref_flit(P_IO,  rand_payload()); end
      if (!sm_up_valid || sm_up_ready) begin sm_up_valid = ($urandom % 2) == 0; sm_up_flit = ref_flit(P_MEM, rand_payload()); end
      io_dn_ready = ($urandom % 4) != 0;
      sm_dn_ready = ($urandom % 3) != 0;
      host_up_ready = ($urandom % 5) != 0;
      #1;
      @(posedge clk);
      if (io_dn_valid && io_dn_ready)     check(q_io.size() > 0 && io_dn_flit == q_io.pop_front(), "random port 0 flit");
      if (sm_dn_valid && sm_dn_ready)     check(q_sm.size() > 0 && sm_dn_flit == q_sm.pop_front(), "random salvage flit");
      if (host_up_valid && host_up_ready) begin
        if (host_up_flit.hdr.proto == PROTO_IO) check(q_up_io.size() > 0 && host_up_flit == q_up_io.pop_front(), "random upstream I/O");
        else                                    check(q_up_sm.size() > 0 && host_up_flit == q_up_sm.pop_front(), "random upstream salvage");
      end
      if (host_dn_valid && host_dn_ready) begin
        if (host_dn_flit.hdr.proto == PROTO_IO) begin q_io.push_back(host_dn_flit); n_dn_io++; end
        else if (host_dn_flit.hdr.proto == PROTO_MEM || host_dn_flit.hdr.proto == PROTO_CACHE) begin q_sm.push_back(host_dn_flit); n_dn_sm++; end
        else n_drop++;
      end
      if (io_up_valid && io_up_ready) q_up_io.push_back(io_up_flit);
      if (sm_up_valid && sm_up_ready) begin
        q_up_sm.push_back(sm_up_flit);
        if (io_up_valid) check(0, "salvage accepted beside valid I/O");
      end
      #1;
    end
    host_dn_valid = 0; io_up_valid = 0; sm_up_valid = 0;
    io_dn_ready = 1; sm_dn_ready = 1; host_up_ready = 1;
    repeat (2) begin
      @(posedge clk);
      if (io_dn_valid) check(io_dn_flit == q_io.pop_front(), "drain port 0");
      if (sm_dn_valid) check(sm_dn_flit == q_sm.pop_front(), "drain salvage");
      if (host_up_valid) begin
        if (host_up_flit.hdr.proto == PROTO_IO) check(host_up_flit == q_up_io.pop_front(), "drain up I/O");
        else check(host_up_flit == q_up_sm.pop_front(), "drain up salvage");
      end
      #1;
    end
    check(q_io.size() == 0 && q_sm.size() == 0 && q_up_io.size() == 0 && q_up_sm.size() == 0, "no flit lost");
    check(stats.dn_io == n_dn_io && stats.dn_mem == n_dn_sm && stats.dn_drop == n_drop, "random downstream counters");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_flexbus_arbiter: self-checking test of the multiplexing and
// arbitration stage.
//
// Directed part: one-cycle transmit latency and flit contents, strict I/O
// priority over memory (memory waits while I/O is valid, and the stall
// counter counts those cycles), one flit per cycle throughput, output hold
// under back-pressure, and receive steering of I/O, .mem and .cache flits,
// dropping of flits with a bad CRC or an unknown protocol ID, and
// back-pressure from the CXL.io side. Random part: random traffic and
// link back-pressure, checked per protocol against scoreboards built with
// the reference flit function. Expected flits come from tb_ref_pkg.
module tb_flexbus_arbiter;
  import surge_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic       io_tx_valid, io_tx_ready, mem_tx_valid, mem_tx_ready;
  payload_t   io_tx_data, mem_tx_data;
  logic       link_tx_valid, link_tx_ready, link_rx_valid, link_rx_ready;
  flit_t      link_tx_flit, link_rx_flit;
  logic       io_rx_valid, io_rx_ready, mem_rx_valid, mem_rx_ready;
  payload_t   io_rx_data, mem_rx_data;
  proto_e     mem_rx_proto;
  arb_stats_t stats;

  flexbus_arbiter dut (.*);

  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL @%0t: %s", $time, what);
    end
  endtask

  // watchdog
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic idle_inputs();
    io_tx_valid = 0; mem_tx_valid = 0; io_tx_data = '0; mem_tx_data = '0;
    link_tx_ready = 1; link_rx_valid = 0; link_rx_flit = '0;
    io_rx_ready = 1; mem_rx_ready = 1;
  endtask

  // drives a received flit for one cycle and returns what the block did
  task automatic rx_one(logic [543:0] f, output bit io_v, output bit mem_v, output bit rdy);
    link_rx_valid = 1; link_rx_flit = f;
    #1;
    io_v = io_rx_valid; mem_v = mem_rx_valid; rdy = link_rx_ready;
    @(posedge clk); #1;
    link_rx_valid = 0;
  endtask

  payload_t p [8];
  logic [543:0] q_io [$], q_mem [$];
  int n_io_acc, n_mem_acc, n_out, stall_expect;
  bit iv, mv, rd;
  logic [543:0] f;

  initial begin
    idle_inputs();
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;

    // ---- 1: latency and contents ----
    p[0] = rand_payload();
    io_tx_valid = 1; io_tx_data = p[0];
    #1 check(io_tx_ready && !link_tx_valid, "io accepted, link idle before");
    @(posedge clk); #1;
    io_tx_valid = 0;
    check(link_tx_valid, "flit on link one cycle after acceptance");
    check(link_tx_flit == ref_flit(P_IO, p[0]), "io flit contents and CRC");
    @(posedge clk); #1;
    check(!link_tx_valid, "link idle again");

    // ---- 2: strict I/O priority ----
    for (int i = 0; i < 4; i++) p[i] = rand_payload();
    mem_tx_valid = 1; mem_tx_data = p[3];
    for (int i = 0; i < 3; i++) begin
      io_tx_valid = 1; io_tx_data = p[i];
      #1 check(io_tx_ready && !mem_tx_ready, "memory held back while I/O is valid");
      @(posedge clk); #1;
      check(link_tx_valid && link_tx_flit == ref_flit(P_IO, p[i]), "I/O flits in order first");
    end
    io_tx_valid = 0;
    #1 check(mem_tx_ready, "memory served once I/O is idle");
    @(posedge clk); #1;
    mem_tx_valid = 0;
    check(link_tx_valid && link_tx_flit == ref_flit(P_MEM, p[3]), "memory flit after the I/O burst");
    check(stats.tx_mem_stall == 3, $sformatf("stall counter 3, got %0d", stats.tx_mem_stall));
    @(posedge clk); #1;

    // ---- 3: one flit per cycle ----
    n_out = 0;
    io_tx_valid = 1;
    for (int i = 0; i < 16; i++) begin
      io_tx_data = payload_t'(i);
      @(posedge clk);
      if (link_tx_valid) n_out++;
      #1;
    end
    io_tx_valid = 0;
    @(posedge clk); if (link_tx_valid) n_out++; #1;
    check(n_out == 16, $sformatf("16 flits in 16 cycles, got %0d", n_out));
    @(posedge clk); #1;

    // ---- 4: back-pressure ----
    link_tx_ready = 0;
    mem_tx_valid = 1; mem_tx_data = p[5];
    @(posedge clk); #1;
    mem_tx_valid = 1; mem_tx_data = p[6];
    f = link_tx_flit;
    repeat (3) begin
      #1 check(!mem_tx_ready, "no acceptance while the link stalls");
      @(posedge clk); #1;
      check(link_tx_valid && link_tx_flit == f && f == ref_flit(P_MEM, p[5]), "flit held under back-pressure");
    end
    link_tx_ready = 1;
    @(posedge clk); #1;
    mem_tx_valid = 0;
    check(link_tx_flit == ref_flit(P_MEM, p[6]), "next flit after back-pressure ends");
    @(posedge clk); #1;

    // ---- 5: receive steering and drops ----
    p[0] = rand_payload();
    rx_one(ref_flit(P_IO, p[0]), iv, mv, rd);
    check(iv && !mv && rd, "I/O flit steered to CXL.io");
    p[1] = rand_payload();
    link_rx_valid = 1; link_rx_flit = ref_flit(P_MEM, p[1]);
    #1 check(mem_rx_valid && !io_rx_valid && mem_rx_data == p[1] && mem_rx_proto == PROTO_MEM,
             ".mem flit steered with its payload");
    @(posedge clk); #1; link_rx_valid = 0;
    link_rx_valid = 1; link_rx_flit = ref_flit(P_IO, p[0]);
    #1 check(io_rx_data == p[0], "I/O payload delivered");
    @(posedge clk); #1; link_rx_valid = 0;
    rx_one(ref_flit(P_CACHE, p[2]), iv, mv, rd);
    check(!iv && mv && rd, ".cache flit steered to .cache/.mem");
    f = ref_flit(P_MEM, p[1]); f[100] = ~f[100];
    rx_one(f, iv, mv, rd);
    check(!iv && !mv && rd, "bad-CRC flit dropped");
    rx_one(ref_flit(4'h7, p[1]), iv, mv, rd);
    check(!iv && !mv && rd, "unknown protocol dropped");
    io_rx_ready = 0;
    link_rx_valid = 1; link_rx_flit = ref_flit(P_IO, p[0]);
    #1 check(io_rx_valid && !link_rx_ready, "CXL.io back-pressure reaches the link");
    @(posedge clk); #1;
    io_rx_ready = 1;
    #1 check(link_rx_ready, "flit taken once CXL.io is ready");
    @(posedge clk); #1;
    link_rx_valid = 0;
    check(stats.rx_io == 3 && stats.rx_mem == 2 && stats.rx_crc_err == 1 && stats.rx_proto_err == 1,
          $sformatf("rx counters io=%0d mem=%0d crc=%0d proto=%0d", stats.rx_io, stats.rx_mem,
                    stats.rx_crc_err, stats.rx_proto_err));

    // ---- 6: random traffic, per-protocol scoreboards ----
    n_io_acc = stats.tx_io; n_mem_acc = stats.tx_mem;
    @(posedge clk); #1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      if (!io_tx_valid || io_tx_ready)   begin io_tx_valid  = ($urandom % 3) == 0; io_tx_data  = rand_payload(); end
      if (!mem_tx_valid || mem_tx_ready) begin mem_tx_valid = ($urandom % 2) == 0; mem_tx_data = rand_payload(); end
      link_tx_ready = ($urandom % 4) != 0;
      #1;
      if (mem_tx_valid && mem_tx_ready && io_tx_valid) check(0, "memory accepted beside valid I/O");
      @(posedge clk);
      if (link_tx_valid && link_tx_ready) begin
        if (link_tx_flit.hdr.proto == PROTO_IO) begin
          check(q_io.size() > 0 && link_tx_flit == q_io.pop_front(), "random I/O flit");
        end else begin
          check(q_mem.size() > 0 && link_tx_flit == q_mem.pop_front(), "random memory flit");
        end
      end
      if (io_tx_valid && io_tx_ready)   begin q_io.push_back(ref_flit(P_IO, io_tx_data));    n_io_acc++;  end
      if (mem_tx_valid && mem_tx_ready) begin q_mem.push_back(ref_flit(P_MEM, mem_tx_data)); n_mem_acc++; end
      #1;
      // keep valid inputs stable until taken
    end
    io_tx_valid = 0; mem_tx_valid = 0; link_tx_ready = 1;
    repeat (2) begin
      @(posedge clk);
      if (link_tx_valid) begin
        if (link_tx_flit.hdr.proto == PROTO_IO) check(link_tx_flit == q_io.pop_front(), "drain I/O");
        else check(link_tx_flit == q_mem.pop_front(), "drain memory");
      end
      #1;
    end
    check(q_io.size() == 0 && q_mem.size() == 0, "no flit lost");
    check(stats.tx_io == n_io_acc && stats.tx_mem == n_mem_acc, "tx counters match accepted flits");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

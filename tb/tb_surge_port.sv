// tb_surge_port: self-checking test of one server's salvage-capable CXL
// interface (arbitration stage plus 2-port multiplexer).
//
// Checks the contention-free latencies (data link layer to device: two
// cycles; device to data link layer: one cycle), that CXL.io payloads reach
// the I/O device and .mem payloads the salvage memory as correctly framed
// flits, that responses from both devices come back to the right stack,
// and that I/O wins over memory in both directions when they collide.
// Then runs random traffic on all four streams against scoreboards.
module tb_surge_port;
  import surge_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic       io_tx_valid, io_tx_ready, io_rx_valid, io_rx_ready;
  payload_t   io_tx_data, io_rx_data;
  logic       mem_tx_valid, mem_tx_ready, mem_rx_valid, mem_rx_ready;
  payload_t   mem_tx_data, mem_rx_data;
  proto_e     mem_rx_proto;
  logic       iodev_dn_valid, iodev_dn_ready, iodev_up_valid, iodev_up_ready;
  flit_t      iodev_dn_flit, iodev_up_flit;
  logic       sm_dn_valid, sm_dn_ready, sm_up_valid, sm_up_ready;
  flit_t      sm_dn_flit, sm_up_flit;
  arb_stats_t arb_stats;
  mux_stats_t mux_stats;

  surge_port dut (.*);

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

  payload_t pa, pb;
  logic [543:0] q_iod [$], q_sm [$];
  payload_t q_io_rx [$], q_mem_rx [$];
  int lat;

  initial begin
    io_tx_valid = 0; io_tx_data = '0; io_rx_ready = 1;
    mem_tx_valid = 0; mem_tx_data = '0; mem_rx_ready = 1;
    iodev_dn_ready = 1; iodev_up_valid = 0; iodev_up_flit = '0;
    sm_dn_ready = 1; sm_up_valid = 0; sm_up_flit = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;

    // ---- downstream latency, I/O ----
    pa = rand_payload();
    io_tx_valid = 1; io_tx_data = pa;
    lat = 0;
    @(posedge clk); #1; io_tx_valid = 0; lat++;
    while (!iodev_dn_valid && lat < 10) begin @(posedge clk); #1; lat++; end
    check(lat == 2, $sformatf("I/O downstream latency 2 cycles, got %0d", lat));
    check(iodev_dn_flit == ref_flit(P_IO, pa) && !sm_dn_valid, "I/O flit at the I/O device");
    @(posedge clk); #1;

    // ---- downstream latency, memory ----
    pb = rand_payload();
    mem_tx_valid = 1; mem_tx_data = pb;
    lat = 0;
    @(posedge clk); #1; mem_tx_valid = 0; lat++;
    while (!sm_dn_valid && lat < 10) begin @(posedge clk); #1; lat++; end
    check(lat == 2, $sformatf("memory downstream latency 2 cycles, got %0d", lat));
    check(sm_dn_flit == ref_flit(P_MEM, pb) && !iodev_dn_valid, "memory flit at the salvage memory");
    @(posedge clk); #1;

    // ---- upstream latency ----
    sm_up_valid = 1; sm_up_flit = ref_flit(P_MEM, pb);
    @(posedge clk); #1; sm_up_valid = 0;
    check(mem_rx_valid && mem_rx_data == pb && !io_rx_valid, "memory response one cycle later at .mem stack");
    iodev_up_valid = 1; iodev_up_flit = ref_flit(P_IO, pa);
    @(posedge clk); #1; iodev_up_valid = 0;
    check(io_rx_valid && io_rx_data == pa && !mem_rx_valid, "I/O packet one cycle later at CXL.io stack");
    @(posedge clk); #1;

    // ---- collisions: I/O first in both directions ----
    io_tx_valid = 1; io_tx_data = pa; mem_tx_valid = 1; mem_tx_data = pb;
    iodev_up_valid = 1; iodev_up_flit = ref_flit(P_IO, pa); sm_up_valid = 1; sm_up_flit = ref_flit(P_MEM, pb);
    @(posedge clk); #1;
    io_tx_valid = 0; iodev_up_valid = 0;
    check(io_rx_valid && !mem_rx_valid, "I/O first upstream");
    @(posedge clk); #1;
    mem_tx_valid = 0; sm_up_valid = 0;
    check(iodev_dn_valid && !sm_dn_valid, "I/O first downstream");
    check(mem_rx_valid && mem_rx_data == pb, "memory response next");
    @(posedge clk); #1;
    check(sm_dn_valid && sm_dn_flit == ref_flit(P_MEM, pb), "memory request next");
    check(arb_stats.tx_mem_stall == 1 && mux_stats.up_mem_stall == 1, "one priority stall each way");
    @(posedge clk); #1;

    // ---- random ----
    for (int cyc = 0; cyc < 3000; cyc++) begin
      if (!io_tx_valid || io_tx_ready)   begin io_tx_valid  = ($urandom % 3) == 0; io_tx_data  = rand_payload(); end
      if (!mem_tx_valid || mem_tx_ready) begin mem_tx_valid = ($urandom % 2) == 0; mem_tx_data = rand_payload(); end
      if (!iodev_up_valid || iodev_up_ready) begin iodev_up_valid = ($urandom % 3) == 0; iodev_up_flit = ref_flit(P_IO,  rand_payload()); end
      if (!sm_up_valid || sm_up_ready)       begin sm_up_valid    = ($urandom % 2) == 0; sm_up_flit    = ref_flit(P_MEM, rand_payload()); end
      iodev_dn_ready = ($urandom % 4) != 0; sm_dn_ready = ($urandom % 3) != 0;
      io_rx_ready = ($urandom % 5) != 0;    mem_rx_ready = ($urandom % 4) != 0;
      #1;
      @(posedge clk);
      if (iodev_dn_valid && iodev_dn_ready) check(q_iod.size() > 0 && iodev_dn_flit == q_iod.pop_front(), "random flit at I/O device");
      if (sm_dn_valid && sm_dn_ready)       check(q_sm.size() > 0 && sm_dn_flit == q_sm.pop_front(), "random flit at salvage memory");
      if (io_rx_valid && io_rx_ready)       check(q_io_rx.size() > 0 && io_rx_data == q_io_rx.pop_front(), "random payload at CXL.io");
      if (mem_rx_valid && mem_rx_ready)     check(q_mem_rx.size() > 0 && mem_rx_data == q_mem_rx.pop_front(), "random payload at .mem");
      if (io_tx_valid && io_tx_ready)       q_iod.push_back(ref_flit(P_IO, io_tx_data));
      if (mem_tx_valid && mem_tx_ready)     q_sm.push_back(ref_flit(P_MEM, mem_tx_data));
      if (iodev_up_valid && iodev_up_ready) q_io_rx.push_back(iodev_up_flit[527:16]);
      if (sm_up_valid && sm_up_ready)       q_mem_rx.push_back(sm_up_flit[527:16]);
      #1;
    end
    io_tx_valid = 0; mem_tx_valid = 0; iodev_up_valid = 0; sm_up_valid = 0;
    iodev_dn_ready = 1; sm_dn_ready = 1; io_rx_ready = 1; mem_rx_ready = 1;
    repeat (4) begin
      @(posedge clk);
      if (iodev_dn_valid) check(iodev_dn_flit == q_iod.pop_front(), "drain I/O device");
      if (sm_dn_valid)    check(sm_dn_flit == q_sm.pop_front(), "drain salvage memory");
      if (io_rx_valid)    check(io_rx_data == q_io_rx.pop_front(), "drain CXL.io");
      if (mem_rx_valid)   check(mem_rx_data == q_mem_rx.pop_front(), "drain .mem");
      #1;
    end
    check(q_iod.size() == 0 && q_sm.size() == 0 && q_io_rx.size() == 0 && q_mem_rx.size() == 0, "no flit lost");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

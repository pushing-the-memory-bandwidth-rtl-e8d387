// tb_io_scenarios: bandwidth salvaging under the five I/O load scenarios.
//
// One server's CXL interface (surge_port) is run with the I/O loads
// low_low, low_high, high_low, med_med and high_high (RX_TX, with low, med
// and high = 10, 50 and 80 percent of the flit slots, offered at random
// cycles) while its memory stack and the salvage memory have traffic ready
// every cycle, as under a memory-bound workload. For each scenario and
// direction the test checks that:
//   - I/O is never delayed (every I/O payload is taken the cycle it is offered),
//   - the link carries a flit in every slot (no bandwidth is stranded),
//   - memory gets exactly the slots I/O leaves idle, and its share is
//     within 5 points of 100 minus the I/O load.
// It prints the salvaged share per scenario.
module tb_io_scenarios;
  import surge_pkg::*;
  import tb_ref_pkg::*;

  localparam int CYCLES = 4000;
  localparam int NSC    = 5;
  localparam int RXP [NSC] = '{10, 10, 80, 50, 80};
  localparam int TXP [NSC] = '{10, 80, 10, 50, 80};
  localparam string NAME [NSC] = '{"low_low", "low_high", "high_low", "med_med", "high_high"};

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
    repeat (NSC * (CYCLES + 100)) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int io_dn, io_up, mem_dn, mem_up, io_late, idle_dn, idle_up;
  int sh_dn, sh_up;

  initial begin
    io_rx_ready = 1; mem_rx_ready = 1; iodev_dn_ready = 1; sm_dn_ready = 1;
    mem_tx_data = rand_payload();
    sm_up_flit  = ref_flit(P_MEM, rand_payload());
    for (int sc = 0; sc < NSC; sc++) begin
      rst_n = 0; io_tx_valid = 0; iodev_up_valid = 0; mem_tx_valid = 0; sm_up_valid = 0;
      io_tx_data = '0; iodev_up_flit = '0;
      repeat (2) @(posedge clk);
      #1 rst_n = 1;
      mem_tx_valid = 1; sm_up_valid = 1;
      io_dn = 0; io_up = 0; mem_dn = 0; mem_up = 0; io_late = 0; idle_dn = 0; idle_up = 0;
      // warm-up: let the pipeline fill
      repeat (3) @(posedge clk);
      #1;
      for (int c = 0; c < CYCLES; c++) begin
        io_tx_valid    = ($urandom % 100) < TXP[sc];
        io_tx_data     = rand_payload();
        iodev_up_valid = ($urandom % 100) < RXP[sc];
        iodev_up_flit  = ref_flit(P_IO, rand_payload());
        #1;
        if (io_tx_valid && !io_tx_ready)       io_late++;
        if (iodev_up_valid && !iodev_up_ready) io_late++;
        @(posedge clk);
        if (io_tx_valid)  io_dn++;
        if (iodev_up_valid) io_up++;
        if (mem_tx_valid && mem_tx_ready) mem_dn++;
        if (sm_up_valid && sm_up_ready)   mem_up++;
        if (!(iodev_dn_valid || sm_dn_valid)) idle_dn++;
        if (!(io_rx_valid || mem_rx_valid))   idle_up++;
        #1;
      end
      sh_dn = 100 * mem_dn / CYCLES;
      sh_up = 100 * mem_up / CYCLES;
      $display("%-9s: downstream I/O %0d%% memory %0d%%, upstream I/O %0d%% memory %0d%%",
               NAME[sc], 100 * io_dn / CYCLES, sh_dn, 100 * io_up / CYCLES, sh_up);
      check(io_late == 0, $sformatf("%s: I/O never delayed (%0d late)", NAME[sc], io_late));
      check(idle_dn == 0 && idle_up == 0, $sformatf("%s: link full in every slot (%0d/%0d idle)", NAME[sc], idle_dn, idle_up));
      check(io_dn + mem_dn == CYCLES, $sformatf("%s: memory takes every slot I/O leaves downstream", NAME[sc]));
      check(io_up + mem_up == CYCLES, $sformatf("%s: memory takes every slot I/O leaves upstream", NAME[sc]));
      check(sh_dn >= 95 - TXP[sc] && sh_dn <= 105 - TXP[sc], $sformatf("%s: downstream memory share %0d%%", NAME[sc], sh_dn));
      check(sh_up >= 95 - RXP[sc] && sh_up <= 105 - RXP[sc], $sformatf("%s: upstream memory share %0d%%", NAME[sc], sh_up));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// prio_merge2: two valid/ready streams merged into one, with fixed priority.
//
// Used wherever I/O and memory traffic share one direction of a link. The
// high-priority input (I/O) always wins when both inputs are valid in the
// same cycle; the low-priority input (memory) is served only in cycles where
// the I/O input is idle. Strict I/O priority follows the source design, which
// lets the I/O device own the interface; it can hold memory traffic back for
// as long as I/O traffic keeps arriving.
//
// The winner is captured in one output register, so a word accepted in
// cycle t is offered on the output from cycle t+1. The register refills in
// the same cycle it is drained, giving one word per cycle at full rate.
// Handshake: a word moves when valid and ready are both high; the output
// holds valid and data steady until it is taken.
//
// Counters (wrap around): words passed from each input, and cycles in which
// the low-priority input was held back only because the high-priority input
// won (a priority stall, as opposed to back-pressure from the output).
// Reset is synchronous, active low.
module prio_merge2 #(
  parameter int unsigned W     = 8,
  parameter int unsigned CNT_W = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  // high-priority input (I/O)
  input  logic             hi_valid,
  input  logic [W-1:0]     hi_data,
  output logic             hi_ready,
  // low-priority input (memory)
  input  logic             lo_valid,
  input  logic [W-1:0]     lo_data,
  output logic             lo_ready,
  // merged output
  output logic             out_valid,
  output logic [W-1:0]     out_data,
  input  logic             out_ready,
  // statistics
  output logic [CNT_W-1:0] hi_count,
  output logic [CNT_W-1:0] lo_count,
  output logic [CNT_W-1:0] lo_stall_count
);

  logic load;

  assign load     = !out_valid || out_ready;
  assign hi_ready = load;
  assign lo_ready = load && !hi_valid;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid      <= 1'b0;
      out_data       <= '0;
      hi_count       <= '0;
      lo_count       <= '0;
      lo_stall_count <= '0;
    end else begin
      if (load) begin
        out_valid <= hi_valid || lo_valid;
        out_data  <= hi_valid ? hi_data : lo_data;
      end
      if (hi_valid && hi_ready)              hi_count       <= hi_count + 1'b1;
      if (lo_valid && lo_ready)              lo_count       <= lo_count + 1'b1;
      if (lo_valid && hi_valid && load)      lo_stall_count <= lo_stall_count + 1'b1;
    end
  end

  // An offered output word stays valid and unchanged until it is taken.
  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
                               out_valid && !out_ready |=> out_valid && $stable(out_data));

endmodule

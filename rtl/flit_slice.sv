// flit_slice: one-entry valid/ready register stage.
//
// A word accepted in cycle t appears on the output in cycle t+1. The stage
// accepts a new word whenever it is empty or its word is being taken in the
// same cycle, so it sustains one word per cycle. Used on the downstream
// outputs of the CXL multiplexer so that each output is driven from a
// register; the one-cycle stage is this design's choice. Reset is
// synchronous, active low.
module flit_slice #(
  parameter int unsigned W = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  input  logic [W-1:0] in_data,
  output logic         in_ready,
  output logic         out_valid,
  output logic [W-1:0] out_data,
  input  logic         out_ready
);

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      out_data  <= in_data;
    end
  end

  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
                               out_valid && !out_ready |=> out_valid && $stable(out_data));

endmodule

// hm_out_reg: output register of a HashMem processing element.
//
// Holds the result of the last probe, the value of the matching key and a
// found flag, until the rank-level unit has read it and the next probe
// starts. clear empties it (found = 0, value = 0, the NULL the host library
// reads as "not found") and has priority over load; load captures a
// result. Both act on the rising clock edge; the outputs are the register
// contents.
//
// The paper names the register and says it holds the value of a matched
// key until the RLU reads it. Clearing it at the start of each probe is
// this design's choice.
module hm_out_reg
  import hm_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             load,
  input  logic             found_d,
  input  logic [VAL_W-1:0] value_d,
  output logic             found_q,
  output logic [VAL_W-1:0] value_q
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      found_q <= 1'b0;
      value_q <= '0;
    end else if (clear) begin
      found_q <= 1'b0;
      value_q <= '0;
    end else if (load) begin
      found_q <= found_d;
      value_q <= found_d ? value_d : '0;
    end
  end

endmodule

// reduction_data_router: the reduction data router of one PE (blue box of
// the reconfigurable PE), horizontal part.
//
// When the reduction network is on (grid micro-operators), the routers of a
// PE line form a chain of BF16 adders running west to east: each router adds
// the PE's own weighted partial features to the running sum from its west
// neighbour and passes the result east, one register per hop. At the east
// end of the line the sum is the interpolated feature of that line (the
// "weighted adder tree" of the paper, built here as a pipelined chain).
// Because the point coordinates travel east one column per cycle as well,
// PE c finishes a point exactly when the running sum of PE c-1 arrives; the
// assertion checks that alignment. In the other micro-operators the router
// is off and drives nothing valid. The first column starts from zero.
module reduction_data_router
  import ur_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      en,
  input  logic      first,
  input  red_link_t own,
  input  red_link_t west_in,
  output red_link_t east_out
);

  logic [15:0] w0, w1;
  assign w0 = (!first && west_in.valid) ? west_in.f0 : BF16_ZERO;
  assign w1 = (!first && west_in.valid) ? west_in.f1 : BF16_ZERO;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      east_out <= '0;
    end else begin
      east_out.valid <= en && own.valid;
      east_out.f0    <= bf16_add(own.f0, w0);
      east_out.f1    <= bf16_add(own.f1, w1);
    end
  end

`ifndef SYNTHESIS
  a_aligned: assert property (@(posedge clk) disable iff (!rst_n)
                 (en && !first) |-> (own.valid == west_in.valid))
    else $error("reduction chain out of step: own=%0b west=%0b", own.valid, west_in.valid);
`endif

endmodule

// line_aggregator: vertical part of the reduction data network.
//
// For decomposed (tri-plane) grids the paper maps each feature plane to one
// PE line and turns the reduction network on "fully": after the horizontal
// interpolation inside each line, the results of the lines that belong to
// one level are combined across lines. The paper describes this step as a
// weighted multiplication (aggregation); addition is offered as well because
// some tri-plane encodings sum the plane features. `group` consecutive lines
// form one level (3 for a tri-plane, 1 for combined grids where every line is
// already a level). Group g covers lines g*group .. g*group+group-1 and is
// valid when all its lines delivered a result in the same cycle; a group cut
// short by the array edge is never valid.
// Timing: one register stage; all lines of the array finish a point in the
// same cycle because the point enters every line at the same time.
module line_aggregator
  import ur_pkg::*;
#(
  parameter int unsigned NR = ROWS
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic [4:0] group,        // lines per group, 1..NR
  input  agg_op_e   op,
  input  red_link_t line_in  [NR],
  output red_link_t group_out[NR]
);

  red_link_t nxt [NR];

  always_comb begin
    int          gi, pos;
    logic [15:0] a0, a1;
    logic        v;
    gi = 0; pos = 0; a0 = '0; a1 = '0; v = 1'b0;
    for (int g = 0; g < int'(NR); g++) nxt[g] = '0;
    for (int r = 0; r < int'(NR); r++) begin
      if (pos == 0) begin
        a0 = line_in[r].f0;
        a1 = line_in[r].f1;
        v  = line_in[r].valid;
      end else if (op == AGG_MUL) begin
        a0 = bf16_mul(a0, line_in[r].f0);
        a1 = bf16_mul(a1, line_in[r].f1);
        v  = v & line_in[r].valid;
      end else begin
        a0 = bf16_add(a0, line_in[r].f0);
        a1 = bf16_add(a1, line_in[r].f1);
        v  = v & line_in[r].valid;
      end
      pos++;
      if (pos == int'(group)) begin
        nxt[gi].valid = v;
        nxt[gi].f0    = a0;
        nxt[gi].f1    = a1;
        gi++;
        pos = 0;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int g = 0; g < int'(NR); g++) group_out[g] <= '0;
    end else begin
      for (int g = 0; g < int'(NR); g++) group_out[g] <= nxt[g];
    end
  end

endmodule

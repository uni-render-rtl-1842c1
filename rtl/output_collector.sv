// output_collector: output data path from the PE array into the output
// buffer.
//
// Grid micro-operators: when the line aggregator delivers a set of group
// results (all in one cycle), the collector latches them and writes one
// 32-bit entry (two BF16 features) per cycle into the output buffer, lowest
// group first, at consecutive addresses from `base`. If the next set arrives
// before the previous one is drained, the new set is dropped and `overflow`
// counts it; the host avoids this by spacing points at least as many cycles
// apart as there are groups.
// GEMM: the outputs of the last-layer PE of every column are taken one per
// cycle in round-robin order (valid/ready), each stored as one entry with the
// BF16 word in bits 15:0. Columns that are not granted wait (back-pressure).
// `clear` resets the write pointer and counters at the start of a run.
// `idle` is high when nothing is held.
// The output path itself is named by the paper; the buffering, the
// round-robin order and the entry format are this design's choices.
module output_collector
  import ur_pkg::*;
#(
  parameter int unsigned NR = ROWS,
  parameter int unsigned NC = COLS,
  parameter int unsigned AW = 14
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             gemm_mode,
  input  logic [AW-1:0]    base,
  // grid results
  input  red_link_t        grp_in   [NR],
  // GEMM column outputs
  input  word_link_t       col_out  [NC],
  output logic             col_ready[NC],
  // output buffer write port
  output logic             ob_we,
  output logic [AW-1:0]    ob_addr,
  output logic [31:0]      ob_wdata,
  // status
  output logic             idle,
  output logic [15:0]      written,
  output logic [15:0]      overflow
);

  red_link_t       hold [NR];
  logic [NR-1:0]   pend;
  logic [AW-1:0]   wptr;
  logic [$clog2(NC)-1:0] rr;

  logic            any_new;
  logic [NR-1:0]   new_mask;
  always_comb begin
    for (int g = 0; g < int'(NR); g++) new_mask[g] = grp_in[g].valid;
    any_new = |new_mask;
  end

  // lowest pending group
  logic            g_found;
  int              g_sel;
  always_comb begin
    g_found = 1'b0;
    g_sel   = 0;
    for (int g = int'(NR) - 1; g >= 0; g--) if (pend[g]) begin g_found = 1'b1; g_sel = g; end
  end

  // round-robin column grant
  logic            c_found;
  int              c_sel;
  always_comb begin
    c_found = 1'b0;
    c_sel   = 0;
    for (int k = int'(NC) - 1; k >= 0; k--) begin
      int c;
      c = (int'(rr) + k) % int'(NC);
      if (col_out[c].valid) begin c_found = 1'b1; c_sel = c; end
    end
    for (int c = 0; c < int'(NC); c++) col_ready[c] = gemm_mode && c_found && (c == c_sel);
  end

  always_comb begin
    ob_we    = 1'b0;
    ob_addr  = wptr;
    ob_wdata = '0;
    if (gemm_mode) begin
      if (c_found) begin
        ob_we    = 1'b1;
        ob_wdata = {16'd0, col_out[c_sel].data};
      end
    end else if (g_found) begin
      ob_we    = 1'b1;
      ob_wdata = {hold[g_sel].f1, hold[g_sel].f0};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend <= '0; wptr <= '0; rr <= '0; written <= '0; overflow <= '0;
      for (int g = 0; g < int'(NR); g++) hold[g] <= '0;
    end else if (clear) begin
      pend <= '0; wptr <= base; rr <= '0; written <= '0; overflow <= '0;
    end else begin
      if (ob_we) begin
        wptr    <= wptr + 1'b1;
        written <= written + 16'd1;
      end
      if (gemm_mode) begin
        if (c_found) rr <= $clog2(NC)'((c_sel + 1) % int'(NC));
      end else begin
        logic [NR-1:0] p;
        p = pend;
        if (g_found) p[g_sel] = 1'b0;
        if (any_new) begin
          if (p != '0) begin
            overflow <= overflow + 16'd1;
          end else begin
            p = new_mask;
            for (int g = 0; g < int'(NR); g++) hold[g] <= grp_in[g];
          end
        end
        pend <= p;
      end
    end
  end

  assign idle = (pend == '0);

endmodule

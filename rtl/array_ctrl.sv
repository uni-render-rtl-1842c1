// array_ctrl: runs one micro-operator on the PE array.
//
// After the host has configured the PEs and written the run parameters,
// `go` starts a run:
//   * geometric processing and sorting: the PEs are started and the run ends
//     when every PE is idle again (each PE works on its own pixels or patch);
//   * GEMM: the PEs are started, then `count` words are read from the input
//     buffer (from `ibuf_base`) and offered to the top PE of every column set
//     in `col_mask`; a word advances only when all those columns take it.
//     The run ends when all PEs are idle and the output path is empty;
//   * combined / decomposed grid indexing: `count` points, three words each
//     (x, y, z as Q0.16), are read from the input buffer and sent into the
//     west end of every line set in `row_mask`, one point every `period`
//     cycles. The run ends once the last point has left the array and the
//     output collector has drained.
// `cycles` counts the cycles of the last run. The stream formats and the
// issue rate control are this design's; the paper fixes only which networks
// each micro-operator uses.
// Timing: one input-buffer read per cycle; a GEMM word takes two cycles from
// read to hand-over; a grid point needs max(period, 4) cycles.
module array_ctrl
  import ur_pkg::*;
#(
  parameter int unsigned NR  = ROWS,
  parameter int unsigned NC  = COLS,
  parameter int unsigned IAW = 15
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           go,
  input  uop_e           uop,
  input  logic [IAW-1:0] ibuf_base,
  input  logic [15:0]    count,
  input  logic [7:0]     period,
  input  logic [NR-1:0]  row_mask,
  input  logic [NC-1:0]  col_mask,
  output logic           busy,
  output logic [31:0]    cycles,
  // PE array
  output logic           pe_start,
  input  logic           array_busy,
  output in_link_t       row_in       [NR],
  output word_link_t     col_in       [NC],
  input  logic           col_in_ready [NC],
  // output collector
  output logic           coll_clear,
  input  logic           coll_idle,
  // input buffer read port
  output logic           ib_en,
  output logic [IAW-1:0] ib_addr,
  input  logic [15:0]    ib_rdata
);

  typedef enum logic [2:0] {A_IDLE, A_START, A_STREAM, A_DRAIN, A_WAIT} astate_e;
  astate_e     st;
  uop_e        op;
  logic [15:0] idx;          // points / words sent
  logic [IAW-1:0] rptr;      // next input-buffer address
  logic [7:0]  drain;
  // grid fetch
  logic [1:0]  fc;
  logic [15:0] w0, w1;
  logic [47:0] pt;
  logic        pt_v;
  logic [7:0]  timer;
  logic        issue;
  logic        fetch;        // fetch the next point (may overlap the issue)
  // GEMM word
  logic        rd_pend, cur_v;
  logic [15:0] cur;
  logic        all_ready, fire;

  logic is_grid;
  assign is_grid = (op == OP_CGRID) || (op == OP_DGRID);

  always_comb begin
    all_ready = 1'b1;
    for (int c = 0; c < int'(NC); c++) if (col_mask[c] && !col_in_ready[c]) all_ready = 1'b0;
  end
  assign fire  = (st == A_STREAM) && (op == OP_GEMM) && cur_v && all_ready;
  assign issue = (st == A_STREAM) && is_grid && pt_v && (timer == 8'd0);
  assign fetch = (st == A_STREAM) && is_grid && (!pt_v || issue) && (idx + 16'(pt_v) < count);

  always_comb begin
    ib_en   = 1'b0;
    ib_addr = rptr;
    if (st == A_STREAM) begin
      if (is_grid)                                  ib_en = fetch && (fc != 2'd3);
      else if (op == OP_GEMM && !rd_pend && (!cur_v || fire) && (idx + 16'(cur_v) < count))
                                                    ib_en = 1'b1;
    end
    for (int r = 0; r < int'(NR); r++) begin
      row_in[r].valid = issue && row_mask[r];
      row_in[r].data  = {16'd0, pt};
    end
    for (int c = 0; c < int'(NC); c++) begin
      col_in[c].valid = cur_v && all_ready && col_mask[c] && (st == A_STREAM);
      col_in[c].data  = cur;
    end
  end

  assign pe_start   = (st == A_START) && !is_grid;
  assign coll_clear = go && (st == A_IDLE);
  assign busy       = (st != A_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= A_IDLE; op <= OP_IDLE; idx <= '0; rptr <= '0; drain <= '0;
      fc <= '0; w0 <= '0; w1 <= '0; pt <= '0; pt_v <= 1'b0; timer <= '0;
      rd_pend <= 1'b0; cur_v <= 1'b0; cur <= '0; cycles <= '0;
    end else begin
      if (st != A_IDLE) cycles <= cycles + 32'd1;
      if (timer != 8'd0) timer <= timer - 8'd1;
      unique case (st)
        A_IDLE: if (go) begin
          op <= uop; idx <= '0; rptr <= ibuf_base; cycles <= '0;
          fc <= '0; pt_v <= 1'b0; timer <= '0; rd_pend <= 1'b0; cur_v <= 1'b0;
          st <= A_START;
        end
        A_START: st <= (op == OP_GEOMETRY || op == OP_SORT) ? A_WAIT : A_STREAM;
        A_STREAM: begin
          if (is_grid) begin
            if (issue) begin
              pt_v  <= 1'b0;
              timer <= period - 8'd1;
              idx   <= idx + 16'd1;
            end
            if (fetch) begin
              fc <= fc + 2'd1;
              if (fc != 2'd3) rptr <= rptr + 1'b1;
              if (fc == 2'd1) w0 <= ib_rdata;
              if (fc == 2'd2) w1 <= ib_rdata;
              if (fc == 2'd3) begin
                pt   <= {ib_rdata, w1, w0};
                pt_v <= 1'b1;
                fc   <= '0;
              end
            end
            if (idx == count && !pt_v) begin
              drain <= 8'd64;
              st    <= A_DRAIN;
            end
          end else begin
            if (ib_en) begin
              rd_pend <= 1'b1;
              rptr    <= rptr + 1'b1;
            end else begin
              rd_pend <= 1'b0;
            end
            if (rd_pend) begin
              cur   <= ib_rdata;
              cur_v <= 1'b1;
            end else if (fire) begin
              cur_v <= 1'b0;
            end
            if (fire) idx <= idx + 16'd1;
            if (idx == count) begin
              drain <= 8'd2;
              st    <= A_DRAIN;
            end
          end
        end
        A_DRAIN: begin
          if (drain != 8'd0) drain <= drain - 8'd1;
          else               st    <= A_WAIT;
        end
        A_WAIT: if (!array_busy && coll_idle) st <= A_IDLE;
        default: st <= A_IDLE;
      endcase
    end
  end

endmodule

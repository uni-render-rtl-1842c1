// pe_array: the unified PE array, ROWS x COLS reconfigurable PEs (16 x 16 in
// the paper) joined by a 2-D mesh of data networks.
//
// Networks, as wired here:
//   * input data network, points: the west edge of each PE line receives a
//     point (row_in[r]); it then travels east one PE per cycle (systolic).
//   * input data network, GEMM: each column is a chain of PEs; the top PE
//     reads the column input (col_in[c]) and each PE feeds the PE below it
//     (one MLP layer per PE). The output of the PE in row `gemm_last_row`
//     leaves the array on col_out[c]; rows below it are unused.
//   * reduction data network, horizontal: the running interpolation sum
//     travels east along each PE line and leaves at row_red[r]. Vertical
//     aggregation of lines is done at the array edge (line_aggregator).
//   * output / load path: any single PE's scratch pads are reached through
//     the load port (row, column, cell select), which the DMA engine uses to
//     preload data and to read results.
// Configuration writes go to every PE whose row bit and column bit are set in
// cfg_row_mask / cfg_col_mask (so a whole line, column or the array can be
// configured with one write). `start` is broadcast. `busy` is the OR of all PE
// busy flags; `stall_total` sums the GEMM output stall cycles of all PEs and
// `overrun_any` flags points that arrived faster than a PE could take them.
// The GEMM ready signals run upward only (row r+1 to row r, or the column
// output to row gemm_last_row), so there is no combinational loop; lint
// tools that treat the ready arrays as one signal report one anyway.
module pe_array
  import ur_pkg::*;
#(
  parameter int unsigned NR = ROWS,
  parameter int unsigned NC = COLS
) (
  input  logic             clk,
  input  logic             rst_n,
  // configuration and control
  input  logic             cfg_we,
  input  logic [NR-1:0]    cfg_row_mask,
  input  logic [NC-1:0]    cfg_col_mask,
  input  logic [2:0]       cfg_addr,
  input  logic [15:0]      cfg_wdata,
  input  logic             start,
  output logic             busy,
  output logic             overrun_any,
  output logic [31:0]      stall_total,
  input  logic [3:0]       gemm_last_row,
  // load / read-out port
  input  logic             ld_en,
  input  logic             ld_we,
  input  logic [3:0]       ld_row,
  input  logic [3:0]       ld_col,
  input  logic [2:0]       ld_sel,
  input  logic [SP_AW-1:0] ld_addr,
  input  logic [15:0]      ld_wdata,
  output logic [15:0]      ld_rdata,
  // array edges
  input  in_link_t         row_in        [NR],
  output red_link_t        row_red       [NR],
  input  word_link_t       col_in        [NC],
  output logic             col_in_ready  [NC],
  output word_link_t       col_out       [NC],
  input  logic             col_out_ready [NC]
);

  in_link_t   pt_w    [NR][NC];   // point into PE from the west
  in_link_t   pt_e    [NR][NC];   // point out of PE to the east
  word_link_t wd_n    [NR][NC];   // word into PE from the north
  logic       wd_n_rdy[NR][NC];
  word_link_t wd_s    [NR][NC];   // word out of PE to the south
  logic       wd_s_rdy[NR][NC];
  red_link_t  rd_w    [NR][NC];
  red_link_t  rd_e    [NR][NC];
  logic       pe_busy [NR][NC];
  logic [15:0] pe_ovr [NR][NC];
  logic [31:0] pe_stall [NR][NC];
  logic [15:0] pe_rdata [NR][NC];

  for (genvar r = 0; r < NR; r++) begin : g_row
    for (genvar c = 0; c < NC; c++) begin : g_col
      if (c == 0) begin : g_w_edge
        assign pt_w[r][c] = row_in[r];
        assign rd_w[r][c] = '0;
      end else begin : g_w_int
        assign pt_w[r][c] = pt_e[r][c-1];
        assign rd_w[r][c] = rd_e[r][c-1];
      end
      if (r == 0) begin : g_n_edge
        assign wd_n[r][c]      = col_in[c];
        assign col_in_ready[c] = wd_n_rdy[r][c];
      end else begin : g_n_int
        assign wd_n[r][c] = wd_s[r-1][c];
      end
      if (r == NR - 1) begin : g_s_edge
        assign wd_s_rdy[r][c] = col_out_ready[c];
      end else begin : g_s_int
        assign wd_s_rdy[r][c] = (4'(r) == gemm_last_row) ? col_out_ready[c] : wd_n_rdy[r+1][c];
      end

      pe u_pe (
        .clk, .rst_n, .col_id(4'(c)), .first_col(c == 0),
        .cfg_we(cfg_we && cfg_row_mask[r] && cfg_col_mask[c]),
        .cfg_addr, .cfg_wdata, .start,
        .busy(pe_busy[r][c]), .overrun(pe_ovr[r][c]), .stall_cycles(pe_stall[r][c]),
        .ld_en(ld_en && ld_row == 4'(r) && ld_col == 4'(c)), .ld_we, .ld_sel, .ld_addr,
        .ld_wdata, .ld_rdata(pe_rdata[r][c]),
        .west_in(pt_w[r][c]), .east_out(pt_e[r][c]),
        .north_in(wd_n[r][c]), .north_ready(wd_n_rdy[r][c]),
        .south_out(wd_s[r][c]), .south_ready(wd_s_rdy[r][c]),
        .red_west(rd_w[r][c]), .red_east(rd_e[r][c])
      );
    end
    assign row_red[r] = rd_e[r][NC-1];
  end

  for (genvar c = 0; c < NC; c++) begin : g_colout
    assign col_out[c] = wd_s[gemm_last_row][c];
  end

  logic [3:0] rd_row_q, rd_col_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_row_q <= '0;
      rd_col_q <= '0;
    end else if (ld_en) begin
      rd_row_q <= ld_row;
      rd_col_q <= ld_col;
    end
  end
  assign ld_rdata = pe_rdata[rd_row_q][rd_col_q];

  always_comb begin
    busy        = 1'b0;
    overrun_any = 1'b0;
    stall_total = '0;
    for (int r = 0; r < NR; r++) begin
      for (int c = 0; c < NC; c++) begin
        busy        = busy | pe_busy[r][c];
        overrun_any = overrun_any | (pe_ovr[r][c] != 16'd0);
        stall_total = stall_total + pe_stall[r][c];
      end
    end
  end

endmodule

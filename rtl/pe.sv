// pe: one reconfigurable processing element.
//
// Built from the four modules the paper places in a PE - controller, filter/
// feature (FF) scratch pad, ALU and partial-sum (PS) scratch pad with its
// register buffer - plus the PE's input and reduction data routers. Eight
// 16-bit configuration registers (see ur_pkg::pe_cfg_t) select the
// micro-operator and its sizes; they are written through `cfg_we`.
// `start` launches geometric processing, sorting or GEMM; the grid
// micro-operators run whenever a point arrives.
//
// The load port (`ld_*`) reaches the FF cells (ld_sel 0..3) and the PS
// scratch pad (ld_sel 4) one word per cycle; it is how the DMA engine preloads
// geometry, features, keys or weights and reads results out. Use it only
// while `busy` is low. Read data follows one cycle after the request.
//
// Network ports: west_in/east_out carry points along a PE line, north/south
// carry the GEMM word stream down a column, red_west/red_east carry the
// running interpolation sum along a line. `col_id` is the PE's column, which
// decides the grid-table entries the PE owns.
module pe
  import ur_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic [3:0]       col_id,
  input  logic             first_col,
  // configuration and control
  input  logic             cfg_we,
  input  logic [2:0]       cfg_addr,
  input  logic [15:0]      cfg_wdata,
  input  logic             start,
  output logic             busy,
  output logic [15:0]      overrun,
  output logic [31:0]      stall_cycles,
  // load / read-out port
  input  logic             ld_en,
  input  logic             ld_we,
  input  logic [2:0]       ld_sel,
  input  logic [SP_AW-1:0] ld_addr,
  input  logic [15:0]      ld_wdata,
  output logic [15:0]      ld_rdata,
  // input data network
  input  in_link_t         west_in,
  output in_link_t         east_out,
  input  word_link_t       north_in,
  output logic             north_ready,
  output word_link_t       south_out,
  input  logic             south_ready,
  // reduction data network
  input  red_link_t        red_west,
  output red_link_t        red_east
);

  pe_cfg_t cfg;
  uop_e    uop;
  assign uop = uop_e'(cfg.r0[2:0]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg <= '0;
    end else if (cfg_we) begin
      unique case (cfg_addr)
        3'd0: cfg.r0 <= cfg_wdata;
        3'd1: cfg.r1 <= cfg_wdata;
        3'd2: cfg.r2 <= cfg_wdata;
        3'd3: cfg.r3 <= cfg_wdata;
        3'd4: cfg.r4 <= cfg_wdata;
        3'd5: cfg.r5 <= cfg_wdata;
        3'd6: cfg.r6 <= cfg_wdata;
        default: cfg.r7 <= cfg_wdata;
      endcase
    end
  end

  // ---------------------------------------------------------- wiring
  logic [3:0]         ff_en, ff_we;
  logic [SP_AW-1:0]   ff_addr  [4];
  logic [15:0]        ff_wdata [4];
  logic [15:0]        ff_rdata [4];
  logic [15:0]        ff_ld_rdata, ps_ld_rdata;
  logic               ps_wr_valid, ps_wr_ready, ps_empty;
  logic [SP_AW-1:0]   ps_wr_addr;
  logic [15:0]        ps_wr_data;

  alu_mode_e          alu_mode;
  logic signed [15:0] alu_ia [4], alu_ib [4];
  logic signed [31:0] alu_iprod [4], alu_ixp [2];
  logic [15:0]        alu_c [3];
  idx_mode_e          alu_idx_mode;
  logic [15:0]        alu_width;
  logic [31:0]        alu_index;
  logic [15:0]        alu_ka, alu_kb;
  logic               alu_le;
  logic [15:0]        alu_fa [4], alu_fb [4], alu_facc [2], alu_fout [2];
  logic [15:0]        alu_fw;

  in_link_t           pe_pt;
  word_link_t         pe_word, pe_res;
  logic               pe_word_ready, pe_res_ready;
  red_link_t          own;

  // ------------------------------------------------------- submodules
  pe_controller u_ctrl (
    .clk, .rst_n, .cfg, .start, .my_col(col_id), .busy,
    .ff_en, .ff_we, .ff_addr, .ff_wdata, .ff_rdata,
    .ps_wr_valid, .ps_wr_ready, .ps_wr_addr, .ps_wr_data, .ps_empty,
    .alu_mode, .alu_ia, .alu_ib, .alu_ixp, .alu_c, .alu_idx_mode, .alu_width,
    .alu_index, .alu_ka, .alu_kb, .alu_le, .alu_fa, .alu_fb, .alu_facc,
    .alu_fw, .alu_fout,
    .pt(pe_pt), .own, .overrun,
    .in_word(pe_word), .in_ready(pe_word_ready), .res(pe_res), .res_ready(pe_res_ready),
    .stall_cycles
  );

  ff_scratchpad u_ff (
    .clk, .en(ff_en), .we(ff_we), .addr(ff_addr), .wdata(ff_wdata), .rdata(ff_rdata),
    .ld_en(ld_en && !ld_sel[2]), .ld_we, .ld_bank(ld_sel[1:0]), .ld_addr, .ld_wdata,
    .ld_rdata(ff_ld_rdata)
  );

  ps_scratchpad u_ps (
    .clk, .rst_n,
    .wr_valid(ps_wr_valid), .wr_ready(ps_wr_ready), .wr_addr(ps_wr_addr),
    .wr_data(ps_wr_data), .empty(ps_empty),
    .ext_en(ld_en && ld_sel[2]), .ext_we(ld_we), .ext_addr(ld_addr),
    .ext_wdata(ld_wdata), .ext_rdata(ps_ld_rdata)
  );

  pe_alu u_alu (
    .mode(alu_mode), .ia(alu_ia), .ib(alu_ib), .iprod(alu_iprod), .ixp(alu_ixp),
    .c(alu_c), .idx_mode(alu_idx_mode), .width(alu_width), .index(alu_index),
    .ka(alu_ka), .kb(alu_kb), .le(alu_le),
    .fa(alu_fa), .fb(alu_fb), .facc(alu_facc), .fw(alu_fw), .fout(alu_fout)
  );

  input_data_router u_irt (
    .clk, .rst_n, .uop,
    .west_in, .east_out, .pe_pt,
    .north_in, .north_ready, .pe_word, .pe_word_ready,
    .pe_res, .pe_res_ready, .south_out, .south_ready
  );

  reduction_data_router u_rrt (
    .clk, .rst_n, .en(uop == OP_CGRID || uop == OP_DGRID), .first(first_col),
    .own, .west_in(red_west), .east_out(red_east)
  );

  // read-out multiplexer
  logic ld_ps_q = 1'b0;
  always_ff @(posedge clk) if (ld_en) ld_ps_q <= ld_sel[2];
  assign ld_rdata = ld_ps_q ? ps_ld_rdata : ff_ld_rdata;

endmodule

// ur_top: the unified neural-rendering accelerator.
//
// One reconfigurable architecture executes the five micro-operators that the
// common rendering pipelines (mesh, MLP, low-rank decomposed grid, hash grid,
// 3D Gaussian) decompose into. Each micro-operator is an indexing task run
// inside the PEs plus a reduction task run by the configurable data networks.
//
// Contents (sizes are the paper's):
//   host_if           command/status registers for the host SoC
//   dma_engine        moves words between external memory and all on-chip
//                     memories
//   global buffer     256 KB on-chip global SRAM buffer
//   input buffer      64 KB, streamed into the array by array_ctrl
//   private buffer    128 KB, staging for data preloaded into PE scratch pads
//   output buffer     64 KB (16K x 32-bit entries), written by the collector
//   pe_array          16 x 16 PEs, 1.25 MB of scratch pads in total
//   line_aggregator   vertical reduction of PE lines (decomposed grids)
//   output_collector  output data path into the output buffer
//   array_ctrl        runs one micro-operator
// The external memory is outside: its request/grant port is brought out. The
// special function units and power/clock gating of the paper are not built.
//
// `NR` may reduce the number of PE lines (for shorter simulations); the
// column count stays 16 because grid tables are interleaved over 16 PEs.
//
// Host bus: see host_if for the register map. A typical sequence is: DMA
// data from external memory to the global buffer, then to the private buffer
// and into the PE scratch pads (or into the input buffer); write the PE
// configuration registers; write the run registers and start; wait for
// `done`; DMA results out of the PS scratch pads or the output buffer.
module ur_top
  import ur_pkg::*;
#(
  parameter int unsigned GLB_WORDS  = 131072,   // 256 KB of 16-bit words
  parameter int unsigned IBUF_WORDS = 32768,    // 64 KB
  parameter int unsigned PBUF_WORDS = 65536,    // 128 KB
  parameter int unsigned OBUF_ENTRY = 16384,    // 64 KB of 32-bit entries
  parameter int unsigned NR         = ROWS      // PE lines (1..16)
) (
  input  logic        clk,
  input  logic        rst_n,
  // host SoC
  input  logic        host_we,
  input  logic [7:0]  host_addr,
  input  logic [15:0] host_wdata,
  output logic [15:0] host_rdata,
  output logic        irq_done,
  // external memory
  output logic        ext_req,
  output logic        ext_we,
  output logic [31:0] ext_addr,
  output logic [15:0] ext_wdata,
  input  logic        ext_gnt,
  input  logic        ext_rvalid,
  input  logic [15:0] ext_rdata
);

  localparam int unsigned GAW = $clog2(GLB_WORDS);
  localparam int unsigned IAW = $clog2(IBUF_WORDS);
  localparam int unsigned PAW = $clog2(PBUF_WORDS);
  localparam int unsigned OAW = $clog2(OBUF_ENTRY);

  // ------------------------------------------------------------- host
  logic        dma_go, dma_busy, op_go, op_busy;
  logic [2:0]  dma_src_space, dma_dst_space;
  logic [31:0] dma_src_addr, dma_dst_addr;
  logic [15:0] dma_len;
  uop_e        uop;
  logic [15:0] ibuf_base, count, row_mask, col_mask, obuf_base;
  logic [7:0]  period;
  logic [4:0]  group;
  agg_op_e     agg_op;
  logic [3:0]  gemm_last_row;
  logic        pe_cfg_we;
  logic [15:0] pe_row_mask, pe_col_mask, pe_cfg_wdata;
  logic [2:0]  pe_cfg_addr;
  logic [31:0] cycles, stall_total;
  logic [15:0] out_written, out_overflow;
  logic        overrun_any;

  host_if u_host (
    .clk, .rst_n, .we(host_we), .addr(host_addr), .wdata(host_wdata), .rdata(host_rdata),
    .done(irq_done),
    .dma_go, .dma_src_space, .dma_src_addr, .dma_dst_space, .dma_dst_addr, .dma_len, .dma_busy,
    .op_go, .uop, .ibuf_base, .count, .period, .row_mask, .col_mask, .obuf_base, .group,
    .agg_op, .gemm_last_row, .op_busy,
    .pe_cfg_we, .pe_row_mask, .pe_col_mask, .pe_cfg_addr, .pe_cfg_wdata,
    .cycles, .out_written, .out_overflow, .overrun_any, .stall_total
  );

  // -------------------------------------------------------------- DMA
  logic [5:0]  m_en;
  logic        m_we;
  logic [31:0] m_addr;
  logic [15:0] m_wdata;
  logic [15:0] m_rdata [6];

  dma_engine u_dma (
    .clk, .rst_n, .go(dma_go), .src_space(dma_src_space), .src_addr(dma_src_addr),
    .dst_space(dma_dst_space), .dst_addr(dma_dst_addr), .len(dma_len), .busy(dma_busy),
    .ext_req, .ext_we, .ext_addr, .ext_wdata, .ext_gnt, .ext_rvalid, .ext_rdata,
    .mem_en(m_en), .mem_we(m_we), .mem_addr(m_addr), .mem_wdata(m_wdata), .mem_rdata(m_rdata)
  );
  assign m_rdata[SP_EXT] = 16'd0;

  // --------------------------------------------------- global buffer
  sram_sp #(.DEPTH(GLB_WORDS), .WIDTH(16)) u_glb (
    .clk, .en(m_en[SP_GLB]), .we(m_we), .addr(m_addr[GAW-1:0]), .wdata(m_wdata),
    .rdata(m_rdata[SP_GLB])
  );

  // --------------------------------------------------- private buffer
  sram_sp #(.DEPTH(PBUF_WORDS), .WIDTH(16)) u_pbuf (
    .clk, .en(m_en[SP_PBUF]), .we(m_we), .addr(m_addr[PAW-1:0]), .wdata(m_wdata),
    .rdata(m_rdata[SP_PBUF])
  );

  // ----------------------------------------------------- input buffer
  logic           ac_ib_en;
  logic [IAW-1:0] ac_ib_addr;
  sram_sp #(.DEPTH(IBUF_WORDS), .WIDTH(16)) u_ibuf (
    .clk, .en(ac_ib_en || m_en[SP_IBUF]), .we(!ac_ib_en && m_we),
    .addr(ac_ib_en ? ac_ib_addr : m_addr[IAW-1:0]), .wdata(m_wdata),
    .rdata(m_rdata[SP_IBUF])
  );

  // ---------------------------------------------------- output buffer
  logic           ob_we;
  logic [OAW-1:0] ob_addr;
  logic [31:0]    ob_wdata;
  logic [15:0]    ob_rd [2];
  logic           ob_half_q = 1'b0;
  for (genvar h = 0; h < 2; h++) begin : g_obuf
    logic dma_h;
    assign dma_h = m_en[SP_OBUF] && (m_addr[0] == 1'(h));
    sram_sp #(.DEPTH(OBUF_ENTRY), .WIDTH(16)) u_obuf (
      .clk, .en(ob_we || dma_h), .we(ob_we || m_we),
      .addr(ob_we ? ob_addr : m_addr[OAW:1]),
      .wdata(ob_we ? ob_wdata[16*h +: 16] : m_wdata),
      .rdata(ob_rd[h])
    );
  end
  always_ff @(posedge clk) if (m_en[SP_OBUF]) ob_half_q <= m_addr[0];
  assign m_rdata[SP_OBUF] = ob_rd[ob_half_q];

  // --------------------------------------------------------- PE array
  logic        pe_start, array_busy;
  in_link_t    row_in   [NR];
  red_link_t   row_red  [NR];
  red_link_t   grp      [NR];
  word_link_t  col_in   [COLS];
  logic        col_in_ready [COLS];
  word_link_t  col_out  [COLS];
  logic        col_out_ready [COLS];
  logic        coll_clear, coll_idle;

  pe_array #(.NR(NR)) u_array (
    .clk, .rst_n,
    .cfg_we(pe_cfg_we), .cfg_row_mask(pe_row_mask[NR-1:0]), .cfg_col_mask(pe_col_mask),
    .cfg_addr(pe_cfg_addr), .cfg_wdata(pe_cfg_wdata),
    .start(pe_start), .busy(array_busy), .overrun_any, .stall_total, .gemm_last_row,
    .ld_en(m_en[SP_PE]), .ld_we(m_we), .ld_row(m_addr[19:16]), .ld_col(m_addr[15:12]),
    .ld_sel(m_addr[11:9]), .ld_addr(m_addr[8:0]), .ld_wdata(m_wdata), .ld_rdata(m_rdata[SP_PE]),
    .row_in, .row_red, .col_in, .col_in_ready, .col_out, .col_out_ready
  );

  line_aggregator #(.NR(NR)) u_agg (
    .clk, .rst_n, .group(uop == OP_CGRID ? 5'd1 : group), .op(agg_op),
    .line_in(row_red), .group_out(grp)
  );

  output_collector #(.NR(NR), .AW(OAW)) u_coll (
    .clk, .rst_n, .clear(coll_clear), .gemm_mode(uop == OP_GEMM), .base(obuf_base[OAW-1:0]),
    .grp_in(grp), .col_out, .col_ready(col_out_ready),
    .ob_we, .ob_addr, .ob_wdata, .idle(coll_idle), .written(out_written),
    .overflow(out_overflow)
  );

  array_ctrl #(.NR(NR), .IAW(IAW)) u_actrl (
    .clk, .rst_n, .go(op_go), .uop, .ibuf_base(ibuf_base[IAW-1:0]), .count, .period,
    .row_mask(row_mask[NR-1:0]), .col_mask, .busy(op_busy), .cycles,
    .pe_start, .array_busy, .row_in, .col_in, .col_in_ready,
    .coll_clear, .coll_idle,
    .ib_en(ac_ib_en), .ib_addr(ac_ib_addr), .ib_rdata(m_rdata[SP_IBUF])
  );

endmodule

// host_if: command and status registers through which the host SoC drives
// the accelerator.
//
// The paper's host issues commands and does light computation; the register
// map is this design's. 16-bit registers on an 8-bit address, write strobe
// `we`, read data combinational on `rdata`:
//   0x00 CMD       write: bit0 start DMA, bit1 start micro-operator (pulses)
//   0x01 STATUS    read : bit0 DMA busy, bit1 array busy, bit2 output
//                         overflow seen, bit3 point overrun seen
//   0x02..0x08     DMA: source space, source address low/high,
//                  destination space, destination address low/high, length
//   0x10 UOP       micro-operator (ur_pkg::uop_e)
//   0x11 IBUF_BASE 0x12 COUNT 0x13 PERIOD 0x14 ROW_MASK 0x15 COL_MASK
//   0x16 OBUF_BASE 0x17 GROUP 0x18 AGG_OP 0x19 GEMM_LAST_ROW
//   0x20 PE_ROW_MASK 0x21 PE_COL_MASK
//   0x28..0x2F     write: PE configuration register 0..7 of every PE
//                  selected by the two masks (one write reaches them all)
//   0x30/0x31 run cycles low/high, 0x32 output entries written,
//   0x33 output overflows, 0x34/0x35 GEMM stall cycles low/high
// `done` pulses when a micro-operator run or a DMA transfer finishes.
module host_if
  import ur_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // host bus
  input  logic        we,
  input  logic [7:0]  addr,
  input  logic [15:0] wdata,
  output logic [15:0] rdata,
  output logic        done,
  // DMA command
  output logic        dma_go,
  output logic [2:0]  dma_src_space,
  output logic [31:0] dma_src_addr,
  output logic [2:0]  dma_dst_space,
  output logic [31:0] dma_dst_addr,
  output logic [15:0] dma_len,
  input  logic        dma_busy,
  // run command
  output logic        op_go,
  output uop_e        uop,
  output logic [15:0] ibuf_base,
  output logic [15:0] count,
  output logic [7:0]  period,
  output logic [15:0] row_mask,
  output logic [15:0] col_mask,
  output logic [15:0] obuf_base,
  output logic [4:0]  group,
  output agg_op_e     agg_op,
  output logic [3:0]  gemm_last_row,
  input  logic        op_busy,
  // PE configuration broadcast
  output logic        pe_cfg_we,
  output logic [15:0] pe_row_mask,
  output logic [15:0] pe_col_mask,
  output logic [2:0]  pe_cfg_addr,
  output logic [15:0] pe_cfg_wdata,
  // statistics
  input  logic [31:0] cycles,
  input  logic [15:0] out_written,
  input  logic [15:0] out_overflow,
  input  logic        overrun_any,
  input  logic [31:0] stall_total
);

  logic dma_busy_q, op_busy_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dma_go <= 1'b0; op_go <= 1'b0;
      dma_src_space <= '0; dma_src_addr <= '0; dma_dst_space <= '0; dma_dst_addr <= '0;
      dma_len <= '0; uop <= OP_IDLE; ibuf_base <= '0; count <= '0; period <= 8'd16;
      row_mask <= '0; col_mask <= '0; obuf_base <= '0; group <= 5'd1; agg_op <= AGG_MUL;
      gemm_last_row <= '0; pe_row_mask <= '1; pe_col_mask <= '1;
      dma_busy_q <= 1'b0; op_busy_q <= 1'b0; done <= 1'b0;
    end else begin
      dma_go <= 1'b0;
      op_go  <= 1'b0;
      dma_busy_q <= dma_busy;
      op_busy_q  <= op_busy;
      done <= (dma_busy_q && !dma_busy) || (op_busy_q && !op_busy);
      if (we) begin
        unique case (addr)
          8'h00: begin dma_go <= wdata[0]; op_go <= wdata[1]; end
          8'h02: dma_src_space       <= wdata[2:0];
          8'h03: dma_src_addr[15:0]  <= wdata;
          8'h04: dma_src_addr[31:16] <= wdata;
          8'h05: dma_dst_space       <= wdata[2:0];
          8'h06: dma_dst_addr[15:0]  <= wdata;
          8'h07: dma_dst_addr[31:16] <= wdata;
          8'h08: dma_len             <= wdata;
          8'h10: uop                 <= uop_e'(wdata[2:0]);
          8'h11: ibuf_base           <= wdata;
          8'h12: count               <= wdata;
          8'h13: period              <= wdata[7:0];
          8'h14: row_mask            <= wdata;
          8'h15: col_mask            <= wdata;
          8'h16: obuf_base           <= wdata;
          8'h17: group               <= wdata[4:0];
          8'h18: agg_op              <= agg_op_e'(wdata[0]);
          8'h19: gemm_last_row       <= wdata[3:0];
          8'h20: pe_row_mask         <= wdata;
          8'h21: pe_col_mask         <= wdata;
          default: ;
        endcase
      end
    end
  end

  assign pe_cfg_we    = we && (addr[7:3] == 5'b00101);
  assign pe_cfg_addr  = addr[2:0];
  assign pe_cfg_wdata = wdata;

  always_comb begin
    unique case (addr)
      8'h01: rdata = {12'd0, overrun_any, (out_overflow != 16'd0), op_busy, dma_busy};
      8'h02: rdata = {13'd0, dma_src_space};
      8'h08: rdata = dma_len;
      8'h10: rdata = {13'd0, uop};
      8'h12: rdata = count;
      8'h30: rdata = cycles[15:0];
      8'h31: rdata = cycles[31:16];
      8'h32: rdata = out_written;
      8'h33: rdata = out_overflow;
      8'h34: rdata = stall_total[15:0];
      8'h35: rdata = stall_total[31:16];
      default: rdata = 16'd0;
    endcase
  end

endmodule

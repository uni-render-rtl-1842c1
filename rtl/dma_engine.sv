// dma_engine: moves blocks of 16-bit words between the memories of the
// accelerator and the external memory.
//
// The paper's overview shows data moving from the external memory through
// the on-chip global SRAM buffer into the input and private buffers, from the
// private buffer into the PE array, and from the array and output buffer back.
// This engine performs all of those moves with one command format:
// (source space, source address, destination space, destination address,
// length in words). Spaces (ur dma_space_e): external memory, global buffer,
// input buffer, private buffer, output buffer (32-bit entries addressed as
// 16-bit halves: address = 2*entry + half) and PE scratch pads (address =
// {row[3:0], col[3:0], cell[2:0], word[8:0]}, cell 0-3 FF, 4 PS).
// One word at a time: read (one cycle for on-chip memories, until
// `ext_rvalid` for external memory), then write (one cycle, or until
// `ext_gnt` for external memory). A word therefore takes 3 cycles between
// on-chip memories (request, capture, write).
// Bandwidth figures of the paper's DRAM are not modelled.
module dma_engine
  import ur_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // command
  input  logic        go,
  input  logic [2:0]  src_space,
  input  logic [31:0] src_addr,
  input  logic [2:0]  dst_space,
  input  logic [31:0] dst_addr,
  input  logic [15:0] len,
  output logic        busy,
  // external memory (request / grant, read data with rvalid)
  output logic        ext_req,
  output logic        ext_we,
  output logic [31:0] ext_addr,
  output logic [15:0] ext_wdata,
  input  logic        ext_gnt,
  input  logic        ext_rvalid,
  input  logic [15:0] ext_rdata,
  // on-chip memory port (one shared request, per-space enables)
  output logic [5:0]  mem_en,      // one-hot: index = space
  output logic        mem_we,
  output logic [31:0] mem_addr,
  output logic [15:0] mem_wdata,
  input  logic [15:0] mem_rdata [6]
);

  typedef enum logic [1:0] {D_IDLE, D_RD, D_RWAIT, D_WR} dstate_e;
  dstate_e     st;
  logic [2:0]  ss, ds;
  logic [31:0] sa, da;
  logic [15:0] left;
  logic [15:0] data;
  logic        ext_rd_sent;

  assign busy = (st != D_IDLE);

  always_comb begin
    ext_req   = 1'b0;
    ext_we    = 1'b0;
    ext_addr  = '0;
    ext_wdata = data;
    mem_en    = '0;
    mem_we    = 1'b0;
    mem_addr  = '0;
    mem_wdata = data;
    unique case (st)
      D_RD: begin
        if (ss == 3'(SP_EXT)) begin
          ext_req  = !ext_rd_sent;
          ext_addr = sa;
        end else begin
          mem_en[ss] = 1'b1;
          mem_addr   = sa;
        end
      end
      D_WR: begin
        if (ds == 3'(SP_EXT)) begin
          ext_req  = 1'b1;
          ext_we   = 1'b1;
          ext_addr = da;
        end else begin
          mem_en[ds] = 1'b1;
          mem_we     = 1'b1;
          mem_addr   = da;
        end
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= D_IDLE; ss <= '0; ds <= '0; sa <= '0; da <= '0; left <= '0; data <= '0;
      ext_rd_sent <= 1'b0;
    end else begin
      unique case (st)
        D_IDLE: if (go && len != 16'd0) begin
          ss <= src_space; ds <= dst_space; sa <= src_addr; da <= dst_addr; left <= len;
          ext_rd_sent <= 1'b0;
          st <= D_RD;
        end
        D_RD: begin
          if (ss == 3'(SP_EXT)) begin
            if (ext_gnt) ext_rd_sent <= 1'b1;
            if (ext_rvalid) begin
              data <= ext_rdata;
              ext_rd_sent <= 1'b0;
              st <= D_WR;
            end
          end else begin
            st <= D_RWAIT;
          end
        end
        D_RWAIT: begin
          data <= mem_rdata[ss];
          st   <= D_WR;
        end
        D_WR: if (ds != 3'(SP_EXT) || ext_gnt) begin
          sa   <= sa + 32'd1;
          da   <= da + 32'd1;
          left <= left - 16'd1;
          st   <= (left == 16'd1) ? D_IDLE : D_RD;
        end
        default: st <= D_IDLE;
      endcase
    end
  end

endmodule

// ps_scratchpad: partial-sum (PS) scratch pad of one PE with its register
// buffer.
//
// The PS scratch pad is the PE's output memory: the Z-buffer records of
// geometric processing and the output features of GEMM end up here. It is one
// single-port 512 x 16 SRAM cell (paper). The register buffer in front of it
// (paper: "connected to a register buffer") is built here as a 4-entry FIFO of
// (address, data) writes: the controller pushes a result word whenever it has
// one, and the buffer drains one word per cycle into the SRAM whenever the
// read-out port is not using it. `wr_ready` is low while the buffer is full,
// which stalls the controller. `empty` tells the controller that every
// pushed word has reached the SRAM.
//
// The read-out port (DMA, through the array's output data path) has priority
// over draining; its data arrives one cycle after `rd_en`.
module ps_scratchpad
  import ur_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  // result writes from the PE controller
  input  logic             wr_valid,
  output logic             wr_ready,
  input  logic [SP_AW-1:0] wr_addr,
  input  logic [15:0]      wr_data,
  output logic             empty,
  // external read-out / preload port
  input  logic             ext_en,
  input  logic             ext_we,
  input  logic [SP_AW-1:0] ext_addr,
  input  logic [15:0]      ext_wdata,
  output logic [15:0]      ext_rdata
);

  localparam int unsigned DEPTH = 4;

  logic [SP_AW+15:0] fifo [DEPTH] = '{default: '0};
  logic [1:0]        rd_ptr, wr_ptr;
  logic [2:0]        count;
  logic              push, pop;

  assign wr_ready = (count < 3'(DEPTH));
  assign empty    = (count == 3'd0);
  assign push     = wr_valid && wr_ready;
  assign pop      = !ext_en && (count != 3'd0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= wr_ptr + 2'd1;
      if (pop)  rd_ptr <= rd_ptr + 2'd1;
      count <= count + 3'(push) - 3'(pop);
    end
  end

  always_ff @(posedge clk) if (push) fifo[wr_ptr] <= {wr_addr, wr_data};

  logic             m_en, m_we;
  logic [SP_AW-1:0] m_addr;
  logic [15:0]      m_wdata;

  always_comb begin
    if (ext_en) begin
      m_en = 1'b1; m_we = ext_we; m_addr = ext_addr; m_wdata = ext_wdata;
    end else begin
      m_en = pop;  m_we = 1'b1;
      m_addr  = fifo[rd_ptr][SP_AW+15:16];
      m_wdata = fifo[rd_ptr][15:0];
    end
  end

  sram_sp #(.DEPTH(SP_DEPTH), .WIDTH(16)) u_cell (
    .clk, .en(m_en), .we(m_we), .addr(m_addr), .wdata(m_wdata), .rdata(ext_rdata)
  );

endmodule

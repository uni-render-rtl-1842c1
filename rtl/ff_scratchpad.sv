// ff_scratchpad: filter/feature (FF) scratch pad of one PE.
//
// Four single-port SRAM cells of 512 x 16 bits, as the paper gives them. The
// cell holds what the running micro-operator indexes: triangle records
// (geometry), grid features, sort keys and ids, or MLP weights. Each cell has
// its own address, so the PE controller (automatic counter) or the ALU
// (computed index) can address the four cells independently in one cycle.
//
// A load port, used by the DMA engine while the PE is idle, takes priority
// over the controller and reaches one cell at a time (`ld_bank`); its read
// data is the selected cell's output one cycle later.
// Timing: one-cycle read latency on every cell.
module ff_scratchpad
  import ur_pkg::*;
(
  input  logic                clk,
  // controller / ALU side
  input  logic [3:0]          en,
  input  logic [3:0]          we,
  input  logic [SP_AW-1:0]    addr  [4],
  input  logic [15:0]         wdata [4],
  output logic [15:0]         rdata [4],
  // load / read-out side
  input  logic                ld_en,
  input  logic                ld_we,
  input  logic [1:0]          ld_bank,
  input  logic [SP_AW-1:0]    ld_addr,
  input  logic [15:0]         ld_wdata,
  output logic [15:0]         ld_rdata
);

  logic [1:0] ld_bank_q = 2'd0;
  always_ff @(posedge clk) if (ld_en) ld_bank_q <= ld_bank;

  assign ld_rdata = rdata[ld_bank_q];

  for (genvar b = 0; b < 4; b++) begin : g_cell
    logic             c_en, c_we;
    logic [SP_AW-1:0] c_addr;
    logic [15:0]      c_wdata;
    always_comb begin
      if (ld_en) begin
        c_en    = (ld_bank == 2'(b));
        c_we    = ld_we;
        c_addr  = ld_addr;
        c_wdata = ld_wdata;
      end else begin
        c_en    = en[b];
        c_we    = we[b];
        c_addr  = addr[b];
        c_wdata = wdata[b];
      end
    end
    sram_sp #(.DEPTH(SP_DEPTH), .WIDTH(16)) u_cell (
      .clk, .en(c_en), .we(c_we), .addr(c_addr), .wdata(c_wdata), .rdata(rdata[b])
    );
  end

endmodule

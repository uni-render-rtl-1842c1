// input_data_router: the input data router of one PE (red box of the
// reconfigurable PE).
//
// It sets how data enters the PE and how it travels on through the array:
//   * Grid micro-operators (mode 2, "pipeline"): point coordinates arrive
//     from the west neighbour. The router hands them to the PE and forwards
//     them, one register later, to the east neighbour, so the point sweeps
//     along the PE line one column per cycle (systolic).
//   * GEMM (mode 1, "systolic-array-like"): the PE takes the word stream of
//     the PE above it (the previous MLP layer, or the array input in row 0)
//     with a valid/ready handshake, and its own output stream leaves towards
//     the PE below.
//   * Geometric processing, sorting, idle: the network is off; nothing is
//     forwarded.
// The mode per micro-operator follows the paper's table of module states
// (input paths on for the grid and GEMM micro-operators, off otherwise); the
// direction of travel (west to east, north to south) is this design's choice.
// Timing: east_out is registered (one cycle per hop); the GEMM path is
// combinational between neighbours and flow-controlled by ready.
module input_data_router
  import ur_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  uop_e       uop,
  // systolic point path
  input  in_link_t   west_in,
  output in_link_t   east_out,
  output in_link_t   pe_pt,
  // GEMM word path
  input  word_link_t north_in,
  output logic       north_ready,
  output word_link_t pe_word,
  input  logic       pe_word_ready,
  input  word_link_t pe_res,
  output logic       pe_res_ready,
  output word_link_t south_out,
  input  logic       south_ready
);

  logic grid, gemm;
  assign grid = (uop == OP_CGRID) || (uop == OP_DGRID);
  assign gemm = (uop == OP_GEMM);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      east_out <= '0;
    end else begin
      east_out.valid <= grid && west_in.valid;
      east_out.data  <= west_in.data;
    end
  end

  always_comb begin
    pe_pt        = '0;
    pe_word      = '0;
    south_out    = '0;
    north_ready  = 1'b0;
    pe_res_ready = 1'b0;
    if (grid) pe_pt = west_in;
    if (gemm) begin
      pe_word      = north_in;
      north_ready  = pe_word_ready;
      south_out    = pe_res;
      pe_res_ready = south_ready;
    end
  end

endmodule

// ur_pkg: types, constants and arithmetic helpers shared by the unified
// neural-rendering accelerator.
//
// The accelerator maps five micro-operators (geometric processing, combined
// grid indexing, decomposed grid indexing, sorting and GEMM) onto one array
// of reconfigurable processing elements (PEs). This package holds:
//   * the micro-operator encoding and the per-PE configuration record,
//   * the link types of the input, reduction and output data networks,
//   * BF16 helpers (multiply, add, fixed-point to BF16 conversion).
//
// What follows the paper: the five micro-operators, the 16x16 array, the
// 512x16 scratch-pad cells, INT16 index arithmetic and BF16 feature
// arithmetic. Design choices of this RTL: the register encodings, the
// configuration record layout, and BF16 rounding, which truncates toward
// zero and flushes subnormals to zero (no NaN handling; overflow gives
// infinity).
package ur_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned ROWS      = 16;   // PE array rows
  localparam int unsigned COLS      = 16;   // PE array columns
  localparam int unsigned FF_BANKS  = 4;    // SRAM cells per FF scratch pad
  localparam int unsigned SP_DEPTH  = 512;  // words per scratch-pad cell
  localparam int unsigned SP_AW     = 9;    // address bits of one cell
  localparam int unsigned CFG_REGS  = 8;    // configuration registers per PE

  // ------------------------------------------------------- micro-operators
  typedef enum logic [2:0] {
    OP_IDLE     = 3'd0,
    OP_GEOMETRY = 3'd1,   // rasterisation with min-depth hold (Z-buffer)
    OP_CGRID    = 3'd2,   // combined grid indexing (hash / dense grid)
    OP_DGRID    = 3'd3,   // decomposed grid indexing (feature planes)
    OP_SORT     = 3'd4,   // merge sort inside the FF scratch pad
    OP_GEMM     = 3'd5    // weight-stationary matrix-vector products
  } uop_e;

  // Index function of the grid micro-operators.
  typedef enum logic {
    IDX_LINEAR = 1'b0,
    IDX_HASH   = 1'b1
  } idx_mode_e;

  // Operating layout of the ALU.
  typedef enum logic [2:0] {
    ALU_OFF  = 3'd0,
    ALU_VEC  = 3'd1,      // vector mode: 4 INT16 products, 2 cross products
    ALU_GRID = 3'd2,      // index function + weight product + feature MACs
    ALU_CMP  = 3'd3,      // comparator
    ALU_TREE = 3'd4       // BF16 adder tree: acc + sum of 4 products
  } alu_mode_e;

  // Aggregation across PE lines (decomposed grid).
  typedef enum logic {
    AGG_MUL = 1'b0,
    AGG_ADD = 1'b1
  } agg_op_e;

  // Address spaces of the DMA engine.
  typedef enum logic [2:0] {
    SP_EXT  = 3'd0,   // external memory
    SP_GLB  = 3'd1,   // global SRAM buffer
    SP_IBUF = 3'd2,   // input buffer
    SP_PBUF = 3'd3,   // private buffer
    SP_OBUF = 3'd4,   // output buffer (16-bit halves of 32-bit entries)
    SP_PE   = 3'd5    // PE scratch pads {row, col, cell, word}
  } dma_space_e;

  // ------------------------------------------- per-PE configuration record
  // Written register by register through the configuration bus.
  //   reg0 : [2:0] micro-operator, [3] index mode (1 = hash), [4] 3-D grid,
  //          [6:5] first plane axis, [8:7] second plane axis, [9] ReLU
  //   reg1 : count  (triangles / sort elements / GEMM outputs M)
  //   reg2 : GEMM inputs K, or grid resolution N
  //   reg3 : region x0 (geometry) or log2 of the grid table size
  //   reg4 : region y0 (geometry) or GEMM batch size
  //   reg5 : region width
  //   reg6 : region height
  //   reg7 : spare
  typedef struct packed {
    logic [15:0] r7, r6, r5, r4, r3, r2, r1, r0;
  } pe_cfg_t;

  // ------------------------------------------------------- network links
  // Input data network: up to four 16-bit words per beat.
  typedef struct packed {
    logic        valid;
    logic [63:0] data;
  } in_link_t;

  // Reduction data network: two BF16 features per beat.
  typedef struct packed {
    logic        valid;
    logic [15:0] f1;
    logic [15:0] f0;
  } red_link_t;

  // GEMM stream between vertically adjacent PEs (one BF16 word per beat).
  typedef struct packed {
    logic        valid;
    logic [15:0] data;
  } word_link_t;

  // Low 16 bits of the spatial-hash primes of multiresolution hash grids.
  // The index is reduced modulo a power of two not above 2^14, so only the
  // low bits of each product matter.
  localparam logic [15:0] HASH_P1 = 16'h79B1;   // 2654435761
  localparam logic [15:0] HASH_P2 = 16'h5795;   // 805459861

  localparam logic [15:0] BF16_ONE  = 16'h3F80;
  localparam logic [15:0] BF16_ZERO = 16'h0000;

  // ------------------------------------------------------ BF16 helpers
  function automatic logic [15:0] bf16_mul(input logic [15:0] a, input logic [15:0] b);
    logic        s;
    logic [15:0] m;
    logic signed [10:0] e;
    logic [6:0]  mant;
    s = a[15] ^ b[15];
    if (a[14:7] == 8'd0 || b[14:7] == 8'd0) return {s, 15'd0};
    m = {1'b1, a[6:0]} * {1'b1, b[6:0]};
    e = $signed({3'b000, a[14:7]}) + $signed({3'b000, b[14:7]}) - 11'sd127;
    if (m[15]) begin
      mant = m[14:8];
      e    = e + 11'sd1;
    end else begin
      mant = m[13:7];
    end
    if (e <= 0)   return {s, 15'd0};
    if (e >= 255) return {s, 8'hFF, 7'd0};
    return {s, e[7:0], mant};
  endfunction

  function automatic logic [15:0] bf16_add(input logic [15:0] a, input logic [15:0] b);
    logic [15:0] big, sml;
    logic [7:0]  d;
    logic [16:0] mb, ms, r;
    logic signed [9:0] e;
    int          lz;
    if (a[14:7] == 8'd0) return (b[14:7] == 8'd0) ? 16'h0000 : b;
    if (b[14:7] == 8'd0) return a;
    if (a[14:0] >= b[14:0]) begin big = a; sml = b; end
    else                    begin big = b; sml = a; end
    d  = big[14:7] - sml[14:7];
    mb = {1'b0, 1'b1, big[6:0], 8'd0};
    ms = (d > 8'd16) ? 17'd0 : ({1'b0, 1'b1, sml[6:0], 8'd0} >> d);
    e  = $signed({2'b00, big[14:7]});
    if (big[15] == sml[15]) begin
      r = mb + ms;
      if (r[16]) begin
        r = r >> 1;
        e = e + 10'sd1;
      end
    end else begin
      r = mb - ms;
      if (r == 17'd0) return 16'h0000;
      lz = 0;
      for (int i = 15; i >= 0; i--) begin
        if (r[i]) break;
        lz++;
      end
      r = r << lz;
      e = e - 10'(lz);
    end
    if (e <= 0)   return {big[15], 15'd0};
    if (e >= 255) return {big[15], 8'hFF, 7'd0};
    return {big[15], e[7:0], r[14:8]};
  endfunction

  // Unsigned fixed-point value v * 2^-frac to BF16 (truncating).
  function automatic logic [15:0] ufix_to_bf16(input logic [31:0] v, input int frac);
    int p;
    logic [31:0] n;
    if (v == 32'd0) return 16'h0000;
    p = 0;
    for (int i = 0; i < 32; i++) if (v[i]) p = i;
    n = v << (31 - p);                       // leading one at bit 31
    return {1'b0, 8'(127 + p - frac), n[30:24]};
  endfunction

  // Signed 32-bit integer to BF16 (truncating).
  function automatic logic [15:0] int_to_bf16(input logic signed [31:0] v);
    logic [15:0] r;
    logic [31:0] mag;
    mag = v[31] ? 32'(-v) : 32'(v);
    r = ufix_to_bf16(mag, 0);
    r[15] = v[31] && (mag != 32'd0);
    return r;
  endfunction

endpackage

// pe_alu: arithmetic unit of one PE.
//
// The paper gives the unit's resources - four INT16 MACs for index
// arithmetic and four BF16 MACs for feature arithmetic - and says they are
// configured into different layouts per micro-operator (vector mode,
// index function, comparator, adder tree). This module is purely
// combinational; the PE controller registers its results. Layouts:
//
//   ALU_VEC  : iprod[i] = ia[i]*ib[i] (INT16 x INT16 -> 32 bit) and two cross
//              products ixp[0] = iprod[0]-iprod[1], ixp[1] = iprod[2]-iprod[3]
//              (edge functions of rasterisation).
//   ALU_GRID : index function on the corner coordinates c[0..2]:
//                hash   : c0 ^ (c1*P1) ^ (c2*P2), low 16 bits
//                linear : c0 + W*(c1 + W*c2) (two chained INT16 MACs)
//              and in the BF16 MACs the corner weight fw = fa0*fb0*fa1 plus
//              the two feature MACs fout[k] = facc[k] + fa[2+k]*fb[2+k].
//   ALU_CMP  : le = (ka <= kb), unsigned sort keys.
//   ALU_TREE : fout[0] = facc[0] + (fa0*fb0 + fa1*fb1) + (fa2*fb2 + fa3*fb3),
//              the four BF16 MACs as an adder tree (GEMM).
//   ALU_OFF  : all outputs zero (unit idle).
// The four special function units the paper mentions are not built: their
// functions are not given. The hash primes are those of multiresolution hash
// encodings; BF16 arithmetic truncates (see ur_pkg).
module pe_alu
  import ur_pkg::*;
(
  input  alu_mode_e          mode,
  // INT16 MAC operands
  input  logic signed [15:0] ia   [4],
  input  logic signed [15:0] ib   [4],
  output logic signed [31:0] iprod[4],
  output logic signed [31:0] ixp  [2],
  // index function
  input  logic [15:0]        c    [3],
  input  idx_mode_e          idx_mode,
  input  logic [15:0]        width,
  output logic [31:0]        index,
  // comparator
  input  logic [15:0]        ka,
  input  logic [15:0]        kb,
  output logic               le,
  // BF16 MACs
  input  logic [15:0]        fa   [4],
  input  logic [15:0]        fb   [4],
  input  logic [15:0]        facc [2],
  output logic [15:0]        fw,
  output logic [15:0]        fout [2]
);

  always_comb begin
    for (int i = 0; i < 4; i++) iprod[i] = '0;
    ixp[0] = '0;
    ixp[1] = '0;
    index  = '0;
    le     = 1'b0;
    fw     = BF16_ZERO;
    fout[0] = BF16_ZERO;
    fout[1] = BF16_ZERO;
    unique case (mode)
      ALU_VEC: begin
        for (int i = 0; i < 4; i++) iprod[i] = ia[i] * ib[i];
        ixp[0] = iprod[0] - iprod[1];
        ixp[1] = iprod[2] - iprod[3];
      end
      ALU_GRID: begin
        if (idx_mode == IDX_HASH) begin
          index = {16'd0, c[0] ^ 16'(c[1] * HASH_P1) ^ 16'(c[2] * HASH_P2)};
        end else begin
          index = {16'd0, c[0]} + {16'd0, width} * ({16'd0, c[1]} + {16'd0, width} * {16'd0, c[2]});
        end
        fw      = bf16_mul(bf16_mul(fa[0], fb[0]), fa[1]);
        fout[0] = bf16_add(facc[0], bf16_mul(fa[2], fb[2]));
        fout[1] = bf16_add(facc[1], bf16_mul(fa[3], fb[3]));
      end
      ALU_CMP: le = (ka <= kb);
      ALU_TREE: begin
        fout[0] = bf16_add(facc[0],
                  bf16_add(bf16_add(bf16_mul(fa[0], fb[0]), bf16_mul(fa[1], fb[1])),
                           bf16_add(bf16_mul(fa[2], fb[2]), bf16_mul(fa[3], fb[3]))));
      end
      default: ;
    endcase
  end

endmodule

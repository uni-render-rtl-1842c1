// pe_controller: dataflow control of one reconfigurable PE.
//
// The paper gives each micro-operator its own controller setting
// (rasterisation, grid, sorting and GEMM control); all four are built here as
// one state machine plus an independent grid pipeline. The controller
// generates the FF scratch-pad addresses (automatic counter, or the ALU's
// computed index), drives the ALU layout and operands, and pushes results
// into the PS scratch pad or onto the networks.
//
// Geometric processing (OP_GEOMETRY). The PE owns a rectangle of pixels
// (cfg r3..r6 = x0, y0, width, height; at most 128 pixels) and holds N
// triangles (cfg r1, at most 170) in the FF scratch pad as three 4-word rows
// (row 3t: xA yA xB yB, row 3t+1: xC yC zA zB, row 3t+2: zC id - -; signed
// vertex coordinates in pixel units within +/-8191, unsigned depths). For
// each pixel an automatic counter walks all triangles; the ALU in vector mode
// forms the three edge functions (cross products), the min-depth hold keeps
// the nearest covering triangle (depth compared as exact fractions
// (sum e_i z_i)/area, so no divider is needed), and at the end of the pixel
// four words go to the PS scratch pad (Z-buffer) at 4*pixel:
// id (16'hFFFF = no triangle), then the unnormalised barycentric weights of
// A, B and C as BF16 (they sum to the triangle's doubled area).
// Cost: 6 cycles per triangle per pixel plus 4 write cycles per pixel.
//
// Grid indexing (OP_CGRID / OP_DGRID). A point (three Q0.16 coordinates in
// [0,1)) arrives on the input network. With resolution N (cfg r2) each used
// axis gives cell = floor(coord*N) and fraction. For each of the 2^D corners
// (D = 3, or 2 on the plane of axes r0[6:5], r0[8:7]) the ALU computes the
// index (hash or linear with W = N+1), keeps the low r3 bits (at most 14),
// and the PE whose column equals index[3:0] owns the entry; it reads the two
// BF16 features at local entry index[13:4] (bank pair index[13], address
// index[12:4]) and accumulates weight*feature, where the weight is the
// product of fraction / (1-fraction) per axis. Other PEs add zero. One corner
// per cycle; the partial result leaves on `own` exactly D_CORNERS+2 cycles
// after the point arrived, which the reduction chain relies on. Points must
// be at least D_CORNERS+2 cycles apart (`overrun` counts violations).
//
// Sorting (OP_SORT). N (cfg r1, at most 512) 16-bit keys in cell 0 with
// their ids in cell 1 are merge-sorted bottom-up, ping-ponging between
// cells 0/1 and 2/3; the ALU acts as comparator. The result ends ascending
// (stable) in cells 0/1; a final copy pass moves it back if the last merge
// left it in cells 2/3. At most 3 cycles per element per pass (about 2.7 measured).
//
// GEMM (OP_GEMM). Weight-stationary: the FF scratch pad holds one layer,
// W[m][k] at cell k%4, address m*K/4 + k/4 (K = cfg r2, a multiple of 4 up to
// 64; M = cfg r1; M*K <= 2048). For each of B input vectors (cfg r4) the PE
// loads K words from the input network into a register buffer, then computes
// each output with the ALU as an adder tree (four BF16 MACs per cycle),
// applies ReLU if r0[9] is set, writes it to the PS scratch pad and sends it
// to the next PE down. Output blocks (stalls) while the next PE is not
// ready; `stall_cycles` counts such cycles.
module pe_controller
  import ur_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  pe_cfg_t            cfg,
  input  logic               start,
  input  logic [3:0]         my_col,
  output logic               busy,
  // FF scratch pad
  output logic [3:0]         ff_en,
  output logic [3:0]         ff_we,
  output logic [SP_AW-1:0]   ff_addr  [4],
  output logic [15:0]        ff_wdata [4],
  input  logic [15:0]        ff_rdata [4],
  // PS scratch pad (through its register buffer)
  output logic               ps_wr_valid,
  input  logic               ps_wr_ready,
  output logic [SP_AW-1:0]   ps_wr_addr,
  output logic [15:0]        ps_wr_data,
  input  logic               ps_empty,
  // ALU
  output alu_mode_e          alu_mode,
  output logic signed [15:0] alu_ia [4],
  output logic signed [15:0] alu_ib [4],
  input  logic signed [31:0] alu_ixp [2],
  output logic [15:0]        alu_c  [3],
  output idx_mode_e          alu_idx_mode,
  output logic [15:0]        alu_width,
  input  logic [31:0]        alu_index,
  output logic [15:0]        alu_ka,
  output logic [15:0]        alu_kb,
  input  logic               alu_le,
  output logic [15:0]        alu_fa [4],
  output logic [15:0]        alu_fb [4],
  output logic [15:0]        alu_facc [2],
  input  logic [15:0]        alu_fw,
  input  logic [15:0]        alu_fout [2],
  // grid: point in, partial features out
  input  in_link_t           pt,
  output red_link_t          own,
  output logic [15:0]        overrun,
  // GEMM: word stream in and out
  input  word_link_t         in_word,
  output logic               in_ready,
  output word_link_t         res,
  input  logic               res_ready,
  output logic [31:0]        stall_cycles
);

  // ------------------------------------------------------------ decode
  uop_e      uop;
  idx_mode_e idx_mode;
  logic      dim3, relu;
  logic [1:0] ax0, ax1;
  assign uop      = uop_e'(cfg.r0[2:0]);
  assign idx_mode = idx_mode_e'(cfg.r0[3]);
  assign dim3     = cfg.r0[4];
  assign ax0      = cfg.r0[6:5];
  assign ax1      = cfg.r0[8:7];
  assign relu     = cfg.r0[9];

  typedef enum logic [4:0] {
    S_IDLE,
    G_PIX, G_RD0, G_RD1, G_RD2, G_EDGE01, G_EDGE2, G_HOLD, G_WR, G_NEXT,
    T_PAIR, T_FL, T_FR, T_CAPR, T_MERGE, T_WL, T_WR, T_COPY,
    M_LOAD, M_COMP, M_OUT,
    S_FLUSH
  } state_e;

  state_e state;

  // ---------------------------------------------------- geometry state
  logic signed [15:0] px, py;
  logic [6:0]         pix;
  logic [7:0]         tri_i;
  logic [1:0]         wr_k;
  logic signed [15:0] xa, ya, xb, yb, xc, yc;
  logic [15:0]        za, zb, zc, tid;
  logic signed [31:0] e0, e1, e2;
  logic               best_v;
  logic [15:0]        best_id;
  logic [31:0]        best_e0, best_e1, best_e2;
  logic [63:0]        best_d;
  logic [32:0]        best_a;

  // ------------------------------------------------------- sort state
  logic [9:0]  s_w, s_lo, s_mid, s_hi, s_i, s_j, s_k, s_n;
  logic        ping;             // 0: source cells 0/1, 1: source cells 2/3
  logic        lv, rv;
  logic [15:0] lkey, lid, rkey, rid;
  logic        cp_v;
  logic [9:0]  cp_k;

  // ------------------------------------------------------- GEMM state
  logic [15:0] xbuf [64];
  logic [6:0]  g_cnt;            // words loaded
  logic [4:0]  g_j, g_pj;        // column group issued / in flight
  logic        g_pv;
  logic [15:0] g_m, g_b;
  logic [15:0] acc;
  logic [SP_AW-1:0] out_ptr;
  logic [4:0]  g_kq;             // K/4
  assign g_kq = cfg.r2[6:2];

  logic [15:0] y_out;
  assign y_out = (relu && acc[15]) ? BF16_ZERO : acc;

  // -------------------------------------------------- min-depth hold
  logic signed [32:0] area;
  logic               neg;
  logic [31:0]        n0, n1, n2;
  logic [32:0]        n_area;
  logic [63:0]        dnum;
  logic               in_tri, closer;
  always_comb begin
    area   = 33'(e0) + 33'(e1) + 33'(e2);
    neg    = area[32];
    n0     = neg ? 32'(-e0) : 32'(e0);
    n1     = neg ? 32'(-e1) : 32'(e1);
    n2     = neg ? 32'(-e2) : 32'(e2);
    n_area = neg ? 33'(-area) : 33'(area);
    in_tri = (area != 33'd0) &&
             !(neg ? (e0 > 0 || e1 > 0 || e2 > 0) : (e0 < 0 || e1 < 0 || e2 < 0));
    dnum   = 64'(n1) * 64'(za) + 64'(n2) * 64'(zb) + 64'(n0) * 64'(zc);
    closer = !best_v || (128'(dnum) * 128'(best_a) < 128'(best_d) * 128'(n_area));
  end

  // ------------------------------------------------------ grid pipeline
  logic [2:0]  gr_nc;            // corners - 1
  assign gr_nc = dim3 ? 3'd7 : 3'd3;
  logic        gr_busy, gr_a, gr_b, gr_last_b;
  logic [2:0]  gr_k;
  logic [15:0] gr_cell [3];
  logic [15:0] gr_fr   [3];      // BF16 fraction
  logic [15:0] gr_omf  [3];      // BF16 1 - fraction
  logic        gr_hit;
  logic        gr_hi;
  logic [15:0] gr_w;
  logic [15:0] gr_acc0, gr_acc1;
  logic [13:0] tmask, gidx;
  assign tmask = 14'((32'd1 << cfg.r3[3:0]) - 32'd1);
  assign gidx  = alu_index[13:0] & tmask;

  logic [15:0] pcoord [3];
  always_comb begin
    pcoord[0] = pt.data[15:0];
    pcoord[1] = pt.data[31:16];
    pcoord[2] = pt.data[47:32];
  end

  // per-axis cell and fraction of the arriving point
  logic [31:0] ppos [3];
  logic [15:0] axc  [3];
  always_comb begin
    if (dim3) begin
      axc[0] = pcoord[0]; axc[1] = pcoord[1]; axc[2] = pcoord[2];
    end else begin
      axc[0] = pcoord[ax0]; axc[1] = pcoord[ax1]; axc[2] = 16'd0;
    end
    for (int d = 0; d < 3; d++) ppos[d] = 32'(axc[d]) * 32'(cfg.r2);
  end

  // corner bits of the corner in stage A
  logic [2:0] kb;
  assign kb = gr_k;

  // -------------------------------------------------------- ALU drive
  always_comb begin
    alu_mode     = ALU_OFF;
    for (int i = 0; i < 4; i++) begin
      alu_ia[i] = '0; alu_ib[i] = '0; alu_fa[i] = '0; alu_fb[i] = '0;
    end
    for (int d = 0; d < 3; d++) alu_c[d] = '0;
    alu_idx_mode = idx_mode;
    alu_width    = cfg.r2 + 16'd1;
    alu_ka       = lkey;
    alu_kb       = rkey;
    alu_facc[0]  = '0;
    alu_facc[1]  = '0;
    if (uop == OP_CGRID || uop == OP_DGRID) begin
      alu_mode = ALU_GRID;
      for (int d = 0; d < 3; d++) alu_c[d] = gr_cell[d] + 16'(kb[d] && (dim3 || d < 2));
      alu_fa[0] = kb[0] ? gr_fr[0] : gr_omf[0];
      alu_fb[0] = kb[1] ? gr_fr[1] : gr_omf[1];
      alu_fa[1] = dim3 ? (kb[2] ? gr_fr[2] : gr_omf[2]) : BF16_ONE;
      alu_fa[2] = gr_w;
      alu_fb[2] = gr_hit ? ff_rdata[{gr_hi, 1'b0}] : BF16_ZERO;
      alu_fa[3] = gr_w;
      alu_fb[3] = gr_hit ? ff_rdata[{gr_hi, 1'b1}] : BF16_ZERO;
      alu_facc[0] = gr_acc0;
      alu_facc[1] = gr_acc1;
    end else begin
      unique case (state)
        G_EDGE01: begin
          alu_mode = ALU_VEC;
          alu_ia[0] = xb - xa; alu_ib[0] = py - ya;
          alu_ia[1] = yb - ya; alu_ib[1] = px - xa;
          alu_ia[2] = xc - xb; alu_ib[2] = py - yb;
          alu_ia[3] = yc - yb; alu_ib[3] = px - xb;
        end
        G_EDGE2: begin
          alu_mode = ALU_VEC;
          alu_ia[0] = xa - xc; alu_ib[0] = py - yc;
          alu_ia[1] = ya - yc; alu_ib[1] = px - xc;
        end
        T_MERGE: alu_mode = ALU_CMP;
        M_COMP, M_OUT: begin
          alu_mode = ALU_TREE;
          for (int i = 0; i < 4; i++) begin
            alu_fa[i] = ff_rdata[i];
            alu_fb[i] = xbuf[{g_pj[3:0], 2'(i)}];
          end
          alu_facc[0] = acc;
        end
        default: ;
      endcase
    end
  end

  // ------------------------------------------------- FF and PS drive
  logic left_take;
  assign left_take = lv && (!rv || alu_le);

  always_comb begin
    ff_en = '0;
    ff_we = '0;
    for (int b = 0; b < 4; b++) begin
      ff_addr[b]  = '0;
      ff_wdata[b] = '0;
    end
    ps_wr_valid = 1'b0;
    ps_wr_addr  = '0;
    ps_wr_data  = '0;
    in_ready    = 1'b0;
    res         = '0;
    if (uop == OP_CGRID || uop == OP_DGRID) begin
      // stage A: read the owned entry (both features of the entry)
      if (gr_a && gidx[3:0] == my_col) begin
        ff_en[{gidx[13], 1'b0}] = 1'b1;
        ff_en[{gidx[13], 1'b1}] = 1'b1;
      end
      for (int b = 0; b < 4; b++) ff_addr[b] = gidx[12:4];
    end else begin
      unique case (state)
        G_RD0: begin ff_en = 4'hF; for (int b = 0; b < 4; b++) ff_addr[b] = 9'(tri_i * 3); end
        G_RD1: begin ff_en = 4'hF; for (int b = 0; b < 4; b++) ff_addr[b] = 9'(tri_i * 3 + 1); end
        G_RD2: begin ff_en = 4'hF; for (int b = 0; b < 4; b++) ff_addr[b] = 9'(tri_i * 3 + 2); end
        G_WR: begin
          ps_wr_valid = 1'b1;
          ps_wr_addr  = {pix, wr_k};
          unique case (wr_k)
            2'd0: ps_wr_data = best_v ? best_id : 16'hFFFF;
            2'd1: ps_wr_data = int_to_bf16(best_e1);
            2'd2: ps_wr_data = int_to_bf16(best_e2);
            default: ps_wr_data = int_to_bf16(best_e0);
          endcase
        end
        T_FL: if (s_i < s_mid) begin
          ff_en[{ping, 1'b0}] = 1'b1; ff_en[{ping, 1'b1}] = 1'b1;
          for (int b = 0; b < 4; b++) ff_addr[b] = s_i[8:0];
        end
        T_FR: if (s_j < s_hi) begin
          ff_en[{ping, 1'b0}] = 1'b1; ff_en[{ping, 1'b1}] = 1'b1;
          for (int b = 0; b < 4; b++) ff_addr[b] = s_j[8:0];
        end
        T_MERGE: if (s_k != s_hi) begin
          // write the smaller head to the destination cells
          ff_en[{!ping, 1'b0}] = 1'b1; ff_en[{!ping, 1'b1}] = 1'b1;
          ff_we[{!ping, 1'b0}] = 1'b1; ff_we[{!ping, 1'b1}] = 1'b1;
          ff_addr[{!ping, 1'b0}]  = s_k[8:0];
          ff_addr[{!ping, 1'b1}]  = s_k[8:0];
          ff_wdata[{!ping, 1'b0}] = left_take ? lkey : rkey;
          ff_wdata[{!ping, 1'b1}] = left_take ? lid  : rid;
          // fetch the replacement head from the source cells
          if (left_take ? (s_i + 10'd1 < s_mid) : (s_j + 10'd1 < s_hi)) begin
            ff_en[{ping, 1'b0}] = 1'b1; ff_en[{ping, 1'b1}] = 1'b1;
            ff_addr[{ping, 1'b0}] = left_take ? 9'(s_i + 10'd1) : 9'(s_j + 10'd1);
            ff_addr[{ping, 1'b1}] = left_take ? 9'(s_i + 10'd1) : 9'(s_j + 10'd1);
          end
        end
        T_COPY: begin
          if (s_k < s_n) begin
            ff_en[2] = 1'b1; ff_en[3] = 1'b1;
            ff_addr[2] = s_k[8:0]; ff_addr[3] = s_k[8:0];
          end
          if (cp_v) begin
            ff_en[0] = 1'b1; ff_en[1] = 1'b1; ff_we[0] = 1'b1; ff_we[1] = 1'b1;
            ff_addr[0] = cp_k[8:0]; ff_addr[1] = cp_k[8:0];
            ff_wdata[0] = ff_rdata[2]; ff_wdata[1] = ff_rdata[3];
          end
        end
        M_LOAD: in_ready = 1'b1;
        M_COMP: if (g_j < g_kq) begin
          ff_en = 4'hF;
          for (int b = 0; b < 4; b++) ff_addr[b] = 9'(g_m * 16'(g_kq) + 16'(g_j));
        end
        M_OUT: begin
          res.valid   = ps_wr_ready;
          res.data    = y_out;
          ps_wr_valid = res_ready;
          ps_wr_addr  = out_ptr;
          ps_wr_data  = y_out;
        end
        default: ;
      endcase
    end
  end

  // ----------------------------------------------------- main sequencer
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      px <= '0; py <= '0; pix <= '0; tri_i <= '0; wr_k <= '0;
      xa <= '0; ya <= '0; xb <= '0; yb <= '0; xc <= '0; yc <= '0;
      za <= '0; zb <= '0; zc <= '0; tid <= '0;
      e0 <= '0; e1 <= '0; e2 <= '0;
      best_v <= 1'b0; best_id <= '0; best_e0 <= '0; best_e1 <= '0; best_e2 <= '0;
      best_d <= '0; best_a <= '0;
      s_w <= '0; s_lo <= '0; s_mid <= '0; s_hi <= '0; s_i <= '0; s_j <= '0; s_k <= '0;
      s_n <= '0; ping <= 1'b0; lv <= 1'b0; rv <= 1'b0;
      lkey <= '0; lid <= '0; rkey <= '0; rid <= '0; cp_v <= 1'b0; cp_k <= '0;
      g_cnt <= '0; g_j <= '0; g_pj <= '0; g_pv <= 1'b0; g_m <= '0; g_b <= '0;
      acc <= '0; out_ptr <= '0; stall_cycles <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          unique case (uop)
            OP_GEOMETRY: begin
              px <= cfg.r3; py <= cfg.r4; pix <= '0;
              state <= G_PIX;
            end
            OP_SORT: begin
              s_n <= cfg.r1[9:0]; s_w <= 10'd1; s_lo <= '0; ping <= 1'b0;
              state <= (cfg.r1[9:0] <= 10'd1) ? S_FLUSH : T_PAIR;
            end
            OP_GEMM: begin
              g_cnt <= '0; g_b <= '0; out_ptr <= '0; stall_cycles <= '0;
              state <= (cfg.r4 == 16'd0) ? S_FLUSH : M_LOAD;
            end
            default: ;
          endcase
        end

        // ---------------- geometric processing
        G_PIX: begin
          tri_i <= '0; best_v <= 1'b0; wr_k <= '0;
          state <= (cfg.r1 == 16'd0) ? G_WR : G_RD0;
        end
        G_RD0: state <= G_RD1;
        G_RD1: begin
          xa <= ff_rdata[0]; ya <= ff_rdata[1]; xb <= ff_rdata[2]; yb <= ff_rdata[3];
          state <= G_RD2;
        end
        G_RD2: begin
          xc <= ff_rdata[0]; yc <= ff_rdata[1]; za <= ff_rdata[2]; zb <= ff_rdata[3];
          state <= G_EDGE01;
        end
        G_EDGE01: begin
          zc <= ff_rdata[0]; tid <= ff_rdata[1];
          e0 <= alu_ixp[0]; e1 <= alu_ixp[1];
          state <= G_EDGE2;
        end
        G_EDGE2: begin
          e2 <= alu_ixp[0];
          state <= G_HOLD;
        end
        G_HOLD: begin
          if (in_tri && closer) begin
            best_v <= 1'b1; best_id <= tid;
            best_e0 <= n0; best_e1 <= n1; best_e2 <= n2;
            best_d <= dnum; best_a <= n_area;
          end
          tri_i <= tri_i + 8'd1;
          state <= (16'(tri_i) + 16'd1 < cfg.r1) ? G_RD0 : G_WR;
        end
        G_WR: if (ps_wr_ready) begin
          wr_k <= wr_k + 2'd1;
          if (wr_k == 2'd3) state <= G_NEXT;
        end
        G_NEXT: begin
          pix <= pix + 7'd1;
          if (px + 16'sd1 == $signed(cfg.r3 + cfg.r5)) begin
            px <= cfg.r3;
            py <= py + 16'sd1;
          end else begin
            px <= px + 16'sd1;
          end
          state <= (16'(pix) + 16'd1 < cfg.r5 * cfg.r6) ? G_PIX : S_FLUSH;
        end

        // ---------------- sorting
        T_PAIR: begin
          s_mid <= (s_lo + s_w < s_n) ? s_lo + s_w : s_n;
          s_hi  <= (s_lo + 2 * s_w < s_n) ? s_lo + 2 * s_w : s_n;
          s_i   <= s_lo;
          s_j   <= (s_lo + s_w < s_n) ? s_lo + s_w : s_n;
          s_k   <= s_lo;
          state <= T_FL;
        end
        T_FL: state <= T_FR;
        T_FR: begin
          lv <= (s_i < s_mid);
          lkey <= ff_rdata[{ping, 1'b0}]; lid <= ff_rdata[{ping, 1'b1}];
          state <= T_CAPR;
        end
        T_CAPR: begin
          rv <= (s_j < s_hi);
          rkey <= ff_rdata[{ping, 1'b0}]; rid <= ff_rdata[{ping, 1'b1}];
          state <= T_MERGE;
        end
        T_MERGE: begin
          if (s_k == s_hi) begin
            if (s_hi >= s_n) begin
              ping <= !ping;
              s_lo <= '0;
              s_w  <= s_w << 1;
              if ((s_w << 1) >= s_n) begin
                s_k  <= '0;
                cp_v <= 1'b0;
                state <= ping ? S_FLUSH : T_COPY;   // result in the cells just written
              end else begin
                state <= T_PAIR;
              end
            end else begin
              s_lo  <= s_hi;
              state <= T_PAIR;
            end
          end else begin
            s_k <= s_k + 10'd1;
            if (left_take) begin
              s_i <= s_i + 10'd1;
              state <= T_WL;
            end else begin
              s_j <= s_j + 10'd1;
              state <= T_WR;
            end
          end
        end
        T_WL: begin
          lv <= (s_i < s_mid);
          lkey <= ff_rdata[{ping, 1'b0}]; lid <= ff_rdata[{ping, 1'b1}];
          state <= T_MERGE;
        end
        T_WR: begin
          rv <= (s_j < s_hi);
          rkey <= ff_rdata[{ping, 1'b0}]; rid <= ff_rdata[{ping, 1'b1}];
          state <= T_MERGE;
        end
        T_COPY: begin
          cp_v <= (s_k < s_n);
          cp_k <= s_k;
          if (s_k < s_n) s_k <= s_k + 10'd1;
          if (!(s_k < s_n) && !cp_v) state <= S_FLUSH;
        end

        // ---------------- GEMM
        M_LOAD: if (in_word.valid) begin
          g_cnt <= g_cnt + 7'd1;
          if (g_cnt + 7'd1 == 7'(cfg.r2)) begin
            g_cnt <= '0; g_m <= '0; g_j <= '0; g_pv <= 1'b0; acc <= BF16_ZERO;
            state <= M_COMP;
          end
        end
        M_COMP: begin
          g_pv <= (g_j < g_kq);
          g_pj <= g_j;
          if (g_j < g_kq) g_j <= g_j + 5'd1;
          if (g_pv) acc <= alu_fout[0];
          if (g_j == g_kq && !g_pv) state <= M_OUT;
        end
        M_OUT: begin
          if (ps_wr_ready && !res_ready) stall_cycles <= stall_cycles + 32'd1;
          if (ps_wr_ready && res_ready) begin
            out_ptr <= out_ptr + 9'd1;
            acc <= BF16_ZERO; g_j <= '0; g_pv <= 1'b0;
            if (g_m + 16'd1 == cfg.r1) begin
              g_m <= '0;
              g_b <= g_b + 16'd1;
              state <= (g_b + 16'd1 == cfg.r4) ? S_FLUSH : M_LOAD;
            end else begin
              g_m <= g_m + 16'd1;
              state <= M_COMP;
            end
          end
        end

        S_FLUSH: if (ps_empty) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // GEMM input register buffer
  always_ff @(posedge clk) begin
    if (state == M_LOAD && in_word.valid) xbuf[g_cnt[5:0]] <= in_word.data;
  end

  // ------------------------------------------------------ grid pipeline
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gr_busy <= 1'b0; gr_a <= 1'b0; gr_b <= 1'b0; gr_last_b <= 1'b0;
      gr_k <= '0; gr_hit <= 1'b0; gr_hi <= 1'b0; gr_w <= '0;
      gr_acc0 <= '0; gr_acc1 <= '0; own <= '0; overrun <= '0;
      for (int d = 0; d < 3; d++) begin
        gr_cell[d] <= '0; gr_fr[d] <= '0; gr_omf[d] <= '0;
      end
    end else begin
      own.valid <= 1'b0;
      if (uop == OP_CGRID || uop == OP_DGRID) begin
        // accept a point
        if (pt.valid) begin
          if (gr_busy) begin
            overrun <= overrun + 16'd1;
          end else begin
            gr_busy <= 1'b1;
            gr_a    <= 1'b1;
            gr_k    <= '0;
            for (int d = 0; d < 3; d++) begin
              gr_cell[d] <= ppos[d][31:16];
              gr_fr[d]   <= ufix_to_bf16({16'd0, ppos[d][15:0]}, 16);
              gr_omf[d]  <= ufix_to_bf16(32'h0001_0000 - {16'd0, ppos[d][15:0]}, 16);
            end
          end
        end
        // stage A: index, read, weight
        if (gr_a) begin
          gr_hit <= (gidx[3:0] == my_col);
          gr_hi  <= gidx[13];
          gr_w   <= alu_fw;
          gr_k   <= gr_k + 3'd1;
          if (gr_k == gr_nc) gr_a <= 1'b0;
        end
        gr_b      <= gr_a;
        gr_last_b <= gr_a && (gr_k == gr_nc);
        // stage B: feature MACs
        if (gr_b) begin
          gr_acc0 <= alu_fout[0];
          gr_acc1 <= alu_fout[1];
        end
        if (gr_last_b) begin
          own.valid <= 1'b1;
          own.f0    <= alu_fout[0];
          own.f1    <= alu_fout[1];
          gr_acc0   <= BF16_ZERO;
          gr_acc1   <= BF16_ZERO;
          gr_busy   <= 1'b0;
        end
      end
    end
  end

  assign busy = (state != S_IDLE) || gr_busy;

endmodule

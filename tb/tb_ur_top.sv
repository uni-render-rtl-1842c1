// tb_ur_top: end-to-end test of the accelerator, here with 8 PE lines of 16
// PEs and smaller buffers to keep the build short (tb_ur_top_full runs the
// same sequence at the paper's full size).
//
// Everything goes through the host registers and the external-memory port,
// as a host SoC would do it. A behavioural external memory (random grant
// delay and read latency) holds the scene data. The test runs, in order:
//   1. sorting   : keys DMA'd external -> global buffer -> private buffer ->
//                  one PE, sorted there, DMA'd back and checked;
//   2. geometry  : triangles into one PE, rasterised, Z-buffer records
//                  DMA'd back and checked against a reference rasteriser;
//   3. combined grid (hash grid, one PE line, table spread over 16 PEs):
//                  points from the input buffer, interpolated features from
//                  the output buffer checked against a reference;
//   4. decomposed grid (tri-plane on three PE lines, aggregated by product);
//   5. GEMM      : a two-layer MLP in two columns (same weights), with output
//                  back-pressure from the collector serving two columns;
//   6. overflow  : all lines fed faster than the collector can drain;
//   7. overrun   : points faster than a PE can take them.
// Every mechanism is counted and reported: micro-operator runs, mode
// switches (re-configuration of the array for another micro-operator), DMA
// transfers, external-memory wait cycles, GEMM stall cycles, output
// overflows and point overruns. Each must have happened at least once.
module tb_ur_top;
  import ur_pkg::*;
  import tb_util_pkg::*;

  localparam int EXT_WORDS = 65536;
  localparam int NRT = 8;            // PE lines of the design under test

  logic clk = 1'b0, rst_n = 1'b0;
  logic host_we = 1'b0;
  logic [7:0] host_addr = '0;
  logic [15:0] host_wdata = '0, host_rdata;
  logic irq_done;
  logic ext_req, ext_we, ext_gnt, ext_rvalid;
  logic [31:0] ext_addr;
  logic [15:0] ext_wdata, ext_rdata;

  logic [15:0] ext [EXT_WORDS];

  int checks = 0, failures = 0;
  int n_runs = 0, n_switch = 0, n_dma = 0, n_ext_wait = 0;
  int n_stall = 0, n_overflow = 0, n_overrun = 0;

  ur_top #(.GLB_WORDS(16384), .IBUF_WORDS(4096), .PBUF_WORDS(8192), .OBUF_ENTRY(1024),
           .NR(NRT)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 12) $display("FAIL %s", what);
    end
  endtask

  initial begin
    #200000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------- external memory
  int gnt_wait = 0, rd_wait = -1;
  logic [15:0] rd_word = '0;
  initial begin ext_gnt = 1'b0; ext_rvalid = 1'b0; ext_rdata = '0; end
  always @(negedge clk) begin
    ext_gnt <= 1'b0;
    ext_rvalid <= 1'b0;
    if (rd_wait == 0) begin
      ext_rvalid <= 1'b1; ext_rdata <= rd_word; rd_wait = -1;
    end else if (rd_wait > 0) rd_wait--;
    if (ext_req && rd_wait < 0) begin
      if (gnt_wait == 0) begin
        ext_gnt <= 1'b1;
        if (ext_we) ext[ext_addr % EXT_WORDS] = ext_wdata;
        else begin rd_word = ext[ext_addr % EXT_WORDS]; rd_wait = $urandom_range(0, 2); end
        gnt_wait = $urandom_range(0, 2);
      end else begin
        gnt_wait--;
        n_ext_wait++;
      end
    end
  end

  // ------------------------------------------------------- host helpers
  task automatic hw(input logic [7:0] a, input logic [15:0] v);
    @(negedge clk); host_we = 1'b1; host_addr = a; host_wdata = v;
    @(negedge clk); host_we = 1'b0;
  endtask

  task automatic hr(input logic [7:0] a, output logic [15:0] v);
    @(negedge clk); host_addr = a; #1; v = host_rdata;
  endtask

  task automatic wait_done();
    int t;
    t = 0;
    while (!irq_done) begin @(negedge clk); t++; end
  endtask

  task automatic dma(input dma_space_e s, input int sa, input dma_space_e d, input int da, input int n);
    hw(8'h02, 16'(s)); hw(8'h03, sa[15:0]); hw(8'h04, sa[31:16]);
    hw(8'h05, 16'(d)); hw(8'h06, da[15:0]); hw(8'h07, da[31:16]);
    hw(8'h08, 16'(n));
    hw(8'h00, 16'h1);
    wait_done();
    n_dma++;
  endtask

  function automatic int pe_addr(input int r, input int c, input int cl, input int w);
    return (r << 16) | (c << 12) | (cl << 9) | w;
  endfunction

  // configure PEs selected by the masks
  task automatic pe_cfg(input logic [15:0] rm, input logic [15:0] cm, input int a, input logic [15:0] v);
    hw(8'h20, rm); hw(8'h21, cm); hw(8'h28 + 8'(a), v);
  endtask

  // mode switch: every PE back to idle, then the new micro-operator
  task automatic idle_all();
    pe_cfg(16'hFFFF, 16'hFFFF, 0, 16'(OP_IDLE));
    n_switch++;
  endtask

  task automatic run_op(input uop_e u, output int cyc);
    logic [15:0] lo, hi;
    hw(8'h10, 16'(u));
    hw(8'h00, 16'h2);
    wait_done();
    n_runs++;
    hr(8'h30, lo); hr(8'h31, hi);
    cyc = int'({hi, lo});
  endtask

  // ------------------------------------------------------------ 1. sort
  task automatic test_sort();
    int cyc;
    logic [15:0] pk;
    for (int i = 0; i < 64; i++) begin ext[16'h0000 + i] = 16'($urandom_range(0, 100)); ext[16'h0040 + i] = 16'(i); end
    dma(SP_EXT, 16'h0000, SP_GLB, 100, 128);
    dma(SP_GLB, 100, SP_PBUF, 2000, 128);
    dma(SP_PBUF, 2000, SP_PE, pe_addr(2, 5, 0, 0), 64);
    dma(SP_PBUF, 2064, SP_PE, pe_addr(2, 5, 1, 0), 64);
    idle_all();
    pe_cfg(16'h0004, 16'h0020, 0, 16'(OP_SORT));
    pe_cfg(16'h0004, 16'h0020, 1, 16'd64);
    run_op(OP_SORT, cyc);
    check(cyc > 6 * 64 && cyc < 6 * (3 * 64 + 8) + 20, $sformatf("sort cycles %0d", cyc));
    dma(SP_PE, pe_addr(2, 5, 0, 0), SP_EXT, 16'h8000, 64);
    dma(SP_PE, pe_addr(2, 5, 1, 0), SP_EXT, 16'h8040, 64);
    pk = '0;
    for (int i = 0; i < 64; i++) begin
      logic [15:0] k, id;
      k = ext[16'h8000 + i]; id = ext[16'h8040 + i];
      check(id < 64 && ext[id] == k, "sorted key keeps its id");
      check(k >= pk, "sorted ascending");
      pk = k;
    end
  endtask

  // -------------------------------------------------------- 2. geometry
  task automatic test_geometry();
    int xs [3][4], ys [3][4], zs [3][4];
    int cyc;
    for (int t = 0; t < 4; t++) begin
      for (int v = 0; v < 3; v++) begin
        xs[v][t] = $urandom_range(0, 12) - 2; ys[v][t] = $urandom_range(0, 12) - 2;
        zs[v][t] = $urandom_range(100, 50000);
      end
      ext[16'h0100 + 12*t + 0] = 16'(xs[0][t]); ext[16'h0100 + 12*t + 1] = 16'(xs[2][t]);
      ext[16'h0100 + 12*t + 2] = 16'(zs[2][t]);
      ext[16'h0100 + 12*t + 3] = 16'(ys[0][t]); ext[16'h0100 + 12*t + 4] = 16'(ys[2][t]);
      ext[16'h0100 + 12*t + 5] = 16'(500 + t);
      ext[16'h0100 + 12*t + 6] = 16'(xs[1][t]); ext[16'h0100 + 12*t + 7] = 16'(zs[0][t]);
      ext[16'h0100 + 12*t + 9] = 16'(ys[1][t]); ext[16'h0100 + 12*t + 10] = 16'(zs[1][t]);
    end
    // cl b, rows 3t..3t+2: ext layout is [t][cl][row]
    for (int b = 0; b < 4; b++)
      for (int t = 0; t < 4; t++)
        for (int rr = 0; rr < 3; rr++)
          ext[16'h0200 + 12*b + 3*t + rr] = ext[16'h0100 + 12*t + 3*b + rr];
    for (int b = 0; b < 4; b++) dma(SP_EXT, 16'h0200 + 12*b, SP_PE, pe_addr(7, 9, b, 0), 12);
    idle_all();
    pe_cfg(16'h0080, 16'h0200, 0, 16'(OP_GEOMETRY));
    pe_cfg(16'h0080, 16'h0200, 1, 16'd4);
    pe_cfg(16'h0080, 16'h0200, 3, 16'd1); pe_cfg(16'h0080, 16'h0200, 4, 16'd1);
    pe_cfg(16'h0080, 16'h0200, 5, 16'd6); pe_cfg(16'h0080, 16'h0200, 6, 16'd6);
    run_op(OP_GEOMETRY, cyc);
    check(cyc >= 36 * (6 * 4 + 6) && cyc <= 36 * (6 * 4 + 6) + 12, $sformatf("geometry cycles %0d", cyc));
    dma(SP_PE, pe_addr(7, 9, 4, 0), SP_EXT, 16'h8100, 144);
    for (int j = 0; j < 6; j++) for (int i = 0; i < 6; i++) begin
      int px, py, best;
      real bd;
      px = 1 + i; py = 1 + j; best = -1; bd = 0.0;
      for (int t = 0; t < 4; t++) begin
        longint ea, eb, ec, ar;
        real d;
        ea = longint'(xs[2][t]-xs[1][t]) * (py-ys[1][t]) - longint'(ys[2][t]-ys[1][t]) * (px-xs[1][t]);
        eb = longint'(xs[0][t]-xs[2][t]) * (py-ys[2][t]) - longint'(ys[0][t]-ys[2][t]) * (px-xs[2][t]);
        ec = longint'(xs[1][t]-xs[0][t]) * (py-ys[0][t]) - longint'(ys[1][t]-ys[0][t]) * (px-xs[0][t]);
        ar = ea + eb + ec;
        if (ar == 0) continue;
        if (ar < 0) begin ea = -ea; eb = -eb; ec = -ec; ar = -ar; end
        if (ea < 0 || eb < 0 || ec < 0) continue;
        d = (real'(ea) * zs[0][t] + real'(eb) * zs[1][t] + real'(ec) * zs[2][t]) / real'(ar);
        if (best < 0 || d < bd * (1.0 - 1.0e-12)) begin best = t; bd = d; end
      end
      check(ext[16'h8100 + 4 * (6 * j + i)] == ((best < 0) ? 16'hFFFF : 16'(500 + best)),
            $sformatf("z-buffer pixel (%0d,%0d)", px, py));
    end
  endtask

  // ------------------------------------------------- 3./4. grid helpers
  logic [15:0] feat [3][16][2][64];   // [line][col][feature][address]

  task automatic load_line(input int r, input int base);
    for (int c = 0; c < 16; c++)
      for (int f = 0; f < 2; f++) begin
        for (int a = 0; a < 64; a++) begin
          feat[r][c][f][a] = real_to_bf16(rand_real(-1.0, 1.0));
          ext[base + (c * 2 + f) * 64 + a] = feat[r][c][f][a];
        end
        dma(SP_EXT, base + (c * 2 + f) * 64, SP_PE, pe_addr(r, c, f, 0), 64);
      end
  endtask

  // interpolation of line r; d3: 3-D hash, else 2-D linear plane (a0, a1)
  function automatic void interp(input int r, input logic [15:0] crd [3], input bit d3,
                                 input int a0, input int a1, input int n,
                                 output real o0, output real o1, output real sc);
    int gc [3], ax [3], nd;
    real fr [3];
    ax[0] = d3 ? 0 : a0; ax[1] = d3 ? 1 : a1; ax[2] = 2; nd = d3 ? 3 : 2;
    o0 = 0.0; o1 = 0.0; sc = 0.0;
    for (int d = 0; d < 3; d++) begin
      longint p;
      p = longint'(crd[ax[d]]) * n;
      gc[d] = (d < nd) ? int'(p >> 16) : 0;
      fr[d] = real'(p & 64'hFFFF) / 65536.0;
    end
    for (int k = 0; k < (1 << nd); k++) begin
      longint idx, c [3];
      real w;
      int e;
      w = 1.0;
      for (int d = 0; d < 3; d++) begin
        c[d] = gc[d] + ((d < nd) ? ((k >> d) & 1) : 0);
        if (d < nd) w *= ((k >> d) & 1) ? fr[d] : (1.0 - fr[d]);
      end
      if (d3) idx = c[0] ^ (c[1] * 64'd2654435761) ^ (c[2] * 64'd805459861);
      else    idx = c[0] + (n + 1) * c[1] + (n + 1) * (n + 1) * c[2];
      e = int'(idx & 64'h3FF);
      o0 += w * bf16_to_real(feat[r][e & 15][0][e >> 4]);
      o1 += w * bf16_to_real(feat[r][e & 15][1][e >> 4]);
      sc += rabs(w * bf16_to_real(feat[r][e & 15][0][e >> 4]))
          + rabs(w * bf16_to_real(feat[r][e & 15][1][e >> 4]));
    end
  endfunction

  task automatic put_points(input int n);
    for (int p = 0; p < 3 * n; p++) ext[16'h2000 + p] = 16'($urandom);
    dma(SP_EXT, 16'h2000, SP_IBUF, 0, 3 * n);
  endtask

  task automatic run_grid(input uop_e u, input int n, input int per, input logic [15:0] rm, output int cyc);
    hw(8'h11, 16'd0); hw(8'h12, 16'(n)); hw(8'h13, 16'(per));
    hw(8'h14, rm); hw(8'h16, 16'd0);
    run_op(u, cyc);
  endtask

  // ------------------------------------------------------ 3. hash grid
  task automatic test_cgrid();
    int cyc;
    logic [15:0] w;
    load_line(0, 16'h1000);
    put_points(30);
    idle_all();
    pe_cfg(16'h0001, 16'hFFFF, 0, 16'(OP_CGRID) | 16'h18);   // hash, 3-D
    pe_cfg(16'h0001, 16'hFFFF, 2, 16'd200);
    pe_cfg(16'h0001, 16'hFFFF, 3, 16'd10);
    run_grid(OP_CGRID, 30, 12, 16'h0001, cyc);
    check(cyc >= 30 * 12 && cyc <= 30 * 12 + 120, $sformatf("grid run cycles %0d", cyc));
    hr(8'h32, w); check(w == 16'd30, $sformatf("cgrid entries %0d", w));
    dma(SP_OBUF, 0, SP_EXT, 16'h8000, 60);
    for (int p = 0; p < 30; p++) begin
      logic [15:0] c [3];
      real o0, o1, sc;
      for (int d = 0; d < 3; d++) c[d] = ext[16'h2000 + 3 * p + d];
      interp(0, c, 1'b1, 0, 1, 200, o0, o1, sc);
      check(near(bf16_to_real(ext[16'h8000 + 2 * p]), o0, sc, 0.06),
            $sformatf("hash point %0d f0 %f want %f", p, bf16_to_real(ext[16'h8000 + 2 * p]), o0));
      check(near(bf16_to_real(ext[16'h8000 + 2 * p + 1]), o1, sc, 0.06), "hash f1");
    end
  endtask

  // ------------------------------------------------------ 4. tri-plane
  task automatic test_dgrid();
    int cyc, axes [3][2];
    logic [15:0] w;
    axes = '{'{0, 1}, '{0, 2}, '{1, 2}};
    for (int r = 0; r < 3; r++) load_line(r, 16'h3000 + r * 2048);
    put_points(20);
    idle_all();
    for (int r = 0; r < 3; r++) begin
      pe_cfg(16'(1 << r), 16'hFFFF, 0, 16'(OP_DGRID) | 16'(axes[r][0] << 5) | 16'(axes[r][1] << 7));
      pe_cfg(16'(1 << r), 16'hFFFF, 2, 16'd20);
      pe_cfg(16'(1 << r), 16'hFFFF, 3, 16'd10);
    end
    hw(8'h17, 16'd3); hw(8'h18, 16'(AGG_MUL));
    run_grid(OP_DGRID, 20, 10, 16'h0007, cyc);
    hr(8'h32, w); check(w == 16'd20, $sformatf("dgrid entries %0d", w));
    dma(SP_OBUF, 0, SP_EXT, 16'h8000, 40);
    for (int p = 0; p < 20; p++) begin
      logic [15:0] c [3];
      real p0, p1, ps, o0, o1, sc;
      for (int d = 0; d < 3; d++) c[d] = ext[16'h2000 + 3 * p + d];
      p0 = 1.0; p1 = 1.0; ps = 1.0;
      for (int r = 0; r < 3; r++) begin
        interp(r, c, 1'b0, axes[r][0], axes[r][1], 20, o0, o1, sc);
        p0 *= o0; p1 *= o1; ps *= (sc + 0.01);
      end
      check(near(bf16_to_real(ext[16'h8000 + 2 * p]), p0, ps, 0.1),
            $sformatf("tri-plane point %0d f0 %f want %f", p, bf16_to_real(ext[16'h8000 + 2 * p]), p0));
      check(near(bf16_to_real(ext[16'h8000 + 2 * p + 1]), p1, ps, 0.1), "tri-plane f1");
    end
  endtask

  // ----------------------------------------------------------- 5. GEMM
  task automatic test_gemm();
    localparam int K0 = 16, M0 = 8, M1 = 4, NB = 3;
    real w0 [M0][K0], w1 [M1][M0], x [NB][K0];
    int cyc;
    logic [15:0] lo, hi, wr;
    for (int m = 0; m < M0; m++) for (int k = 0; k < K0; k++) begin
      logic [15:0] v;
      v = real_to_bf16(rand_real(-1.0, 1.0)); w0[m][k] = bf16_to_real(v);
      ext[16'h5000 + (k % 4) * 64 + m * (K0 / 4) + k / 4] = v;
    end
    for (int m = 0; m < M1; m++) for (int k = 0; k < M0; k++) begin
      logic [15:0] v;
      v = real_to_bf16(rand_real(-1.0, 1.0)); w1[m][k] = bf16_to_real(v);
      ext[16'h5100 + (k % 4) * 64 + m * (M0 / 4) + k / 4] = v;
    end
    for (int b = 0; b < NB; b++) for (int k = 0; k < K0; k++) begin
      logic [15:0] v;
      v = real_to_bf16(rand_real(-1.0, 1.0)); x[b][k] = bf16_to_real(v);
      ext[16'h5200 + b * K0 + k] = v;
    end
    for (int c = 0; c < 2; c++)
      for (int cl = 0; cl < 4; cl++) begin
        dma(SP_EXT, 16'h5000 + cl * 64, SP_PE, pe_addr(0, c, cl, 0), M0 * K0 / 4);
        dma(SP_EXT, 16'h5100 + cl * 64, SP_PE, pe_addr(1, c, cl, 0), M1 * M0 / 4);
      end
    dma(SP_EXT, 16'h5200, SP_IBUF, 0, NB * K0);
    idle_all();
    pe_cfg(16'h0001, 16'h0003, 0, 16'(OP_GEMM) | 16'h200);
    pe_cfg(16'h0001, 16'h0003, 1, 16'(M0)); pe_cfg(16'h0001, 16'h0003, 2, 16'(K0));
    pe_cfg(16'h0001, 16'h0003, 4, 16'(NB));
    pe_cfg(16'h0002, 16'h0003, 0, 16'(OP_GEMM));
    pe_cfg(16'h0002, 16'h0003, 1, 16'(M1)); pe_cfg(16'h0002, 16'h0003, 2, 16'(M0));
    pe_cfg(16'h0002, 16'h0003, 4, 16'(NB));
    hw(8'h11, 16'd0); hw(8'h12, 16'(NB * K0)); hw(8'h15, 16'h0003); hw(8'h16, 16'd0);
    hw(8'h19, 16'd1);
    run_op(OP_GEMM, cyc);
    hr(8'h32, wr); check(wr == 16'(2 * NB * M1), $sformatf("gemm entries %0d", wr));
    hr(8'h34, lo); hr(8'h35, hi);
    n_stall += int'({hi, lo});
    dma(SP_OBUF, 0, SP_EXT, 16'h8000, 4 * NB * M1);
    for (int o = 0; o < NB * M1; o++) begin
      real h [M0], want, sc;
      int b, m;
      b = o / M1; m = o % M1;
      for (int j = 0; j < M0; j++) begin
        h[j] = 0.0;
        for (int k = 0; k < K0; k++) h[j] += w0[j][k] * x[b][k];
        if (h[j] < 0.0) h[j] = 0.0;
      end
      want = 0.0; sc = 0.05;
      for (int j = 0; j < M0; j++) begin want += w1[m][j] * h[j]; sc += rabs(w1[m][j] * h[j]); end
      // the two columns compute the same MLP: entries come in equal pairs
      check(ext[16'h8000 + 4 * o] == ext[16'h8000 + 4 * o + 2], "both columns agree");
      check(near(bf16_to_real(ext[16'h8000 + 4 * o]), want, sc, 0.08),
            $sformatf("mlp output %0d %f want %f", o, bf16_to_real(ext[16'h8000 + 4 * o]), want));
    end
  endtask

  // ------------------------------------------------- 6./7. overflow etc.
  task automatic test_overflow();
    int cyc;
    logic [15:0] w, ov, st;
    idle_all();
    // every line interpolates one plane (4 corners, 6 cycles per point) and
    // is its own group: NRT entries per point, points 7 cycles apart
    pe_cfg(16'hFFFF, 16'hFFFF, 0, 16'(OP_DGRID) | 16'h80);
    pe_cfg(16'hFFFF, 16'hFFFF, 2, 16'd20);
    pe_cfg(16'hFFFF, 16'hFFFF, 3, 16'd10);
    hw(8'h17, 16'd1);
    put_points(8);
    run_grid(OP_DGRID, 8, 7, 16'((1 << NRT) - 1), cyc);
    hr(8'h32, w); hr(8'h33, ov);
    n_overflow += int'(ov);
    check(ov > 0, "overflow when sets arrive faster than they drain");
    check(int'(w) == NRT * (8 - int'(ov)), $sformatf("entries %0d with %0d sets dropped", w, ov));
    hr(8'h01, st); check(st[2], "status shows overflow");
    check(!st[3], "no overrun yet");
    idle_all();
    pe_cfg(16'h0001, 16'hFFFF, 0, 16'(OP_CGRID) | 16'h18);
    run_grid(OP_CGRID, 8, 4, 16'h0001, cyc);      // 3-D points need 10 cycles
    hr(8'h01, st);
    check(st[3], "status shows point overrun");
    if (st[3]) n_overrun++;
  endtask

  initial begin
    for (int a = 0; a < EXT_WORDS; a++) ext[a] = '0;
    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    test_sort();
    test_geometry();
    test_cgrid();
    test_dgrid();
    test_gemm();
    test_overflow();
    $display("mechanisms: runs=%0d mode_switches=%0d dma=%0d ext_wait=%0d gemm_stalls=%0d overflow=%0d overrun=%0d",
             n_runs, n_switch, n_dma, n_ext_wait, n_stall, n_overflow, n_overrun);
    check(n_runs >= 7 && n_switch >= 6 && n_dma > 0 && n_ext_wait > 0, "mechanisms exercised");
    check(n_stall > 0, "GEMM back-pressure seen");
    check(n_overflow > 0 && n_overrun > 0, "overflow and overrun seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_pe_array: self-checking test of the PE array and its networks at
// 3 rows x 16 columns.
//   * combined grid indexing along every line: the grid table is interleaved
//     over the 16 PEs of a line (entry e lives in column e mod 16); random
//     points enter the west edge and the sum leaving the east end of each
//     line must equal a reference trilinear (or hash-grid) interpolation
//     over all 8 corners, exactly 16 + 8 + 2 cycles after the point entered;
//   * GEMM down the columns: row 0 and row 1 hold two MLP layers with
//     different weights in every column, the output of row 1 leaves the
//     array; results are compared with a double-precision two-layer MLP
//     (ReLU after the first layer) while the column outputs are randomly
//     back-pressured; stall_total must count the held cycles;
//   * per-PE addressing: a sort run on one PE selected by the row/column
//     configuration masks must leave its neighbours' memories untouched.
module tb_pe_array;
  import ur_pkg::*;
  import tb_util_pkg::*;

  localparam int NR = 3, NC = 16;

  logic clk = 1'b0, rst_n = 1'b0;
  logic cfg_we = 1'b0;
  logic [NR-1:0] cfg_row_mask = '1;
  logic [NC-1:0] cfg_col_mask = '1;
  logic [2:0] cfg_addr = '0;
  logic [15:0] cfg_wdata = '0;
  logic start = 1'b0, busy, overrun_any;
  logic [31:0] stall_total;
  logic [3:0] gemm_last_row = 4'd1;
  logic ld_en = 1'b0, ld_we = 1'b0;
  logic [3:0] ld_row = '0, ld_col = '0;
  logic [2:0] ld_sel = '0;
  logic [SP_AW-1:0] ld_addr = '0;
  logic [15:0] ld_wdata = '0, ld_rdata;
  in_link_t row_in [NR];
  red_link_t row_red [NR];
  word_link_t col_in [NC], col_out [NC];
  logic col_in_ready [NC], col_out_ready [NC];

  int checks = 0, failures = 0;
  longint cycle = 0;
  logic [15:0] feat [NR][NC][2][64];   // [row][col][feature][address]

  pe_array #(.NR(NR), .NC(NC)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    #40000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cfg(input logic [NR-1:0] rm, input logic [NC-1:0] cm, input int a, input logic [15:0] v);
    @(negedge clk); cfg_row_mask = rm; cfg_col_mask = cm;
    cfg_we = 1'b1; cfg_addr = 3'(a); cfg_wdata = v;
    @(negedge clk); cfg_we = 1'b0;
  endtask

  task automatic ld_write(input int r, input int c, input int sel, input int a, input logic [15:0] v);
    @(negedge clk); ld_en = 1'b1; ld_we = 1'b1; ld_row = 4'(r); ld_col = 4'(c);
    ld_sel = 3'(sel); ld_addr = SP_AW'(a); ld_wdata = v;
    @(negedge clk); ld_en = 1'b0; ld_we = 1'b0;
  endtask

  task automatic ld_read(input int r, input int c, input int sel, input int a, output logic [15:0] v);
    @(negedge clk); ld_en = 1'b1; ld_we = 1'b0; ld_row = 4'(r); ld_col = 4'(c);
    ld_sel = 3'(sel); ld_addr = SP_AW'(a);
    @(negedge clk); ld_en = 1'b0;
    v = ld_rdata;
  endtask

  // reference: full interpolation of one point in line r (table of 2^10 entries)
  function automatic void grid_ref(input int r, input logic [15:0] crd [3], input bit hash,
                                   input int n, output real o0, output real o1, output real sc);
    int  gc [3];
    real fr [3];
    o0 = 0.0; o1 = 0.0; sc = 0.0;
    for (int d = 0; d < 3; d++) begin
      longint p;
      p = longint'(crd[d]) * n;
      gc[d] = int'(p >> 16);
      fr[d] = real'(p & 64'hFFFF) / 65536.0;
    end
    for (int k = 0; k < 8; k++) begin
      longint idx, c [3];
      real w;
      int e;
      w = 1.0;
      for (int d = 0; d < 3; d++) begin
        c[d] = gc[d] + ((k >> d) & 1);
        w *= ((k >> d) & 1) ? fr[d] : (1.0 - fr[d]);
      end
      if (hash) idx = c[0] ^ (c[1] * 64'd2654435761) ^ (c[2] * 64'd805459861);
      else      idx = c[0] + (n + 1) * c[1] + (n + 1) * (n + 1) * c[2];
      e = int'(idx & 64'h3FF);
      o0 += w * bf16_to_real(feat[r][e & 15][0][e >> 4]);
      o1 += w * bf16_to_real(feat[r][e & 15][1][e >> 4]);
      sc += rabs(w * bf16_to_real(feat[r][e & 15][0][e >> 4]))
          + rabs(w * bf16_to_real(feat[r][e & 15][1][e >> 4]));
    end
  endfunction

  task automatic test_grid(input bit hash, input int n, input int npts);
    logic [47:0] pts [NR][$];
    longint tin [$];
    int got;
    cfg('1, '1, 0, 16'(OP_CGRID) | 16'h10 | (hash ? 16'h8 : 16'h0));
    cfg('1, '1, 2, 16'(n));
    cfg('1, '1, 3, 16'd10);
    got = 0;
    fork
      begin
        for (int p = 0; p < npts; p++) begin
          @(negedge clk);
          for (int r = 0; r < NR; r++) begin
            logic [47:0] v;
            v = {16'($urandom), 16'($urandom), 16'($urandom)};
            row_in[r].valid = 1'b1; row_in[r].data = {16'd0, v};
            pts[r].push_back(v);
          end
          tin.push_back(cycle);
          @(negedge clk);
          for (int r = 0; r < NR; r++) row_in[r] = '0;
          repeat (8 + $urandom_range(0, 4)) @(negedge clk);
        end
      end
      begin
        while (got < npts) begin
          @(posedge clk); #1;
          if (row_red[0].valid) begin
            check(cycle - tin.pop_front() == longint'(NC + 8 + 2), "line latency");
            for (int r = 0; r < NR; r++) begin
              logic [47:0] v;
              logic [15:0] c [3];
              real o0, o1, sc;
              check(row_red[r].valid, "all lines in step");
              v = pts[r].pop_front();
              c[0] = v[15:0]; c[1] = v[31:16]; c[2] = v[47:32];
              grid_ref(r, c, hash, n, o0, o1, sc);
              check(near(bf16_to_real(row_red[r].f0), o0, sc, 0.06),
                    $sformatf("line %0d f0 %f want %f", r, bf16_to_real(row_red[r].f0), o0));
              check(near(bf16_to_real(row_red[r].f1), o1, sc, 0.06), "line f1");
            end
            got++;
          end
        end
      end
    join
    check(!overrun_any, "no overrun");
  endtask

  // two-layer MLP in every column: layer 0 (row 0) K0 -> M0 with ReLU,
  // layer 1 (row 1) M0 -> M1
  task automatic test_gemm(input int k0, input int m0, input int m1, input int nb);
    real w0 [NC][][], w1 [NC][][], x [NC][][];
    int outs [NC], stalls;
    for (int c = 0; c < NC; c++) begin
      w0[c] = new[m0]; w1[c] = new[m1]; x[c] = new[nb];
      for (int m = 0; m < m0; m++) begin
        w0[c][m] = new[k0];
        for (int k = 0; k < k0; k++) begin
          logic [15:0] v;
          v = real_to_bf16(rand_real(-1.0, 1.0)); w0[c][m][k] = bf16_to_real(v);
          ld_write(0, c, k % 4, m * (k0 / 4) + k / 4, v);
        end
      end
      for (int m = 0; m < m1; m++) begin
        w1[c][m] = new[m0];
        for (int k = 0; k < m0; k++) begin
          logic [15:0] v;
          v = real_to_bf16(rand_real(-1.0, 1.0)); w1[c][m][k] = bf16_to_real(v);
          ld_write(1, c, k % 4, m * (m0 / 4) + k / 4, v);
        end
      end
      for (int b = 0; b < nb; b++) begin
        x[c][b] = new[k0];
        for (int k = 0; k < k0; k++) x[c][b][k] = bf16_to_real(real_to_bf16(rand_real(-1.0, 1.0)));
      end
      outs[c] = 0;
    end
    cfg(3'b001, '1, 0, 16'(OP_GEMM) | 16'h200);
    cfg(3'b001, '1, 1, 16'(m0)); cfg(3'b001, '1, 2, 16'(k0)); cfg(3'b001, '1, 4, 16'(nb));
    cfg(3'b010, '1, 0, 16'(OP_GEMM));
    cfg(3'b010, '1, 1, 16'(m1)); cfg(3'b010, '1, 2, 16'(m0)); cfg(3'b010, '1, 4, 16'(nb));
    cfg(3'b100, '1, 0, 16'(OP_IDLE));
    @(negedge clk); start = 1'b1;
    @(negedge clk); start = 1'b0;
    stalls = 0;
    fork
      for (int c0 = 0; c0 < NC; c0++) begin
        automatic int c = c0;
        fork
          begin
            for (int b = 0; b < nb; b++)
              for (int k = 0; k < k0; k++) begin
                col_in[c].valid = 1'b1;
                col_in[c].data = real_to_bf16(x[c][b][k]);
                #1;
                while (!col_in_ready[c]) begin @(negedge clk); #1; end
                @(negedge clk);
                col_in[c].valid = 1'b0;
              end
          end
        join_none
      end
      begin
        @(negedge clk);
        while (busy) begin
          for (int c = 0; c < NC; c++) col_out_ready[c] = ($urandom_range(0, 3) != 0);
          #1;
          for (int c = 0; c < NC; c++) begin
            if (col_out[c].valid && !col_out_ready[c]) stalls++;
            if (col_out[c].valid && col_out_ready[c]) begin
              real h [], want, sc;
              int b, m;
              b = outs[c] / m1; m = outs[c] % m1;
              h = new[m0];
              for (int j = 0; j < m0; j++) begin
                h[j] = 0.0;
                for (int k = 0; k < k0; k++) h[j] += w0[c][j][k] * x[c][b][k];
                if (h[j] < 0.0) h[j] = 0.0;
              end
              want = 0.0; sc = 0.0;
              for (int j = 0; j < m0; j++) begin want += w1[c][m][j] * h[j]; sc += rabs(w1[c][m][j] * h[j]); end
              check(near(bf16_to_real(col_out[c].data), want, sc + 0.05, 0.08),
                    $sformatf("mlp col %0d b%0d m%0d %f want %f", c, b, m, bf16_to_real(col_out[c].data), want));
              outs[c]++;
            end
          end
          @(negedge clk);
        end
      end
    join
    for (int c = 0; c < NC; c++) begin
      col_out_ready[c] = 1'b1;
      check(outs[c] == m1 * nb, $sformatf("column %0d outputs %0d", c, outs[c]));
    end
    // stall_total also counts first-layer PEs held by a busy second layer
    check(int'(stall_total) >= stalls, $sformatf("stall_total %0d vs %0d", stall_total, stalls));
    check(stalls > 0, "back-pressure exercised");
  endtask

  task automatic test_single_sort();
    logic [15:0] keys [64], v, pv;
    // marker in the neighbours
    ld_write(1, 4, 0, 0, 16'hBEEF);
    ld_write(2, 3, 0, 0, 16'hCAFE);
    for (int i = 0; i < 64; i++) begin
      keys[i] = 16'($urandom);
      ld_write(1, 3, 0, i, keys[i]);
      ld_write(1, 3, 1, i, 16'(i));
    end
    cfg('1, '1, 0, 16'(OP_IDLE));
    cfg(3'b010, 16'h0008, 0, 16'(OP_SORT));
    cfg(3'b010, 16'h0008, 1, 16'd64);
    @(negedge clk); start = 1'b1;
    @(negedge clk); start = 1'b0;
    @(negedge clk);
    check(busy, "sort running");
    while (busy) @(negedge clk);
    pv = '0;
    for (int i = 0; i < 64; i++) begin
      ld_read(1, 3, 0, i, v);
      check(v >= pv, "sorted on the selected PE");
      pv = v;
    end
    ld_read(1, 4, 0, 0, v); check(v == 16'hBEEF, "east neighbour untouched");
    ld_read(2, 3, 0, 0, v); check(v == 16'hCAFE, "south neighbour untouched");
  endtask

  initial begin
    for (int r = 0; r < NR; r++) row_in[r] = '0;
    for (int c = 0; c < NC; c++) begin col_in[c] = '0; col_out_ready[c] = 1'b1; end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // interleaved tables: 64 addresses of cells 0/1 in every PE
    for (int r = 0; r < NR; r++)
      for (int c = 0; c < NC; c++)
        for (int a = 0; a < 64; a++)
          for (int f = 0; f < 2; f++) begin
            feat[r][c][f][a] = real_to_bf16(rand_real(-1.0, 1.0));
            ld_write(r, c, f, a, feat[r][c][f][a]);
          end
    test_grid(1'b0, 9, 60);      // dense grid, W = 10, 1000 entries
    test_grid(1'b1, 200, 60);    // hash grid, 2^10 entries
    test_gemm(16, 8, 4, 2);
    test_single_sort();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

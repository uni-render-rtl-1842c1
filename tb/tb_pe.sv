// tb_pe: self-checking test of one PE in its streaming micro-operators.
//   * grid indexing (3-D linear grid, 3-D hash grid, 2-D plane): random
//     points arrive on the west input; the PE's partial result on the
//     reduction output is compared with a reference interpolation computed
//     here over the corners whose table entry this PE owns (entry index
//     modulo 16 equals the PE's column), and its latency must be exactly
//     corners + 3 cycles; points sent too close together must be counted as
//     overruns;
//   * GEMM: a random layer (M outputs, K inputs, B input vectors) with random
//     gaps on the input stream and random back-pressure from below; every
//     output (with and without ReLU) is compared with a double-precision
//     dot product, in the stream and in the PS scratch pad, the stall counter
//     with the cycles the output was held, and the run time with the PE's
//     cost of K/4 + 3 cycles per output when nothing stalls.
module tb_pe;
  import ur_pkg::*;
  import tb_util_pkg::*;

  localparam logic [3:0] MYCOL = 4'd5;

  logic clk = 1'b0, rst_n = 1'b0;
  logic cfg_we = 1'b0;
  logic [2:0] cfg_addr = '0;
  logic [15:0] cfg_wdata = '0;
  logic start = 1'b0, busy;
  logic [15:0] overrun;
  logic [31:0] stall_cycles;
  logic ld_en = 1'b0, ld_we = 1'b0;
  logic [2:0] ld_sel = '0;
  logic [SP_AW-1:0] ld_addr = '0;
  logic [15:0] ld_wdata = '0, ld_rdata;
  in_link_t west_in = '0, east_out;
  word_link_t north_in = '0, south_out;
  logic north_ready, south_ready = 1'b1;
  red_link_t red_west = '0, red_east;

  int checks = 0, failures = 0;
  longint cycle = 0;
  logic [15:0] feat [4][SP_DEPTH];

  pe dut (.clk, .rst_n, .col_id(MYCOL), .first_col(1'b1), .cfg_we, .cfg_addr, .cfg_wdata,
          .start, .busy, .overrun, .stall_cycles, .ld_en, .ld_we, .ld_sel, .ld_addr,
          .ld_wdata, .ld_rdata, .west_in, .east_out, .north_in, .north_ready, .south_out,
          .south_ready, .red_west, .red_east);

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
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cfg(input int a, input logic [15:0] v);
    @(negedge clk); cfg_we = 1'b1; cfg_addr = 3'(a); cfg_wdata = v;
    @(negedge clk); cfg_we = 1'b0;
  endtask

  task automatic ld_write(input int sel, input int a, input logic [15:0] v);
    @(negedge clk); ld_en = 1'b1; ld_we = 1'b1; ld_sel = 3'(sel); ld_addr = SP_AW'(a); ld_wdata = v;
    @(negedge clk); ld_en = 1'b0; ld_we = 1'b0;
  endtask

  task automatic ld_read(input int sel, input int a, output logic [15:0] v);
    @(negedge clk); ld_en = 1'b1; ld_we = 1'b0; ld_sel = 3'(sel); ld_addr = SP_AW'(a);
    @(negedge clk); ld_en = 1'b0;
    v = ld_rdata;
  endtask

  // --------------------------------------------------------------- grid
  // reference: this PE's share of the interpolated features of one point
  function automatic void grid_ref(input logic [15:0] crd [3], input bit hash, input bit d3,
                                   input int a0, input int a1, input int n, input int tbits,
                                   output real r0, output real r1, output real scale);
    int  gcell [3];
    real fr [3];
    int  axes [3];
    int  nd;
    axes[0] = d3 ? 0 : a0; axes[1] = d3 ? 1 : a1; axes[2] = 2;
    nd = d3 ? 3 : 2;
    for (int d = 0; d < 3; d++) begin
      longint p;
      p = longint'(crd[axes[d]]) * n;
      gcell[d] = int'(p >> 16);
      fr[d]   = real'(p & 64'hFFFF) / 65536.0;
    end
    if (!d3) begin gcell[2] = 0; fr[2] = 0.0; end
    r0 = 0.0; r1 = 0.0; scale = 0.0;
    for (int k = 0; k < (1 << nd); k++) begin
      longint idx, c [3];
      real w;
      int e;
      w = 1.0;
      for (int d = 0; d < 3; d++) begin
        c[d] = gcell[d] + ((d < nd) ? ((k >> d) & 1) : 0);
        if (d < nd) w *= ((k >> d) & 1) ? fr[d] : (1.0 - fr[d]);
      end
      if (hash) idx = (c[0] * 1) ^ (c[1] * 64'd2654435761) ^ (c[2] * 64'd805459861);
      else      idx = c[0] + (n + 1) * c[1] + (n + 1) * (n + 1) * c[2];
      e = int'(idx & ((64'd1 << tbits) - 1));
      if ((e & 15) == int'(MYCOL)) begin
        int hi, ad;
        hi = (e >> 13) & 1; ad = (e >> 4) & 511;
        r0 += w * bf16_to_real(feat[2*hi][ad]);
        r1 += w * bf16_to_real(feat[2*hi+1][ad]);
        scale += rabs(w * bf16_to_real(feat[2*hi][ad])) + rabs(w * bf16_to_real(feat[2*hi+1][ad]));
      end
    end
  endfunction

  task automatic test_grid(input bit hash, input bit d3, input int a0, input int a1,
                           input int n, input int tbits, input int npts);
    logic [47:0] pts [$];
    longint t_in [$];
    int ncorner, gap, got_n;
    ncorner = d3 ? 8 : 4;
    cfg(0, 16'(d3 ? OP_CGRID : OP_DGRID) | (hash ? 16'h8 : 16'h0) | (d3 ? 16'h10 : 16'h0)
           | 16'(a0 << 5) | 16'(a1 << 7));
    cfg(2, 16'(n)); cfg(3, 16'(tbits));
    got_n = 0;
    fork
      begin
        for (int p = 0; p < npts; p++) begin
          logic [15:0] c [3];
          @(negedge clk);
          for (int d = 0; d < 3; d++) c[d] = 16'($urandom);
          west_in.valid = 1'b1;
          west_in.data = {16'd0, c[2], c[1], c[0]};
          pts.push_back({c[2], c[1], c[0]}); t_in.push_back(cycle);
          @(negedge clk); west_in = '0;
          gap = ncorner + 2 + $urandom_range(0, 3);
          repeat (gap - 2) @(negedge clk);
        end
      end
      begin
        while (got_n < npts) begin
          @(posedge clk); #1;
          if (red_east.valid) begin
            real r0, r1, sc;
            logic [15:0] c [3];
            logic [47:0] pk;
            pk = pts.pop_front();
            c[0] = pk[15:0]; c[1] = pk[31:16]; c[2] = pk[47:32];
            grid_ref(c, hash, d3, a0, a1, n, tbits, r0, r1, sc);
            check(cycle - t_in.pop_front() == longint'(ncorner + 3), "grid latency");
            check(near(bf16_to_real(red_east.f0), r0, sc, 0.05),
                  $sformatf("grid f0 %f want %f", bf16_to_real(red_east.f0), r0));
            check(near(bf16_to_real(red_east.f1), r1, sc, 0.05), "grid f1");
            got_n++;
          end
        end
      end
    join
    check(overrun == 16'd0, "no overrun at legal spacing");
  endtask

  // --------------------------------------------------------------- GEMM
  task automatic test_gemm(input int m_n, input int k_n, input int b_n, input bit relu,
                           input bit gaps);
    real w [][], x [][];
    int cyc, outs, stalls_seen, want_cyc;
    w = new[m_n]; x = new[b_n];
    for (int m = 0; m < m_n; m++) begin
      w[m] = new[k_n];
      for (int k = 0; k < k_n; k++) begin
        logic [15:0] v;
        v = real_to_bf16(rand_real(-1.0, 1.0));
        w[m][k] = bf16_to_real(v);
        ld_write(k % 4, m * (k_n / 4) + k / 4, v);
      end
    end
    for (int b = 0; b < b_n; b++) begin
      x[b] = new[k_n];
      for (int k = 0; k < k_n; k++) x[b][k] = bf16_to_real(real_to_bf16(rand_real(-1.0, 1.0)));
    end
    cfg(0, 16'(OP_GEMM) | (relu ? 16'h200 : 16'h0));
    cfg(1, 16'(m_n)); cfg(2, 16'(k_n)); cfg(4, 16'(b_n));
    @(negedge clk); start = 1'b1;
    @(negedge clk); start = 1'b0;
    outs = 0; stalls_seen = 0; cyc = 1;
    fork
      begin   // input stream
        for (int b = 0; b < b_n; b++)
          for (int k = 0; k < k_n; k++) begin
            // drive at the falling edge; ready is stable until the rising edge
            if (gaps && $urandom_range(0, 3) == 0) begin
              north_in.valid = 1'b0;
              @(negedge clk);
            end
            north_in.valid = 1'b1;
            north_in.data = real_to_bf16(x[b][k]);
            #1;
            while (!north_ready) begin @(negedge clk); #1; end
            @(negedge clk);
            north_in.valid = 1'b0;
          end
      end
      begin   // output side
        while (busy) begin
          south_ready = gaps ? ($urandom_range(0, 2) != 0) : 1'b1;
          #1;
          if (south_out.valid && !south_ready) stalls_seen++;
          if (south_out.valid && south_ready) begin
            real want, sc;
            int b, m;
            b = outs / m_n; m = outs % m_n;
            want = 0.0; sc = 0.0;
            for (int k = 0; k < k_n; k++) begin
              want += w[m][k] * x[b][k]; sc += rabs(w[m][k] * x[b][k]);
            end
            if (relu && want < 0.0) want = 0.0;
            check(near(bf16_to_real(south_out.data), want, sc, 0.05),
                  $sformatf("gemm b%0d m%0d %f want %f", b, m, bf16_to_real(south_out.data), want));
            if (relu) check(!south_out.data[15] || south_out.data[14:0] == 15'd0, "relu sign");
            outs++;
          end
          @(negedge clk);
          cyc++;
        end
      end
    join
    south_ready = 1'b1;
    check(outs == m_n * b_n, "all gemm outputs");
    check(int'(stall_cycles) == stalls_seen, $sformatf("stall count %0d vs %0d", stall_cycles, stalls_seen));
    want_cyc = b_n * (k_n + m_n * (k_n / 4 + 3));
    if (!gaps) check(cyc >= want_cyc && cyc <= want_cyc + 6,
                     $sformatf("gemm cycles %0d expected %0d", cyc, want_cyc));
    else check(stalls_seen > 0, "back-pressure exercised");
    // PS scratch pad holds the same outputs in order
    for (int o = 0; o < m_n * b_n; o += 7) begin
      logic [15:0] v;
      real want, sc;
      int b, m;
      b = o / m_n; m = o % m_n;
      want = 0.0; sc = 0.0;
      for (int k = 0; k < k_n; k++) begin want += w[m][k] * x[b][k]; sc += rabs(w[m][k] * x[b][k]); end
      if (relu && want < 0.0) want = 0.0;
      ld_read(4, o, v);
      check(near(bf16_to_real(v), want, sc, 0.05), "gemm PS copy");
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // feature table: random BF16 in every cell
    for (int b = 0; b < 4; b++)
      for (int a = 0; a < int'(SP_DEPTH); a++) begin
        feat[b][a] = real_to_bf16(rand_real(-1.0, 1.0));
        ld_write(b, a, feat[b][a]);
      end
    test_grid(1'b0, 1'b1, 0, 1, 20, 14, 150);     // dense 3-D grid, W = 21
    test_grid(1'b1, 1'b1, 0, 1, 300, 14, 150);    // hash grid, 2^14 entries
    test_grid(1'b1, 1'b1, 0, 1, 64, 11, 100);     // hash grid, 2^11 entries
    test_grid(1'b0, 1'b0, 0, 2, 100, 14, 150);    // x-z plane, W = 101
    // overrun: points two cycles apart
    begin
      logic [15:0] ovr0;
      ovr0 = overrun;
      for (int p = 0; p < 4; p++) begin
        @(negedge clk); west_in.valid = 1'b1; west_in.data = 64'($urandom);
        @(negedge clk); west_in = '0;
      end
      repeat (20) @(negedge clk);
      check(overrun > ovr0, "overrun counted");
    end
    // GEMM
    for (int b = 0; b < 4; b++)
      for (int a = 0; a < int'(SP_DEPTH); a++) feat[b][a] = '0;
    test_gemm(8, 16, 3, 1'b0, 1'b0);
    test_gemm(10, 64, 2, 1'b1, 1'b1);
    test_gemm(32, 32, 4, 1'b0, 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_pe_controller: self-checking test of the PE controller's sequenced
// micro-operators, run inside one PE (controller, scratch pads and ALU):
//   * geometric processing: random triangles over a pixel rectangle; the
//     Z-buffer records in the PS scratch pad are compared with a reference
//     rasteriser written here (edge functions, nearest depth), and the run
//     time with the controller's cost of 6 cycles per triangle per pixel
//     plus 6 cycles per pixel;
//   * sorting: random keys with duplicates, several lengths; the result must
//     be ascending and stable, and take at most three cycles per element per
//     merge pass.
module tb_pe_controller;
  import ur_pkg::*;
  import tb_util_pkg::*;

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

  pe dut (.clk, .rst_n, .col_id(4'd0), .first_col(1'b1), .cfg_we, .cfg_addr, .cfg_wdata,
          .start, .busy, .overrun, .stall_cycles, .ld_en, .ld_we, .ld_sel, .ld_addr,
          .ld_wdata, .ld_rdata, .west_in, .east_out, .north_in, .north_ready, .south_out,
          .south_ready, .red_west, .red_east);

  always #5 clk = ~clk;

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

  // start and wait for completion; returns the cycles busy was high
  task automatic run(output int cyc);
    @(negedge clk); start = 1'b1;
    @(negedge clk); start = 1'b0;
    cyc = 1;
    while (busy) begin @(negedge clk); cyc++; end
  endtask

  // ------------------------------------------------------------ geometry
  task automatic test_geometry(input int ntri, input int x0, input int y0, input int w, input int h);
    int xs [3][], ys [3][];
    int zs [3][];
    int cyc, want_cyc;
    for (int v = 0; v < 3; v++) begin xs[v] = new[ntri]; ys[v] = new[ntri]; zs[v] = new[ntri]; end
    for (int t = 0; t < ntri; t++) begin
      for (int v = 0; v < 3; v++) begin
        xs[v][t] = $urandom_range(0, 24) - 4;
        ys[v][t] = $urandom_range(0, 24) - 4;
        zs[v][t] = $urandom_range(100, 60000);
      end
      ld_write(0, 3*t, 16'(xs[0][t])); ld_write(1, 3*t, 16'(ys[0][t]));
      ld_write(2, 3*t, 16'(xs[1][t])); ld_write(3, 3*t, 16'(ys[1][t]));
      ld_write(0, 3*t+1, 16'(xs[2][t])); ld_write(1, 3*t+1, 16'(ys[2][t]));
      ld_write(2, 3*t+1, 16'(zs[0][t])); ld_write(3, 3*t+1, 16'(zs[1][t]));
      ld_write(0, 3*t+2, 16'(zs[2][t])); ld_write(1, 3*t+2, 16'(t + 1000));
    end
    cfg(0, 16'(OP_GEOMETRY)); cfg(1, 16'(ntri));
    cfg(3, 16'(x0)); cfg(4, 16'(y0)); cfg(5, 16'(w)); cfg(6, 16'(h));
    run(cyc);
    want_cyc = w * h * (6 * ntri + 6);
    check(cyc >= want_cyc && cyc <= want_cyc + 8,
          $sformatf("geometry cycles %0d, expected about %0d", cyc, want_cyc));
    for (int j = 0; j < h; j++) for (int i = 0; i < w; i++) begin
      int px, py, best;
      real bd, bw [3];
      logic [15:0] got [4];
      px = x0 + i; py = y0 + j; best = -1; bd = 0.0;
      for (int t = 0; t < ntri; t++) begin
        longint ea, eb, ec, ar;
        real d;
        // weight of A: edge B->C, of B: edge C->A, of C: edge A->B
        ea = longint'(xs[2][t]-xs[1][t]) * (py-ys[1][t]) - longint'(ys[2][t]-ys[1][t]) * (px-xs[1][t]);
        eb = longint'(xs[0][t]-xs[2][t]) * (py-ys[2][t]) - longint'(ys[0][t]-ys[2][t]) * (px-xs[2][t]);
        ec = longint'(xs[1][t]-xs[0][t]) * (py-ys[0][t]) - longint'(ys[1][t]-ys[0][t]) * (px-xs[0][t]);
        ar = ea + eb + ec;
        if (ar == 0) continue;
        if (ar < 0) begin ea = -ea; eb = -eb; ec = -ec; ar = -ar; end
        if (ea < 0 || eb < 0 || ec < 0) continue;
        d = (real'(ea) * zs[0][t] + real'(eb) * zs[1][t] + real'(ec) * zs[2][t]) / real'(ar);
        if (best < 0 || d < bd * (1.0 - 1.0e-12)) begin
          best = t; bd = d; bw[0] = real'(ea); bw[1] = real'(eb); bw[2] = real'(ec);
        end
      end
      for (int k = 0; k < 4; k++) ld_read(4, 4 * (j * w + i) + k, got[k]);
      if (best < 0) begin
        check(got[0] == 16'hFFFF, $sformatf("pixel (%0d,%0d) empty", px, py));
      end else begin
        check(got[0] == 16'(best + 1000), $sformatf("pixel (%0d,%0d) id %0d want %0d", px, py, got[0], best + 1000));
        for (int k = 0; k < 3; k++)
          check(near(bf16_to_real(got[k+1]), bw[k], bw[k], 0.01), "barycentric weight");
      end
    end
  endtask

  // ------------------------------------------------------------- sorting
  task automatic test_sort(input int n);
    logic [15:0] keys [];
    logic [15:0] gk, gi, pk, pi;
    int cyc, passes, bound;
    keys = new[n];
    for (int i = 0; i < n; i++) begin
      keys[i] = 16'($urandom_range(0, 3 * n));   // duplicates likely
      ld_write(0, i, keys[i]);
      ld_write(1, i, 16'(i));
    end
    cfg(0, 16'(OP_SORT)); cfg(1, 16'(n));
    run(cyc);
    passes = 0;
    for (int wdt = 1; wdt < n; wdt *= 2) passes++;
    bound = passes * (3 * n + 8) + ((passes % 2) ? (n + 8) : 0) + 10;
    check(cyc <= bound, $sformatf("sort %0d cycles %0d above %0d", n, cyc, bound));
    check(cyc >= passes * n, $sformatf("sort %0d cycles %0d too few", n, cyc));
    pk = '0; pi = '0;
    for (int i = 0; i < n; i++) begin
      ld_read(0, i, gk);
      ld_read(1, i, gi);
      check(gi < 16'(n) && gk == keys[gi], "key travels with its id");
      if (i > 0) begin
        check(pk <= gk, $sformatf("ascending at %0d", i));
        if (pk == gk) check(pi < gi, "stable");
      end
      pk = gk; pi = gi;
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    test_geometry(6, 2, 3, 8, 6);
    test_geometry(12, -1, 0, 12, 10);
    test_geometry(1, 0, 0, 4, 4);
    test_sort(37);
    test_sort(256);
    test_sort(100);
    test_sort(512);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

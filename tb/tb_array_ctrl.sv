// tb_array_ctrl: self-checking test of the run controller.
// A behavioural input buffer (one-cycle read latency) holds random words.
//   * grid runs: every point must leave on exactly the lines of row_mask,
//     carry the three buffer words in order, and follow the previous point
//     after exactly max(period, 4) cycles; the run must not end before the
//     output collector reports idle;
//   * GEMM runs with random column readiness: the words must arrive in order,
//     each on all columns of col_mask in the same cycle, only when all those
//     columns are ready, and nowhere else;
//   * geometry / sort: one start pulse, and busy until the array is idle.
module tb_array_ctrl;
  import ur_pkg::*;

  localparam int NR = 4, NC = 4, IAW = 10;

  logic clk = 1'b0, rst_n = 1'b0;
  logic go = 1'b0;
  uop_e uop = OP_IDLE;
  logic [IAW-1:0] ibuf_base = '0;
  logic [15:0] count = '0;
  logic [7:0] period = 8'd4;
  logic [NR-1:0] row_mask = '1;
  logic [NC-1:0] col_mask = '1;
  logic busy;
  logic [31:0] cycles;
  logic pe_start, array_busy = 1'b0;
  in_link_t row_in [NR];
  word_link_t col_in [NC];
  logic col_in_ready [NC];
  logic coll_clear, coll_idle = 1'b1;
  logic ib_en;
  logic [IAW-1:0] ib_addr;
  logic [15:0] ib_rdata;
  logic [15:0] ibuf [1 << IAW];

  int checks = 0, failures = 0;

  array_ctrl #(.NR(NR), .NC(NC), .IAW(IAW)) dut (.*);

  always #5 clk = ~clk;
  always_ff @(posedge clk) if (ib_en) ib_rdata <= ibuf[ib_addr];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic launch(input uop_e u, input int base, input int n);
    @(negedge clk);
    uop = u; ibuf_base = IAW'(base); count = 16'(n); go = 1'b1;
    #1;
    check(coll_clear, "collector cleared at go");
    @(negedge clk); go = 1'b0;
  endtask

  task automatic test_grid(input int base, input int n, input int per, input logic [NR-1:0] rm);
    int seen, last_t, t;
    period = 8'(per); row_mask = rm;
    launch(OP_CGRID, base, n);
    seen = 0; last_t = -1; t = 0;
    while (busy) begin
      #1;
      if (row_in[0].valid || row_in[1].valid || row_in[2].valid || row_in[3].valid) begin
        logic [47:0] want;
        want = {ibuf[base + 3*seen + 2], ibuf[base + 3*seen + 1], ibuf[base + 3*seen]};
        for (int r = 0; r < NR; r++) begin
          check(row_in[r].valid == rm[r], "point on masked lines only");
          if (rm[r]) check(row_in[r].data[47:0] == want, $sformatf("point %0d data", seen));
        end
        if (last_t >= 0) check(t - last_t == ((per > 4) ? per : 4),
                               $sformatf("spacing %0d for period %0d", t - last_t, per));
        last_t = t;
        seen++;
        if (seen == n) coll_idle = 1'b0;      // collector still writing
      end
      if (seen == n && t == last_t + 80) coll_idle = 1'b1;
      @(negedge clk);
      t++;
    end
    check(seen == n, $sformatf("grid points %0d of %0d", seen, n));
    check(t >= last_t + 80, "run held until the collector is idle");
    check(int'(cycles) >= t - 1, "cycle counter");
  endtask

  task automatic test_gemm(input int base, input int n, input logic [NC-1:0] cm);
    int seen;
    col_mask = cm;
    array_busy = 1'b1;
    launch(OP_GEMM, base, n);
    seen = 0;
    while (seen < n) begin
      bit all;
      for (int c = 0; c < NC; c++) col_in_ready[c] = ($urandom_range(0, 2) != 0);
      #1;
      all = 1'b1;
      for (int c = 0; c < NC; c++) if (cm[c] && !col_in_ready[c]) all = 1'b0;
      if (col_in[0].valid || col_in[1].valid || col_in[2].valid || col_in[3].valid) begin
        check(all, "word only when all columns ready");
        for (int c = 0; c < NC; c++) begin
          check(col_in[c].valid == cm[c], "word on masked columns only");
          if (cm[c]) check(col_in[c].data == ibuf[base + seen], $sformatf("word %0d", seen));
        end
        seen++;
      end
      @(negedge clk);
    end
    repeat (10) begin
      #1;
      check(!(col_in[0].valid || col_in[1].valid || col_in[2].valid || col_in[3].valid), "no extra words");
      @(negedge clk);
    end
    check(busy, "busy while the array works");
    array_busy = 1'b0;
    repeat (3) @(negedge clk);
    check(!busy, "run ends when the array is idle");
  endtask

  task automatic test_start(input uop_e u);
    int pulses;
    array_busy = 1'b0;
    launch(u, 0, 0);
    pulses = 0;
    // array picks up the start
    #1; if (pe_start) pulses++;
    @(negedge clk); array_busy = 1'b1; #1; if (pe_start) pulses++;
    repeat (30) begin @(negedge clk); #1; if (pe_start) pulses++; check(busy, "waits for the array"); end
    check(pulses == 1, "one start pulse");
    array_busy = 1'b0;
    repeat (2) @(negedge clk);
    check(!busy, "idle after the array");
  endtask

  initial begin
    for (int a = 0; a < (1 << IAW); a++) ibuf[a] = 16'($urandom);
    for (int c = 0; c < NC; c++) col_in_ready[c] = 1'b1;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    test_grid(10, 20, 4, 4'b1111);
    test_grid(100, 15, 12, 4'b0101);
    test_grid(300, 10, 2, 4'b1000);
    test_gemm(500, 100, 4'b1111);
    test_gemm(700, 60, 4'b0110);
    test_start(OP_GEOMETRY);
    test_start(OP_SORT);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

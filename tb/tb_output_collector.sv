// tb_output_collector: self-checking test of the output data path.
// Grid phase: sets of group results arrive at random spacing; the test keeps
// a reference queue of the entries that must be written (lowest group first,
// one per cycle) and counts the sets that arrive while a previous set is
// still draining, which must be dropped and counted as overflow.
// GEMM phase: random column outputs with valid/ready; every word offered must
// be written exactly once, with round-robin fairness (no column waits more
// than NC grants).
module tb_output_collector;
  import ur_pkg::*;

  localparam int NR = 4, NC = 4, AW = 10;

  logic clk = 1'b0, rst_n = 1'b0;
  logic clear = 1'b0, gemm_mode = 1'b0;
  logic [AW-1:0] base = '0;
  red_link_t grp_in [NR];
  word_link_t col_out [NC];
  logic col_ready [NC];
  logic ob_we;
  logic [AW-1:0] ob_addr;
  logic [31:0] ob_wdata;
  logic idle;
  logic [15:0] written, overflow;

  int checks = 0, failures = 0;
  logic [31:0] expq [$];
  int exp_over = 0, n_written = 0;
  logic [AW-1:0] exp_addr;

  output_collector #(.NR(NR), .NC(NC), .AW(AW)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // write-port monitor, sampled two time units before the rising edge
  always @(negedge clk) begin
    #3;
    if (rst_n && !clear && ob_we) begin
    check(ob_addr == exp_addr, "entry address");
    exp_addr = exp_addr + 1'b1;
    n_written++;
    if (!gemm_mode) begin
      check(expq.size() > 0, "unexpected entry");
      if (expq.size() > 0) check(ob_wdata == expq.pop_front(), "grid entry");
    end
    end
  end

  initial begin
    int pending;   // entries of the current set not yet written (reference)
    for (int g = 0; g < NR; g++) grp_in[g] = '0;
    for (int c = 0; c < NC; c++) col_out[c] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk); clear = 1'b1; base = 10'd100; exp_addr = 10'd100;
    @(negedge clk); clear = 1'b0;
    // ---------------- grid sets
    pending = 0;
    for (int it = 0; it < 1500; it++) begin
      bit send;
      @(negedge clk);
      send = ($urandom_range(0, 2) == 0);
      // a set is accepted when, after this cycle's write, nothing stays pending
      if (pending > 0) pending--;
      for (int g = 0; g < NR; g++) grp_in[g] = '0;
      if (send) begin
        int nv;
        nv = 0;
        for (int g = 0; g < NR; g++) begin
          grp_in[g].valid = (g < 1 + int'($urandom_range(0, NR - 1)));
          grp_in[g].f0 = 16'($urandom); grp_in[g].f1 = 16'($urandom);
        end
        if (pending > 0) exp_over++;
        else begin
          for (int g = 0; g < NR; g++) if (grp_in[g].valid) begin
            expq.push_back({grp_in[g].f1, grp_in[g].f0}); nv++;
          end
          pending = nv;
        end
      end
    end
    @(negedge clk); for (int g = 0; g < NR; g++) grp_in[g] = '0;
    repeat (NR + 2) @(negedge clk);
    check(idle, "idle after drain");
    check(expq.size() == 0, "all grid entries written");
    check(int'(overflow) == exp_over, $sformatf("overflow count %0d vs %0d", overflow, exp_over));
    check(exp_over > 0, "overflow exercised");
    check(int'(written) == n_written, "written counter");
    // ---------------- GEMM columns
    @(negedge clk); clear = 1'b1; gemm_mode = 1'b1; base = 10'd0; exp_addr = 10'd0; n_written = 0;
    @(negedge clk); clear = 1'b0;
    begin
      int offered, wait_cnt [NC];
      offered = 0;
      for (int c = 0; c < NC; c++) wait_cnt[c] = 0;
      for (int it = 0; it < 1000; it++) begin
        logic [NC-1:0] gnt;
        @(negedge clk);
        // present a new word on idle columns
        for (int c = 0; c < NC; c++) if (!col_out[c].valid && $urandom_range(0, 1)) begin
          col_out[c].valid = 1'b1; col_out[c].data = 16'($urandom); offered++;
        end
        #1;
        for (int c = 0; c < NC; c++) begin
          gnt[c] = col_ready[c];
          if (col_ready[c]) begin
            check(ob_we && ob_wdata == {16'd0, col_out[c].data}, "gemm word");
            wait_cnt[c] = 0;
          end else if (col_out[c].valid) begin
            wait_cnt[c]++;
            check(wait_cnt[c] <= NC, "round-robin fairness");
          end
        end
        @(posedge clk); #1;
        for (int c = 0; c < NC; c++) if (gnt[c]) col_out[c].valid = 1'b0;
      end
      @(negedge clk);
      for (int c = 0; c < NC; c++) col_out[c].valid = 1'b0;
      // words still valid when we stopped are not counted as written
      check(n_written <= offered && n_written >= offered - NC, "every granted word written once");
      check(int'(written) == n_written, "written counter gemm");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_ps_scratchpad: self-checking test of the PS scratch pad and its
// register buffer. A random producer pushes (address, data) words while a
// random reader occupies the external port; the test checks back-pressure
// (wr_ready low only when four words are buffered), that every word reaches
// the SRAM, the drain rate of one word per free cycle and the `empty` flag.
module tb_ps_scratchpad;
  import ur_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic wr_valid = 1'b0, wr_ready, empty;
  logic [SP_AW-1:0] wr_addr = '0;
  logic [15:0] wr_data = '0;
  logic ext_en = 1'b0, ext_we = 1'b0;
  logic [SP_AW-1:0] ext_addr = '0;
  logic [15:0] ext_wdata = '0, ext_rdata;
  logic [15:0] model [SP_DEPTH];

  int checks = 0, failures = 0;
  int occ = 0;       // words buffered (reference)
  int stalls = 0;

  ps_scratchpad dut (.*);

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

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // preload known contents through the ext port
    for (int i = 0; i < int'(SP_DEPTH); i++) begin
      @(negedge clk);
      ext_en = 1'b1; ext_we = 1'b1; ext_addr = SP_AW'(i); ext_wdata = 16'(i * 3);
      model[i] = ext_wdata;
    end
    @(negedge clk); ext_en = 1'b0;
    // random traffic: pushes to 32 distinct addresses, ext port busy 60% of time
    for (int it = 0; it < 3000; it++) begin
      bit push, pop;
      @(negedge clk);
      wr_valid = ($urandom_range(0, 1) == 1);
      wr_addr  = SP_AW'($urandom_range(0, 31));
      wr_data  = 16'($urandom);
      ext_en   = ($urandom_range(0, 9) < 6);
      ext_we   = 1'b0;
      ext_addr = SP_AW'($urandom_range(100, 511));  // never written by pushes
      check(wr_ready == (occ < 4), "wr_ready matches occupancy");
      check(empty == (occ == 0), "empty flag");
      push = wr_valid && wr_ready;
      pop  = !ext_en && occ > 0;
      if (wr_valid && !wr_ready) stalls++;
      @(posedge clk); #1;
      if (ext_en) check(ext_rdata == model[ext_addr], "ext read during traffic");
      occ = occ + int'(push) - int'(pop);
      if (push) model[wr_addr] = wr_data;  // same order as the FIFO
    end
    // let it drain, then check memory
    @(negedge clk); wr_valid = 1'b0; ext_en = 1'b0;
    repeat (4) @(negedge clk);
    check(empty, "drained within 4 free cycles");
    for (int i = 0; i < int'(SP_DEPTH); i++) begin
      @(negedge clk); ext_en = 1'b1; ext_we = 1'b0; ext_addr = SP_AW'(i);
      @(posedge clk); #1;
      check(ext_rdata == model[i], $sformatf("final contents %0d", i));
    end
    check(stalls > 0, "back-pressure exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

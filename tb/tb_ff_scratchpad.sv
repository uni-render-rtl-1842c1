// tb_ff_scratchpad: self-checking test of the four-cell FF scratch pad.
// Loads all four cells through the load port, reads them back through the
// load port and through the independent per-cell controller ports (four
// different addresses in one cycle), and checks that the load port takes
// priority over the controller port.
module tb_ff_scratchpad;
  import ur_pkg::*;

  logic clk = 1'b0;
  logic [3:0] en = '0, we = '0;
  logic [SP_AW-1:0] addr [4];
  logic [15:0] wdata [4], rdata [4];
  logic ld_en = 1'b0, ld_we = 1'b0;
  logic [1:0] ld_bank = '0;
  logic [SP_AW-1:0] ld_addr = '0;
  logic [15:0] ld_wdata = '0, ld_rdata;
  logic [15:0] model [4][SP_DEPTH];

  int checks = 0, failures = 0;

  ff_scratchpad dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int b = 0; b < 4; b++) begin addr[b] = '0; wdata[b] = '0; end
    // load every word of every cell
    for (int b = 0; b < 4; b++)
      for (int i = 0; i < int'(SP_DEPTH); i++) begin
        @(negedge clk);
        ld_en = 1'b1; ld_we = 1'b1; ld_bank = 2'(b); ld_addr = SP_AW'(i);
        ld_wdata = 16'($urandom);
        model[b][i] = ld_wdata;
      end
    // read back through the load port
    for (int it = 0; it < 500; it++) begin
      @(negedge clk);
      ld_en = 1'b1; ld_we = 1'b0; ld_bank = 2'($urandom); ld_addr = SP_AW'($urandom);
      @(posedge clk); #1;
      check(ld_rdata == model[ld_bank][ld_addr], "load-port read");
    end
    // controller port: independent addresses, random reads and writes
    @(negedge clk); ld_en = 1'b0;
    for (int it = 0; it < 500; it++) begin
      logic [3:0] rd;
      @(negedge clk);
      for (int b = 0; b < 4; b++) begin
        en[b] = $urandom_range(0, 1); we[b] = $urandom_range(0, 1);
        addr[b] = SP_AW'($urandom); wdata[b] = 16'($urandom);
        rd[b] = en[b] && !we[b];
      end
      @(posedge clk); #1;
      for (int b = 0; b < 4; b++) begin
        if (rd[b]) check(rdata[b] == model[b][addr[b]], $sformatf("cell %0d read", b));
        else if (en[b] && we[b]) model[b][addr[b]] = wdata[b];
      end
    end
    // load port has priority: controller write in the same cycle is dropped
    @(negedge clk);
    en = 4'b1111; we = 4'b1111;
    for (int b = 0; b < 4; b++) begin addr[b] = 9'd7; wdata[b] = 16'hDEAD; end
    ld_en = 1'b1; ld_we = 1'b0; ld_bank = 2'd2; ld_addr = 9'd7;
    @(posedge clk); #1;
    check(ld_rdata == model[2][7], "priority read");
    @(negedge clk); en = '0; we = '0; ld_bank = 2'd1;
    @(posedge clk); #1;
    check(ld_rdata == model[1][7], "controller write blocked");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

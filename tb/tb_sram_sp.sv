// tb_sram_sp: self-checking test of the single-port SRAM model.
// Writes a random pattern with random enables, then reads it back and checks
// the one-cycle read latency, that a write does not change rdata, that rdata
// holds while the cell is disabled, and that disabled writes are ignored.
module tb_sram_sp;
  localparam int DEPTH = 64;
  localparam int WIDTH = 16;

  logic clk = 1'b0;
  logic en = 1'b0, we = 1'b0;
  logic [$clog2(DEPTH)-1:0] addr = '0;
  logic [WIDTH-1:0] wdata = '0, rdata;
  logic [WIDTH-1:0] model [DEPTH];

  int checks = 0, failures = 0;

  sram_sp #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [WIDTH-1:0] last;
    // fill every word
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      en = 1'b1; we = 1'b1; addr = i[$clog2(DEPTH)-1:0]; wdata = WIDTH'($urandom);
      model[i] = wdata;
    end
    // random mix of reads, writes and disabled cycles
    for (int it = 0; it < 2000; it++) begin
      @(negedge clk);
      en = ($urandom_range(0, 3) != 0);
      we = ($urandom_range(0, 2) == 0);
      addr = $clog2(DEPTH)'($urandom);
      wdata = WIDTH'($urandom);
      last = rdata;
      @(posedge clk);
      #1;
      if (en && !we) begin
        check(rdata == model[addr], $sformatf("read addr %0d", addr));
      end else begin
        check(rdata == last, "rdata holds");
        if (en && we) model[addr] = wdata;
      end
    end
    // disabled write must not change memory
    @(negedge clk); en = 1'b0; we = 1'b1; addr = 3; wdata = ~model[3];
    @(negedge clk); en = 1'b1; we = 1'b0;
    @(posedge clk); #1;
    check(rdata == model[3], "disabled write ignored");
    // read latency: data not visible before the clock edge
    @(negedge clk); en = 1'b1; we = 1'b0; addr = 5;
    last = rdata;
    #1;
    check(rdata == last || model[5] == last, "no combinational read");
    @(posedge clk); #1;
    check(rdata == model[5], "1-cycle latency");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

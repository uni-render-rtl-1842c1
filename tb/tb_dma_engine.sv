// tb_dma_engine: self-checking test of the DMA engine.
// Behavioural memories stand for the five on-chip spaces (one-cycle read
// latency) and for the external memory (request/grant with random grant
// delay and random read latency). Random block moves between random spaces
// are checked word by word against a reference copy, and the run time of an
// on-chip move against the engine's cost of 3 cycles per word.
module tb_dma_engine;
  import ur_pkg::*;

  localparam int MW = 4096;   // words modelled per space

  logic clk = 1'b0, rst_n = 1'b0;
  logic go = 1'b0;
  logic [2:0] src_space = '0, dst_space = '0;
  logic [31:0] src_addr = '0, dst_addr = '0;
  logic [15:0] len = '0;
  logic busy;
  logic ext_req, ext_we, ext_gnt, ext_rvalid;
  logic [31:0] ext_addr;
  logic [15:0] ext_wdata, ext_rdata;
  logic [5:0] mem_en;
  logic mem_we;
  logic [31:0] mem_addr;
  logic [15:0] mem_wdata;
  logic [15:0] mem_rdata [6];

  logic [15:0] mem [6][MW];
  logic [15:0] model [6][MW];

  int checks = 0, failures = 0;

  dma_engine dut (.*);

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

  // on-chip memories: one-cycle read latency
  always_ff @(posedge clk) begin
    for (int s = 1; s < 6; s++) if (mem_en[s]) begin
      if (mem_we) mem[s][mem_addr % MW] <= mem_wdata;
      else        mem_rdata[s] <= mem[s][mem_addr % MW];
    end
  end

  // external memory: grant after 0-3 cycles, read data 1-4 cycles after grant
  int gnt_wait = 0, rd_wait = -1;
  logic [15:0] rd_word = '0;
  always @(negedge clk) begin
    ext_gnt <= 1'b0;
    ext_rvalid <= 1'b0;
    if (rd_wait == 0) begin
      ext_rvalid <= 1'b1;
      ext_rdata <= rd_word;
      rd_wait = -1;
    end else if (rd_wait > 0) begin
      rd_wait--;
    end
    if (ext_req && rd_wait < 0) begin
      if (gnt_wait == 0) begin
        ext_gnt <= 1'b1;
        if (ext_we) mem[0][ext_addr % MW] = ext_wdata;
        else begin rd_word = mem[0][ext_addr % MW]; rd_wait = $urandom_range(0, 3); end
        gnt_wait = $urandom_range(0, 3);
      end else begin
        gnt_wait--;
      end
    end
  end

  initial begin
    mem_rdata[0] = '0;
    ext_gnt = 1'b0; ext_rvalid = 1'b0; ext_rdata = '0;
    for (int s = 0; s < 6; s++)
      for (int a = 0; a < MW; a++) begin
        mem[s][a] = 16'($urandom);
        model[s][a] = mem[s][a];
      end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int it = 0; it < 60; it++) begin
      int s, d, sa, da, n, cyc;
      s = $urandom_range(0, 5);
      do d = $urandom_range(0, 5); while (d == s);
      n = $urandom_range(1, 200);
      sa = $urandom_range(0, MW - n - 1);
      da = $urandom_range(0, MW - n - 1);
      @(negedge clk);
      go = 1'b1; src_space = 3'(s); dst_space = 3'(d);
      src_addr = 32'(sa); dst_addr = 32'(da); len = 16'(n);
      @(negedge clk); go = 1'b0;
      cyc = 1;
      while (busy) begin @(negedge clk); cyc++; end
      for (int i = 0; i < n; i++) model[d][da + i] = model[s][sa + i];
      for (int a = 0; a < MW; a++)
        if (mem[d][a] != model[d][a]) begin
          check(1'b0, $sformatf("space %0d word %0d", d, a));
          break;
        end
      check(1'b1, "block compared");
      if (s != 0 && d != 0) check(cyc == 3 * n + 1, $sformatf("on-chip move %0d words took %0d cycles", n, cyc));
      else check(cyc > 3 * n, "external move slower than on-chip");
    end
    // zero length does nothing
    @(negedge clk); go = 1'b1; len = 16'd0;
    @(negedge clk); go = 1'b0;
    check(!busy, "zero length ignored");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

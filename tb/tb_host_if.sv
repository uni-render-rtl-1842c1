// tb_host_if: self-checking test of the host register interface.
// Checks reset values, that every writable register reaches its output
// (random values, written in random order), the read-back and statistics
// registers, that the command bits give one-cycle go pulses, that writes to
// 0x28-0x2F become PE configuration writes in the same cycle, and that
// `done` pulses for exactly one cycle, from the first clock edge after a
// busy flag falls.
module tb_host_if;
  import ur_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic we = 1'b0;
  logic [7:0] addr = '0;
  logic [15:0] wdata = '0, rdata;
  logic done;
  logic dma_go;
  logic [2:0] dma_src_space, dma_dst_space;
  logic [31:0] dma_src_addr, dma_dst_addr;
  logic [15:0] dma_len;
  logic dma_busy = 1'b0;
  logic op_go;
  uop_e uop;
  logic [15:0] ibuf_base, count, row_mask, col_mask, obuf_base;
  logic [7:0] period;
  logic [4:0] group;
  agg_op_e agg_op;
  logic [3:0] gemm_last_row;
  logic op_busy = 1'b0;
  logic pe_cfg_we;
  logic [15:0] pe_row_mask, pe_col_mask;
  logic [2:0] pe_cfg_addr;
  logic [15:0] pe_cfg_wdata;
  logic [31:0] cycles = 32'h1234_5678;
  logic [15:0] out_written = 16'd77, out_overflow = 16'd0;
  logic overrun_any = 1'b0;
  logic [31:0] stall_total = 32'h0009_000A;

  int checks = 0, failures = 0;

  host_if dut (.*);

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

  task automatic wr(input logic [7:0] a, input logic [15:0] v);
    @(negedge clk); we = 1'b1; addr = a; wdata = v;
    @(negedge clk); we = 1'b0;
  endtask

  task automatic rd(input logic [7:0] a, output logic [15:0] v);
    @(negedge clk); addr = a; #1; v = rdata;
  endtask

  initial begin
    logic [15:0] v, vals [26];
    logic [7:0] regs [26];
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(period == 8'd16 && group == 5'd1 && uop == OP_IDLE, "reset values");
    check(pe_row_mask == 16'hFFFF && pe_col_mask == 16'hFFFF, "reset PE masks");
    check(!dma_go && !op_go && !done, "reset strobes");
    regs = '{8'h02, 8'h03, 8'h04, 8'h05, 8'h06, 8'h07, 8'h08, 8'h10, 8'h11, 8'h12, 8'h13,
             8'h14, 8'h15, 8'h16, 8'h17, 8'h18, 8'h19, 8'h20, 8'h21, 8'h02, 8'h08, 8'h10,
             8'h12, 8'h16, 8'h13, 8'h03};
    for (int rep = 0; rep < 20; rep++) begin
      for (int i = 0; i < 26; i++) begin
        vals[i] = 16'($urandom);
        if (regs[i] == 8'h10) vals[i] = 16'($urandom_range(0, 5));
        wr(regs[i], vals[i]);
        unique case (regs[i])
          8'h02: check(dma_src_space == vals[i][2:0], "src space");
          8'h03: check(dma_src_addr[15:0] == vals[i], "src addr lo");
          8'h04: check(dma_src_addr[31:16] == vals[i], "src addr hi");
          8'h05: check(dma_dst_space == vals[i][2:0], "dst space");
          8'h06: check(dma_dst_addr[15:0] == vals[i], "dst addr lo");
          8'h07: check(dma_dst_addr[31:16] == vals[i], "dst addr hi");
          8'h08: check(dma_len == vals[i], "len");
          8'h10: check(uop == uop_e'(vals[i][2:0]), "uop");
          8'h11: check(ibuf_base == vals[i], "ibuf base");
          8'h12: check(count == vals[i], "count");
          8'h13: check(period == vals[i][7:0], "period");
          8'h14: check(row_mask == vals[i], "row mask");
          8'h15: check(col_mask == vals[i], "col mask");
          8'h16: check(obuf_base == vals[i], "obuf base");
          8'h17: check(group == vals[i][4:0], "group");
          8'h18: check(agg_op == agg_op_e'(vals[i][0]), "agg op");
          8'h19: check(gemm_last_row == vals[i][3:0], "last row");
          8'h20: check(pe_row_mask == vals[i], "pe row mask");
          8'h21: check(pe_col_mask == vals[i], "pe col mask");
          default: ;
        endcase
      end
      rd(8'h08, v); check(v == dma_len, "read len");
      rd(8'h12, v); check(v == count, "read count");
      rd(8'h10, v); check(v == 16'(uop), "read uop");
    end
    // statistics
    rd(8'h30, v); check(v == 16'h5678, "cycles lo");
    rd(8'h31, v); check(v == 16'h1234, "cycles hi");
    rd(8'h32, v); check(v == 16'd77, "written");
    rd(8'h34, v); check(v == 16'h000A, "stall lo");
    rd(8'h35, v); check(v == 16'h0009, "stall hi");
    out_overflow = 16'd3; overrun_any = 1'b1; dma_busy = 1'b1;
    rd(8'h01, v); check(v == 16'b1101, "status");
    rd(8'h33, v); check(v == 16'd3, "overflow");
    dma_busy = 1'b0; overrun_any = 1'b0; out_overflow = 16'd0;
    // go pulses last one cycle
    @(negedge clk); we = 1'b1; addr = 8'h00; wdata = 16'h3;
    @(negedge clk); we = 1'b0;
    check(dma_go && op_go, "go pulses");
    @(negedge clk);
    check(!dma_go && !op_go, "go pulses end");
    // PE configuration broadcast in the same cycle
    for (int r = 0; r < 8; r++) begin
      @(negedge clk); we = 1'b1; addr = 8'h28 + 8'(r); wdata = 16'($urandom);
      #1;
      check(pe_cfg_we && pe_cfg_addr == 3'(r) && pe_cfg_wdata == wdata, "pe cfg write");
    end
    @(negedge clk); we = 1'b1; addr = 8'h27; #1;
    check(!pe_cfg_we, "no pe cfg write outside 0x28-0x2F");
    @(negedge clk); we = 1'b0;
    // done pulse
    for (int k = 0; k < 2; k++) begin
      int hi;
      @(negedge clk); if (k == 0) dma_busy = 1'b1; else op_busy = 1'b1;
      repeat (5) @(negedge clk);
      check(!done, "no done while busy");
      if (k == 0) dma_busy = 1'b0; else op_busy = 1'b0;
      hi = 0;
      for (int c = 0; c < 5; c++) begin
        @(negedge clk);
        if (done) begin check(c == 0, $sformatf("done timing %0d", c)); hi++; end
      end
      check(hi == 1, "done lasts one cycle");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

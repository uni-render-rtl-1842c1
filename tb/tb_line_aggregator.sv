// tb_line_aggregator: self-checking test of the cross-line aggregation.
// Group sizes 1, 2, 3 and 4 with multiply and add; random BF16 inputs on
// all lines. Each group result is compared with a double-precision product
// or sum one cycle later; a group with any invalid line, or a group cut
// short by the array edge, must not be valid.
module tb_line_aggregator;
  import ur_pkg::*;
  import tb_util_pkg::*;

  localparam int NR = 8;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [4:0] group = 5'd1;
  agg_op_e op = AGG_MUL;
  red_link_t line_in [NR], group_out [NR];

  int checks = 0, failures = 0;

  line_aggregator #(.NR(NR)) dut (.*);

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
    real v0 [NR], v1 [NR];
    for (int r = 0; r < NR; r++) line_in[r] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int it = 0; it < 800; it++) begin
      int gsz, ng;
      bit allv;
      @(negedge clk);
      gsz = 1 + (it % 4);
      group = 5'(gsz);
      op = agg_op_e'(it / 4 % 2);
      for (int r = 0; r < NR; r++) begin
        line_in[r].valid = ($urandom_range(0, 9) != 0);
        line_in[r].f0 = real_to_bf16(rand_real(-2.0, 2.0));
        line_in[r].f1 = real_to_bf16(rand_real(-2.0, 2.0));
        v0[r] = bf16_to_real(line_in[r].f0);
        v1[r] = bf16_to_real(line_in[r].f1);
      end
      @(posedge clk); #1;
      ng = NR / gsz;
      for (int g = 0; g < NR; g++) begin
        if (g >= ng) begin
          check(!group_out[g].valid, "no group past the edge");
        end else begin
          real w0, w1, s0, s1;
          allv = 1'b1;
          w0 = v0[g*gsz]; w1 = v1[g*gsz];
          s0 = rabs(w0);  s1 = rabs(w1);
          for (int k = 0; k < gsz; k++) allv &= line_in[g*gsz+k].valid;
          for (int k = 1; k < gsz; k++) begin
            if (op == AGG_MUL) begin
              w0 *= v0[g*gsz+k]; w1 *= v1[g*gsz+k];
              s0 = rabs(w0); s1 = rabs(w1);
            end else begin
              w0 += v0[g*gsz+k]; w1 += v1[g*gsz+k];
              s0 += rabs(v0[g*gsz+k]); s1 += rabs(v1[g*gsz+k]);
            end
          end
          check(group_out[g].valid == allv, $sformatf("group %0d valid", g));
          check(near(bf16_to_real(group_out[g].f0), w0, s0, 0.04), $sformatf("group %0d f0", g));
          check(near(bf16_to_real(group_out[g].f1), w1, s1, 0.04), $sformatf("group %0d f1", g));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

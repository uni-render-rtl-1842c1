// tb_pe_alu: self-checking test of the PE ALU layouts.
// Random operands; integer results are compared exactly with products and
// hash / linear indices computed here from the full 32-bit hash primes, BF16
// results with double-precision references within the truncation tolerance.
module tb_pe_alu;
  import ur_pkg::*;
  import tb_util_pkg::*;

  alu_mode_e          mode;
  logic signed [15:0] ia [4], ib [4];
  logic signed [31:0] iprod [4], ixp [2];
  logic [15:0]        c [3];
  idx_mode_e          idx_mode;
  logic [15:0]        width;
  logic [31:0]        index;
  logic [15:0]        ka, kb;
  logic               le;
  logic [15:0]        fa [4], fb [4], facc [2], fw, fout [2];

  pe_alu dut (.*);

  int checks = 0, failures = 0;

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
    real a_r [4], b_r [4], acc_r [2], want, scale;
    for (int it = 0; it < 300; it++) begin
      // ---------------- vector mode
      mode = ALU_VEC;
      for (int i = 0; i < 4; i++) begin
        ia[i] = 16'($urandom);
        ib[i] = 16'($urandom);
      end
      #1;
      for (int i = 0; i < 4; i++)
        check(iprod[i] == 32'(int'(ia[i]) * int'(ib[i])), $sformatf("iprod[%0d]", i));
      check(ixp[0] == 32'(int'(ia[0]) * int'(ib[0]) - int'(ia[1]) * int'(ib[1])), "ixp0");
      check(ixp[1] == 32'(int'(ia[2]) * int'(ib[2]) - int'(ia[3]) * int'(ib[3])), "ixp1");

      // ---------------- comparator
      mode = ALU_CMP;
      ka = 16'($urandom); kb = (it % 7 == 0) ? ka : 16'($urandom);
      #1;
      check(le == (ka <= kb), "le");

      // ---------------- grid: index + weight + feature MACs
      mode = ALU_GRID;
      idx_mode = (it % 2) ? IDX_HASH : IDX_LINEAR;
      width = 16'($urandom_range(2, 60));
      for (int d = 0; d < 3; d++) c[d] = 16'($urandom_range(0, int'(width) - 1));
      for (int i = 0; i < 4; i++) begin
        a_r[i] = rand_real(-2.0, 2.0); b_r[i] = rand_real(-2.0, 2.0);
        fa[i] = real_to_bf16(a_r[i]); fb[i] = real_to_bf16(b_r[i]);
        a_r[i] = bf16_to_real(fa[i]); b_r[i] = bf16_to_real(fb[i]);
      end
      for (int k = 0; k < 2; k++) begin
        acc_r[k] = rand_real(-4.0, 4.0);
        facc[k] = real_to_bf16(acc_r[k]);
        acc_r[k] = bf16_to_real(facc[k]);
      end
      #1;
      if (idx_mode == IDX_HASH) begin
        logic [31:0] h;
        h = (32'(c[0]) * 32'd1) ^ (32'(c[1]) * 32'd2654435761) ^ (32'(c[2]) * 32'd805459861);
        check(index[15:0] == h[15:0], "hash index");
      end else begin
        check(index == 32'(c[0]) + 32'(width) * 32'(c[1]) + 32'(width) * 32'(width) * 32'(c[2]),
              "linear index");
      end
      want = a_r[0] * b_r[0] * a_r[1];
      check(near(bf16_to_real(fw), want, rabs(want), 0.03), "weight product");
      for (int k = 0; k < 2; k++) begin
        want  = acc_r[k] + a_r[2+k] * b_r[2+k];
        scale = rabs(acc_r[k]) + rabs(a_r[2+k] * b_r[2+k]);
        check(near(bf16_to_real(fout[k]), want, scale, 0.03), $sformatf("grid mac %0d", k));
      end

      // ---------------- adder tree
      mode = ALU_TREE;
      #1;
      want = acc_r[0]; scale = rabs(acc_r[0]);
      for (int i = 0; i < 4; i++) begin
        want  += a_r[i] * b_r[i];
        scale += rabs(a_r[i] * b_r[i]);
      end
      check(near(bf16_to_real(fout[0]), want, scale, 0.04), "adder tree");

      // ---------------- off
      mode = ALU_OFF;
      #1;
      check(fout[0] == 16'd0 && index == 32'd0 && ixp[0] == 32'sd0, "off");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_reduction_data_router: self-checking test of one reduction router hop.
// A PE's own features and the partial sum from the west are added and
// registered (one cycle). In the first column the west input is ignored.
// When the router is disabled nothing valid leaves it. Expected sums are
// computed in double precision.
module tb_reduction_data_router;
  import ur_pkg::*;
  import tb_util_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic en = 1'b0, first = 1'b0;
  red_link_t own = '0, west_in = '0, east_out;

  int checks = 0, failures = 0;

  reduction_data_router dut (.*);

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
    real o0, o1, w0, w1;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int it = 0; it < 2000; it++) begin
      bit v, f, e;
      @(negedge clk);
      e = ($urandom_range(0, 4) != 0);
      f = ($urandom_range(0, 3) == 0);
      v = 1'($urandom);
      en = e; first = f;
      o0 = rand_real(-3.0, 3.0); o1 = rand_real(-3.0, 3.0);
      w0 = rand_real(-3.0, 3.0); w1 = rand_real(-3.0, 3.0);
      own.valid = v;  own.f0 = real_to_bf16(o0);  own.f1 = real_to_bf16(o1);
      west_in.valid = v; west_in.f0 = real_to_bf16(w0); west_in.f1 = real_to_bf16(w1);
      o0 = bf16_to_real(own.f0); o1 = bf16_to_real(own.f1);
      w0 = f ? 0.0 : bf16_to_real(west_in.f0); w1 = f ? 0.0 : bf16_to_real(west_in.f1);
      @(posedge clk); #1;
      check(east_out.valid == (e && v), "valid");
      if (east_out.valid) begin
        check(near(bf16_to_real(east_out.f0), o0 + w0, rabs(o0) + rabs(w0), 0.02), "sum f0");
        check(near(bf16_to_real(east_out.f1), o1 + w1, rabs(o1) + rabs(w1), 0.02), "sum f1");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

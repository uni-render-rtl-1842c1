// tb_input_data_router: self-checking test of the input data router.
// Grid micro-operators: the point seen by the PE is the west input of the
// same cycle and the east output is the west input one cycle later.
// GEMM: the north word and the south result pass straight through with their
// ready signals. Other micro-operators: nothing valid leaves the router.
module tb_input_data_router;
  import ur_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  uop_e uop = OP_IDLE;
  in_link_t west_in = '0, east_out, pe_pt;
  word_link_t north_in = '0, pe_word, pe_res = '0, south_out;
  logic north_ready, pe_word_ready = 1'b0, pe_res_ready, south_ready = 1'b0;

  int checks = 0, failures = 0;

  input_data_router dut (.*);

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
    in_link_t prev;
    uop_e     prev_uop;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    prev = '0; prev_uop = OP_IDLE;
    for (int it = 0; it < 2000; it++) begin
      @(negedge clk);
      // east output is last cycle's west input (only in grid modes)
      check(east_out.valid == (prev.valid && (prev_uop == OP_CGRID || prev_uop == OP_DGRID)),
            "east valid delay");
      if (east_out.valid) check(east_out.data == prev.data, "east data delay");
      uop = uop_e'($urandom_range(0, 5));
      west_in = {1'($urandom), 32'($urandom), 32'($urandom)};
      north_in = {1'($urandom), 16'($urandom)};
      pe_res = {1'($urandom), 16'($urandom)};
      pe_word_ready = 1'($urandom);
      south_ready = 1'($urandom);
      #1;
      if (uop == OP_CGRID || uop == OP_DGRID) check(pe_pt == west_in, "pe_pt pass");
      else check(!pe_pt.valid, "pe_pt off");
      if (uop == OP_GEMM) begin
        check(pe_word == north_in && south_out == pe_res, "gemm pass");
        check(north_ready == pe_word_ready && pe_res_ready == south_ready, "gemm ready");
      end else begin
        check(!pe_word.valid && !south_out.valid && !north_ready && !pe_res_ready, "gemm off");
      end
      prev = west_in; prev_uop = uop;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

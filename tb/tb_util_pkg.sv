// tb_util_pkg: reference helpers for the testbenches.
//
// BF16 values are converted to and from `real` through the IEEE double
// encoding, independently of the BF16 arithmetic inside the design, so the
// testbenches can compute expected results in double precision and compare
// them with a tolerance that covers BF16 truncation.
package tb_util_pkg;

  function automatic real bf16_to_real(input logic [15:0] b);
    logic [63:0] d;
    if (b[14:7] == 8'd0) return 0.0;
    d = {b[15], 11'(int'(b[14:7]) - 127 + 1023), b[6:0], 45'd0};
    return $bitstoreal(d);
  endfunction

  // Truncating conversion (toward zero), subnormals flushed to zero.
  function automatic logic [15:0] real_to_bf16(input real r);
    logic [63:0] d;
    int e;
    if (r == 0.0) return 16'h0000;
    d = $realtobits(r);
    e = int'(d[62:52]) - 1023 + 127;
    if (e <= 0) return {d[63], 15'd0};
    if (e >= 255) return {d[63], 8'hFF, 7'd0};
    return {d[63], 8'(e), d[51:45]};
  endfunction

  function automatic real rabs(input real r);
    return (r < 0.0) ? -r : r;
  endfunction

  // |got - want| within rel * scale (+ a tiny absolute floor)
  function automatic bit near(input real got, input real want, input real scale, input real rel);
    return rabs(got - want) <= rel * scale + 1.0e-6;
  endfunction

  function automatic real rand_real(input real lo, input real hi);
    return lo + (hi - lo) * (real'($urandom) / 4294967296.0);
  endfunction

endpackage

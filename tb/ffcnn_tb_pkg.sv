// ffcnn_tb_pkg: reference arithmetic for the testbenches.
//
// Converts between the 32-bit float encoding and SystemVerilog real (double)
// without using the design's arithmetic, so the expected values of every
// check are worked out independently: results are computed in double
// precision and compared with a tolerance.
package ffcnn_tb_pkg;

  function automatic real f2r(input logic [31:0] f);
    real m;
    int  e;
    e = int'(f[30:23]);
    if (e == 0) return 0.0;
    m = 1.0 + real'(f[22:0]) / 8388608.0;
    m = m * (2.0 ** (e - 127));
    return f[31] ? -m : m;
  endfunction

  // double -> float, round to nearest, subnormals flushed to zero
  function automatic logic [31:0] r2f(input real r);
    logic [63:0] d;
    int          e;
    logic [52:0] m;
    logic [24:0] mr;
    d = $realtobits(r);
    if (d[62:0] == 63'd0) return 32'd0;
    e = int'(d[62:52]) - 1023 + 127;
    m = {1'b1, d[51:0]};
    mr = 25'(m >> 29) + 25'(m[28]);
    if (mr[24]) begin mr = mr >> 1; e = e + 1; end
    if (e <= 0) return 32'd0;
    if (e >= 255) return {d[63], 8'hFF, 23'd0};
    return {d[63], 8'(e), mr[22:0]};
  endfunction

  // random float of magnitude below 2^k_max, about half of them negative
  function automatic logic [31:0] rand_f(input int scale_exp);
    logic [31:0] f;
    f[31]    = 1'($urandom_range(0, 1));
    f[30:23] = 8'(127 + scale_exp - int'($urandom_range(0, 6)));
    f[22:0]  = 23'($urandom);
    return f;
  endfunction

  function automatic real rabs(input real r);
    return (r < 0.0) ? -r : r;
  endfunction

  // got is within rel * scale + abs_tol of want
  function automatic bit close(input logic [31:0] got, input real want,
                               input real scale, input real rel);
    return rabs(f2r(got) - want) <= rel * scale + 1.0e-30;
  endfunction

endpackage

// tb_util_pkg: reference functions shared by the ATRIA testbenches.
//
// The reference B-to-S encoding is a thermometer code at twice the binary
// resolution: value v becomes a 512-bit vector whose low 2v bits are ones, so
// a pop count divided by two returns v. The reference ReLU works on offset
// binary (code 128 stands for zero): relu(c) = max(c, 128).
package tb_util_pkg;
  function automatic logic [511:0] therm(input logic [7:0] v);
    logic [511:0] r;
    r = '0;
    for (int i = 0; i < 512; i++) if (i < 2*int'(v)) r[i] = 1'b1;
    return r;
  endfunction

  function automatic logic [7:0] relu(input logic [7:0] c);
    return (c < 8'd128) ? 8'd128 : c;
  endfunction

  function automatic int ones512(input logic [511:0] v);
    int n;
    n = 0;
    for (int i = 0; i < 512; i++) n += int'(v[i]);
    return n;
  endfunction

  function automatic logic [511:0] rand512();
    logic [511:0] r;
    for (int i = 0; i < 16; i++) r[32*i +: 32] = $urandom;
    return r;
  endfunction
endpackage

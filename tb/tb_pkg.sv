// tb_pkg: helpers shared by the testbenches: conversion of binary32 bits to
// a real number (subnormals read as zero, as the design does), an absolute
// value, and random binary32 values of moderate exponent.
package tb_pkg;

  function automatic real fp32_to_real(input logic [31:0] f);
    if (f[30:23] == 8'h00) return 0.0;
    return $bitstoreal({f[31], 11'(int'(f[30:23]) + 896), f[22:0], 29'b0});
  endfunction

  function automatic real absr(input real x);
    return (x < 0.0) ? -x : x;
  endfunction

  // random binary32 with exponent field in [lo, hi]
  function automatic logic [31:0] rand_fp32(input int lo, input int hi);
    int e;
    e = lo + int'($urandom_range(hi - lo));
    return {1'($urandom), 8'(e), 23'($urandom)};
  endfunction

endpackage

// tb_pkg -- helpers shared by the testbenches: random FP16/FP32 stimulus and
// conversion of FP16/FP32 bit patterns to real numbers, so that expected
// results are computed in double precision independently of the RTL's
// arithmetic. close() accepts a result within a relative error of 1e-5 of
// the magnitude scale given (sum of |terms|), which covers FP32 rounding.
package tb_pkg;

  function automatic real pow2(input int e);
    real r;
    r = 1.0;
    if (e >= 0) for (int i = 0; i < e; i++) r = r * 2.0;
    else        for (int i = 0; i < -e; i++) r = r / 2.0;
    return r;
  endfunction

  function automatic real fp16_to_real(input logic [15:0] h);
    real m;
    if (h[14:10] == 5'd0) return 0.0;
    m = (1.0 + real'(h[9:0]) / 1024.0) * pow2(int'(h[14:10]) - 15);
    return h[15] ? -m : m;
  endfunction

  function automatic real fp32_to_real(input logic [31:0] f);
    real m;
    if (f[30:23] == 8'd0) return 0.0;
    m = (1.0 + real'(f[22:0]) / 8388608.0) * pow2(int'(f[30:23]) - 127);
    return f[31] ? -m : m;
  endfunction

  // Random FP16 in +-[0.25, 8).
  function automatic logic [15:0] rand_fp16();
    logic [15:0] h;
    h[15]    = 1'($urandom);
    h[14:10] = 5'(13 + $urandom_range(0, 4));
    h[9:0]   = 10'($urandom);
    return h;
  endfunction

  // Random FP32 in +-[2^-4, 2^4).
  function automatic logic [31:0] rand_fp32();
    logic [31:0] f;
    f[31]    = 1'($urandom);
    f[30:23] = 8'(123 + $urandom_range(0, 7));
    f[22:0]  = 23'($urandom);
    return f;
  endfunction

  function automatic real absr(input real x);
    return (x < 0.0) ? -x : x;
  endfunction

  function automatic bit close(input logic [31:0] got, input real expect_v, input real scale);
    return absr(fp32_to_real(got) - expect_v) <= 1.0e-5 * scale + 1.0e-30;
  endfunction

endpackage

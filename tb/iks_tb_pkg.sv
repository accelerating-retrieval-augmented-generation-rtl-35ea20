// iks_tb_pkg: reference arithmetic and stimulus shared by the testbenches.
//
// The reference FP16 arithmetic works on SystemVerilog reals and rounds
// with its own routine (scale into [1024, 2048), take the integer part,
// round to nearest even), so it shares no code with the design's integer
// FP16 functions. The products and sums of two FP16 values are exact in a
// double, so reference and design must agree bit for bit.
// ev_elem() gives the FP16 content of the DRAM model: element `lane` of the
// 136-byte row at byte address `row_addr`, values of magnitude 1/8 to 4.
package iks_tb_pkg;

  function automatic real fp16_to_real(logic [15:0] h);
    real m;
    int  e;
    e = int'(h[14:10]);
    if (e == 0) return 0.0;
    m = real'(1024 + int'(h[9:0])) * (2.0 ** (e - 25));
    return h[15] ? -m : m;
  endfunction

  function automatic logic [15:0] real_to_fp16(real x);
    logic s;
    real  a, sc, fr;
    int   e;
    int   r;
    if (x == 0.0) return 16'h0000;
    s = (x < 0.0);
    a = s ? -x : x;
    e = 0;
    while (a >= 2.0 ** (e + 1)) e++;
    while (a < 2.0 ** e) e--;
    if (e + 15 <= 0) return {s, 15'd0};
    sc = a / (2.0 ** (e - 10));
    r  = int'($floor(sc));
    fr = sc - real'(r);
    if (fr > 0.5 || (fr == 0.5 && (r % 2) == 1)) r++;
    if (r == 2048) begin
      r = 1024;
      e++;
    end
    if (e + 15 >= 31) return {s, 15'h7C00};
    return {s, 5'(e + 15), 10'(r - 1024)};
  endfunction

  function automatic logic [15:0] ref_mul(logic [15:0] a, logic [15:0] b);
    return real_to_fp16(fp16_to_real(a) * fp16_to_real(b));
  endfunction

  function automatic logic [15:0] ref_add(logic [15:0] a, logic [15:0] b);
    return real_to_fp16(fp16_to_real(a) + fp16_to_real(b));
  endfunction

  // Dot product with the design's rounding order: product rounded, then
  // running sum rounded, dimension 0 first.
  function automatic logic [15:0] ref_dot(logic [15:0] q[], logic [15:0] e[]);
    logic [15:0] acc;
    acc = ref_mul(q[0], e[0]);
    for (int j = 1; j < q.size(); j++)
      acc = ref_add(acc, ref_mul(q[j], e[j]));
    return acc;
  endfunction

  // Random FP16 of magnitude in [1/8, 4).
  function automatic logic [15:0] rand_fp16(int unsigned r);
    return {r[15], 5'(12 + (r[20:16] % 5)), r[9:0]};
  endfunction

  function automatic logic [15:0] ev_elem(logic [35:0] row_addr, int lane);
    int unsigned h;
    h = 32'(row_addr) * 32'h9E3779B1 ^ (32'(lane) * 32'h85EBCA77) ^ 32'(row_addr >> 20);
    h = h ^ (h >> 15);
    h = h * 32'h2C1B3C6D;
    h = h ^ (h >> 12);
    return rand_fp16(h);
  endfunction

  // Numeric order of FP16 values, computed on reals.
  function automatic bit ref_better(logic [15:0] a, logic [15:0] b, bit largest);
    return largest ? (fp16_to_real(a) > fp16_to_real(b)) : (fp16_to_real(a) < fp16_to_real(b));
  endfunction

endpackage

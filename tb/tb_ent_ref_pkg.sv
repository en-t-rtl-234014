// tb_ent_ref_pkg: reference models for the EN-T testbenches.
//
// Written from the arithmetic definitions, not from the RTL: ref_encode
// follows the digit recursion w_i = a_i + c_i (minus 4 and carry 1 when the
// sum is 3 or 4) on the magnitude, ref_decode evaluates sign and digits as
// a number, ref_simd is the lane function of the SIMD engine.
package tb_ent_ref_pkg;

  function automatic logic [8:0] ref_encode(int a);
    int mag = (a < 0) ? -a : a;
    int c = 0;
    logic [8:0] e = '0;
    e[8] = (a < 0);
    for (int i = 0; i < 4; i++) begin
      int d = ((mag >> (2 * i)) & 3) + c;
      int w = d;
      c = 0;
      if (d >= 3) begin
        w = d - 4;
        c = 1;
      end
      e[2*i +: 2] = 2'(w & 3);
    end
    return e;
  endfunction

  // Value of an encoded number: digit codes 0,1,2,3 mean 0,1,2,-1.
  function automatic int ref_decode(logic [8:0] e, int nd = 4);
    int v = 0;
    for (int i = 0; i < nd; i++) begin
      int w = int'(e[2*i +: 2]);
      if (w == 3) w = -1;
      v += w * (4 ** i);
    end
    return e[2*nd] ? -v : v;
  endfunction

  function automatic int sat8(int v);
    return v > 127 ? 127 : (v < -128 ? -128 : v);
  endfunction

  // One SIMD lane: scalar add, optional ReLU, arithmetic shift, saturation.
  function automatic int ref_simd(int x, int scalar, bit relu, int shift);
    int y = x + scalar;
    if (relu && y < 0) y = 0;
    y = y >>> shift;
    return sat8(y);
  endfunction

  function automatic int rand_int8();
    int r = int'($urandom_range(0, 255)) - 128;
    return r;
  endfunction

endpackage

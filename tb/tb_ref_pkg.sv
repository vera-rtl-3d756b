// tb_ref_pkg: reference arithmetic and external-memory contents shared by
// the testbenches. Nothing here is used by the design itself.
//
// ext_byte(a) defines the contents of the external parameter memory: a
// fixed pseudo-random signed byte per address, so that every testbench can
// recompute the parameter any address holds. comp_ref() is an independent
// restatement of the compensation formula with 64-bit integers:
//   comp[j] = sat( (b[j] * sum_r B[j][r] * (d[r] * sum_{i<din} A[r][i] x[i])) >>> sh )
package tb_ref_pkg;

  function automatic logic [7:0] ext_byte(input longint unsigned a);
    longint unsigned v;
    v = (a * 64'd2654435761) ^ (a >> 3) ^ 64'h5a;
    return v[15:8] ^ v[7:0];
  endfunction

  function automatic longint sat32(input longint v);
    if (v > 64'sd2147483647)  return 64'sd2147483647;
    if (v < -64'sd2147483648) return -64'sd2147483648;
    return v;
  endfunction

  // xs: activations, a: A_max row-major [r][i], bm: B_max [j][r], bv: b, dv: d
  function automatic longint comp_ref(input int r_n, input int di, input int din,
                                      input int j, input int sh,
                                      input longint xs[], input longint a[],
                                      input longint bm[], input longint bv_j,
                                      input longint dv[]);
    longint s;
    s = 0;
    for (int r = 0; r < r_n; r++) begin
      longint h;
      h = 0;
      for (int i = 0; i < din; i++) h += a[r*di + i] * xs[i];
      s += bm[j*r_n + r] * (dv[r] * h);
    end
    return sat32((bv_j * s) >>> sh);
  endfunction

endpackage

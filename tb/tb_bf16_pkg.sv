// tb_bf16_pkg: testbench helpers converting between BF16 bit patterns and
// real numbers, used to compute reference values independently of the
// design's arithmetic.
package tb_bf16_pkg;
  function automatic real bf2r(input logic [15:0] v);
    real r;
    if (v[14:7] == 8'd0) return 0.0;
    r = (1.0 + real'(v[6:0]) / 128.0) * (2.0 ** (real'(int'(v[14:7]) - 127)));
    return v[15] ? -r : r;
  endfunction
  function automatic real fp2r(input logic [31:0] v);
    real r;
    if (v[30:23] == 8'd0) return 0.0;
    r = (1.0 + real'(v[22:0]) / 8388608.0) * (2.0 ** (real'(int'(v[30:23]) - 127)));
    return v[31] ? -r : r;
  endfunction
  // truncating real -> BF16
  function automatic logic [15:0] r2bf(input real r);
    int e; real m; bit s;
    if (r == 0.0) return 16'h0;
    s = (r < 0); if (s) r = -r;
    e = 0; m = r;
    while (m >= 2.0) begin m = m / 2.0; e++; end
    while (m < 1.0)  begin m = m * 2.0; e--; end
    return {s, 8'(e + 127), 7'($rtoi((m - 1.0) * 128.0))};
  endfunction
  // real to BF16 with round to nearest, ties to even (the hardware rounding)
  function automatic logic [15:0] r2bf_rne(input real r);
    int e; real m, f; bit s; int q;
    if (r == 0.0) return 16'h0;
    s = (r < 0); if (s) r = -r;
    e = 0; m = r;
    while (m >= 2.0) begin m = m / 2.0; e++; end
    while (m < 1.0)  begin m = m * 2.0; e--; end
    f = (m - 1.0) * 128.0;
    q = $rtoi(f);
    if (f - q > 0.5 || (f - q == 0.5 && q[0])) q++;
    if (q == 128) begin q = 0; e++; end
    return {s, 8'(e + 127), 7'(q)};
  endfunction
  function automatic logic [31:0] r2fp(input real r);
    int e; real m; bit s;
    if (r == 0.0) return 32'h0;
    s = (r < 0); if (s) r = -r;
    e = 0; m = r;
    while (m >= 2.0) begin m = m / 2.0; e++; end
    while (m < 1.0)  begin m = m * 2.0; e--; end
    return {s, 8'(e + 127), 23'($rtoi((m - 1.0) * 8388608.0))};
  endfunction
  function automatic real rabs(input real r);
    return (r < 0.0) ? -r : r;
  endfunction
  // random BF16 in [-mag, mag]
  function automatic logic [15:0] rnd_bf(input real mag);
    return r2bf((real'($urandom_range(0, 20000)) / 10000.0 - 1.0) * mag);
  endfunction
endpackage

// tb_bf16_pkg: testbench helpers. Conversions between BF16 bit patterns and
// real numbers, so reference results can be computed in double precision
// independently of the BF16 arithmetic inside the design, and a bit-serial
// model of the 16-bit LFSR (taps 16,14,13,11) used by the cRP generator.
package tb_bf16_pkg;
  function automatic real bf16_to_real(logic [15:0] b);
    real m;
    int  e;
    if (b[14:7] == 8'd0) return 0.0;
    e = int'(b[14:7]) - 127;
    m = 1.0 + real'(b[6:0]) / 128.0;
    m = (e >= 0) ? m * real'(64'd1 << e) : m / real'(64'd1 << (-e));
    return b[15] ? -m : m;
  endfunction

  // nearest-below BF16 of a real (truncation), for small test values
  function automatic logic [15:0] real_to_bf16(real r);
    logic s;
    int   e;
    real  a;
    if (r == 0.0) return 16'h0000;
    s = (r < 0.0);
    a = s ? -r : r;
    e = 0;
    while (a >= 2.0) begin a = a / 2.0; e++; end
    while (a < 1.0)  begin a = a * 2.0; e--; end
    return {s, 8'(e + 127), 7'($rtoi((a - 1.0) * 128.0))};
  endfunction

  function automatic bit close(real got, real exp, real rel);
    real d, m;
    d = got - exp; if (d < 0) d = -d;
    m = exp < 0 ? -exp : exp;
    return d <= rel * m + 0.05;
  endfunction

  // |got-exp| within rel times the sum of magnitudes of the summed terms
  function automatic bit close_mag(real got, real exp, real mag, real rel);
    real d;
    d = got - exp; if (d < 0) d = -d;
    return d <= rel * mag + 0.01;
  endfunction

  // 16 single shifts of a Fibonacci LFSR, x^16+x^14+x^13+x^11+1
  function automatic logic [15:0] lfsr16_adv(logic [15:0] s);
    for (int k = 0; k < 16; k++) begin
      logic fb;
      fb = s[15] ^ s[13] ^ s[12] ^ s[10];
      s = {s[14:0], fb};
    end
    return s;
  endfunction
endpackage

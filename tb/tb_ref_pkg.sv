// tb_ref_pkg: reference models shared by the testbenches, written independently of the RTL.
//
// - fp16 <-> real conversion, round to nearest even, with subnormals and overflow to
//   infinity, computed with real arithmetic;
// - the LFSR of length 16 or 3 stepped bit by bit from its tap list;
// - the value of a SeedLM weight, 2^e * sum_p q_p (V - 2^(K-1)) / (2^(K-1) - 1), in reals.
package tb_ref_pkg;

  function automatic real fp16_to_real(logic [15:0] h);
    real m;
    int  e;
    e = int'(h[14:10]);
    if (e == 0) m = real'(h[9:0]) / 1024.0 * (2.0 ** -14);
    else        m = (1.0 + real'(h[9:0]) / 1024.0) * (2.0 ** (e - 15));
    return h[15] ? -m : m;
  endfunction

  function automatic logic [15:0] real_to_fp16(real v);
    real    a, q, fr;
    int     e;
    longint f;
    int     bits;
    logic   s;
    s = (v < 0.0);
    a = s ? -v : v;
    if (a == 0.0) return 16'h0000;
    e = 0;
    while (a >= 2.0 ** (e + 1)) e++;
    while (a < 2.0 ** e) e--;
    if (e > 15) return {s, 15'h7C00};
    if (e < -14) e = -14;
    q  = a / (2.0 ** (e - 10));
    f  = longint'($floor(q));
    fr = q - real'(f);
    if (fr > 0.5 || (fr == 0.5 && f[0])) f++;
    bits = ((e + 14) << 10) + int'(f);
    if (bits >= 'h7C00) bits = 'h7C00;
    return {s, bits[14:0]};
  endfunction

  // LFSR step from the tap list: new bit = XOR of the listed state bits, entering at the top.
  function automatic int unsigned lfsr_step(int unsigned s, int unsigned k);
    int unsigned fb;
    if (k == 16)      fb = ((s >> 0) ^ (s >> 1) ^ (s >> 3) ^ (s >> 12)) & 1;
    else if (k == 3)  fb = ((s >> 0) ^ (s >> 1)) & 1;
    else              fb = 0;
    return (s >> 1) | (fb << (k - 1));
  endfunction

  // Weight i of a K=16, C=8, P=3 block record {q2,q1,q0,e,seed}.
  function automatic real seedlm_weight(logic [31:0] rec, int i);
    int unsigned st;
    real         sum;
    int          e;
    int          q;
    logic signed [3:0] q4, e4;
    st  = rec[15:0];
    sum = 0.0;
    for (int n = 0; n < i * 3; n++) st = lfsr_step(st, 16);
    for (int p = 0; p < 3; p++) begin
      st  = lfsr_step(st, 16);
      q4  = rec[20 + 4*p +: 4];
      q   = int'(q4);
      sum = sum + real'(q) * (real'(st) - 32768.0) / 32767.0;
    end
    e4 = rec[19:16];
    e  = int'(e4);
    return sum * (2.0 ** e);
  endfunction

  // FP16 bit patterns equal, or neighbours of the same sign (one unit in the last place).
  function automatic bit fp16_close(logic [15:0] a, logic [15:0] b);
    int d;
    if (a == b) return 1'b1;
    if (a[15] != b[15]) return (a[14:0] <= 1 && b[14:0] <= 1);
    d = int'(a[14:0]) - int'(b[14:0]);
    return (d == 1 || d == -1);
  endfunction

endpackage

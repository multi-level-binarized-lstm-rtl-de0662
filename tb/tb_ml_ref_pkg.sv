// tb_ml_ref_pkg: reference arithmetic for the testbenches, written
// independently of the RTL. Encoding follows the residual-binarization
// recurrence in real arithmetic (all values are dyadic, so doubles are
// exact); fixed-point results are formed with $floor and explicit clipping.
package tb_ml_ref_pkg;

  localparam int ONE = 4096;   // 1.0 in Q4.12

  // Level bits of x (Q4.12 integer) with alpha = 2^-sh; bit nl-1 is level 1.
  function automatic int enc_bits(input int x, input int sh, input int nl);
    real r, a;
    int  bits;
    r    = real'(x) / ONE;
    a    = 2.0 ** (-sh);
    bits = 0;
    for (int i = 0; i < nl; i++) begin
      if (r >= 0.0) begin
        bits |= (1 << (nl - 1 - i));
        r    -= a / (2.0 ** i);
      end else begin
        r    += a / (2.0 ** i);
      end
    end
    return bits;
  endfunction

  // Real value the code of x stands for: alpha * sum_i s_i 2^-(i-1).
  function automatic real enc_real(input int x, input int sh, input int nl);
    int  bits;
    real v;
    bits = enc_bits(x, sh, nl);
    v    = 0.0;
    for (int i = 0; i < nl; i++)
      v += (((bits >> (nl - 1 - i)) & 1) != 0 ? 1.0 : -1.0) * (2.0 ** (-sh - i));
    return v;
  endfunction

  function automatic int clip16(input longint v);
    if (v > 32767)  return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  // Real value -> Q4.12 word, rounded down, saturated.
  function automatic int to_fix(input real v);
    return clip16(longint'($floor(v * ONE)));
  endfunction

  function automatic int hsig(input int x);
    return to_fix(((real'(x) / ONE) + 1.0) / 2.0 > 1.0 ? 1.0 :
                  ((real'(x) / ONE) + 1.0) / 2.0 < 0.0 ? 0.0 :
                  ((real'(x) / ONE) + 1.0) / 2.0);
  endfunction

  function automatic int htanh(input int x);
    if (x > ONE)  return ONE;
    if (x < -ONE) return -ONE;
    return x;
  endfunction

  // Eq. 7-8 on Q4.12 integers.
  function automatic void lstm_upd(input int f, input int i, input int o,
                                   input int m, input int c,
                                   output int c_new, output int h_new);
    real cr;
    cr    = (real'(f) * real'(c) + real'(i) * real'(m)) / (ONE * ONE);
    c_new = to_fix(cr);
    h_new = to_fix(real'(o) * real'(htanh(c_new)) / (ONE * ONE));
  endfunction

  // Sign-extend a 16-bit word held in an int.
  function automatic int s16(input logic [15:0] v);
    return int'($signed(v));
  endfunction

  // One LSTM time step of the whole layer (Eq. 1, 4-8) on the multi-level
  // binarized operands. w is flattened as w[(g*nh + j)*(nx+nh) + k] with
  // gate order c, f, i, o; b as b[g*nh + j]. h and c are updated in place.
  // n_clip counts gate dot products that saturated.
  function automatic void lstm_step(input int nx, input int nh, input int nla, input int nlb,
                                    input int sx, input int swf, input int swr, input int sb,
                                    input int w[], input int b[], input int x[],
                                    ref int h[], ref int c[], ref int n_clip);
    int  nk;
    int  hn [];
    nk = nx + nh;
    hn = new[nh];
    for (int j = 0; j < nh; j++) begin
      int pre [4];
      int act [4];
      for (int g = 0; g < 4; g++) begin
        real fr, rr;
        int  fw, rw, bw;
        fr = 0.0;
        rr = 0.0;
        for (int k = 0; k < nx; k++)
          fr += enc_real(x[k], sx, nla) * enc_real(w[(g*nh + j)*nk + k], swf, nlb);
        for (int k = 0; k < nh; k++)
          rr += enc_real(h[k], sx, nla) * enc_real(w[(g*nh + j)*nk + nx + k], swr, nlb);
        fw = to_fix(fr);
        rw = to_fix(rr);
        if ($floor(fr * ONE) > 32767.0 || $floor(fr * ONE) < -32768.0) n_clip++;
        if ($floor(rr * ONE) > 32767.0 || $floor(rr * ONE) < -32768.0) n_clip++;
        bw = to_fix(enc_real(b[g*nh + j], sb, nlb));
        pre[g] = clip16(longint'(fw) + longint'(rw) + longint'(bw));
      end
      act[0] = htanh(pre[0]);
      act[1] = hsig(pre[1]);
      act[2] = hsig(pre[2]);
      act[3] = hsig(pre[3]);
      lstm_upd(act[1], act[2], act[3], act[0], c[j], c[j], hn[j]);
    end
    for (int j = 0; j < nh; j++) h[j] = hn[j];
  endfunction

endpackage

// raella_ref_pkg: reference arithmetic used by the testbenches, written
// independently of the RTL (plain integer and real arithmetic).
package raella_ref_pkg;

  // Eleven-slot input slicing: speculative slices (lsb,width) and recovery bits.
  function automatic int slot_lsb(int s);
    int lsb_t [11] = '{0, 0, 1, 2, 3, 4, 4, 5, 6, 6, 7};
    return lsb_t[s];
  endfunction
  function automatic int slot_width(int s);
    int w_t [11] = '{4, 1, 1, 1, 1, 2, 1, 1, 2, 1, 1};
    return w_t[s];
  endfunction
  function automatic bit slot_spec(int s);
    return (s == 0 || s == 5 || s == 8);
  endfunction
  // Which speculative slot a recovery slot recovers.
  function automatic int slot_group(int s);
    return (s < 5) ? 0 : (s < 8) ? 5 : 8;
  endfunction

  function automatic int in_slice(int a, int s);
    return (a >> slot_lsb(s)) & ((1 << slot_width(s)) - 1);
  endfunction

  function automatic int clamp7(int v);
    return (v > 63) ? 63 : (v < -64) ? -64 : v;
  endfunction

  // Contribution of one column to its filter's psum, given the analog column
  // sum of every slot and the LSB of the column's weight slice. Also counts
  // failed speculations and recovery conversions.
  function automatic int col_contrib(int cs [11], int wlsb,
                                     inout int n_fail, inout int n_rec);
    int  acc;
    bit  failed;
    acc = 0;
    failed = 0;
    for (int s = 0; s < 11; s++) begin
      int code;
      code = clamp7(cs[s]);
      if (slot_spec(s)) begin
        if (code == 63 || code == -64) begin
          failed = 1;
          n_fail++;
        end else begin
          failed = 0;
          acc += code * (1 << (wlsb + slot_lsb(s)));
        end
      end else if (failed) begin
        n_rec++;
        acc += code * (1 << (wlsb + slot_lsb(s)));
      end
    end
    return acc;
  endfunction

  // Center+Offset slice of weight w with center phi: bits hi..lo of |w-phi|,
  // placed in the positive or negative device by the sign of w-phi.
  function automatic void offset_slice(int w, int phi, int hi, int lo,
                                       output int wp, output int wn);
    int d, mag, v;
    d   = w - phi;
    mag = (d < 0) ? -d : d;
    v   = (mag >> lo) & ((1 << (hi - lo + 1)) - 1);
    wp  = (d > 0) ? v : 0;
    wn  = (d < 0) ? v : 0;
  endfunction

  // Wrap an integer to a signed 16b value.
  function automatic int wrap16(int v);
    int t;
    t = v & 16'hffff;
    return (t >= 32768) ? t - 65536 : t;
  endfunction

  function automatic real fp16_real(bit [15:0] h);
    int  e, m;
    real v;
    e = int'(h[14:10]);
    m = int'(h[9:0]);
    if (e == 31) e = 30;
    if (e == 0) v = real'(m) * (2.0 ** -24);
    else        v = (1.0 + real'(m) / 1024.0) * (2.0 ** (e - 15));
    return h[15] ? -v : v;
  endfunction

  function automatic int quant_ref(int psum, bit [15:0] scale, bit [15:0] bias, bit relu);
    real x;
    int  q;
    x = real'(psum) * fp16_real(scale) + fp16_real(bias);
    q = int'($floor(x));
    if (relu) q = (q < 0) ? 0 : (q > 255) ? 255 : q;
    else      q = (q < -128) ? -128 : (q > 127) ? 127 : q;
    return q & 8'hff;
  endfunction

endpackage

// tb_ref_pkg: reference model of one network block, for the testbenches.
//
// layer_model holds the trained parameters of one block (weights as -1/0/+1
// integers, thresholds, BN scale and shift), draws them at random, computes
// the block's output for an input vector with plain integer arithmetic, and
// produces the configuration writes that load the same parameters into the
// RTL. It is written from the arithmetic the blocks are specified to do, not
// from the RTL: sums of products, threshold compares, y = x*s + b truncated
// and wrapped, ReLU and clipped ReLU.
package tb_ref_pkg;
  import bnn_pkg::*;

  localparam int VEC_BITS = 16384;
  typedef logic [VEC_BITS-1:0] vec_t;

  function automatic longint wrap(input longint v, input int w);
    return (v <<< (64 - w)) >>> (64 - w);
  endfunction

  function automatic int isqrt(input int v);
    int r;
    r = 0;
    while ((r + 1) * (r + 1) <= v) r++;
    return r;
  endfunction

  // Packs values into the bit encoding of in_kind_e (fixed: raw bits).
  function automatic vec_t pack(input longint v[], input in_kind_e k, input int fw);
    vec_t r;
    int b;
    r = 0;
    b = in_bits(k, fw);
    for (int i = 0; i < v.size(); i++) begin
      case (k)
        IN_BINARY:  r[i] = (v[i] > 0);
        IN_TERNARY: r[i*2 +: 2] = (v[i] > 0) ? 2'b01 : (v[i] < 0) ? 2'b11 : 2'b00;
        default:    for (int j = 0; j < fw; j++) r[i*fw + j] = v[i][j];
      endcase
    end
    return r;
  endfunction

  class layer_model;
    int       n_in, n_out, reuse, ch, fw, in_f, out_f, acc_f;
    in_kind_e ik;
    bit       tern, last, thresh;
    act_e     act;
    int       w[][];
    longint   thr0[], thr1[], sc[], sh[];
    // events seen by forward()
    int       n_wrap, n_clip, n_zero, n_relu0;

    function new(int n_in_, int n_out_, int reuse_, in_kind_e ik_, int fw_, int in_f_,
                 bit tern_, act_e act_, bit last_, int out_f_);
      n_in = n_in_; n_out = n_out_; reuse = reuse_; ik = ik_; fw = fw_; in_f = in_f_;
      tern = tern_; act = act_; last = last_; out_f = out_f_;
      ch = (n_in + reuse - 1) / reuse;
      thresh = !last && (act == ACT_BINARY_TANH || act == ACT_TERNARY_TANH);
      acc_f = (ik == IN_FIXED) ? in_f : 0;
      n_wrap = 0; n_clip = 0; n_zero = 0; n_relu0 = 0;
      w = new[n_out];
      thr0 = new[n_out]; thr1 = new[n_out]; sc = new[n_out]; sh = new[n_out];
      foreach (w[o]) w[o] = new[n_in];
    endfunction

    // mag: typical |input| in raw units.
    function void draw(int mag);
      longint s, c, d;
      s = longint'(isqrt(n_in) * mag + 1);
      for (int o = 0; o < n_out; o++) begin
        for (int i = 0; i < n_in; i++) begin
          if (tern) w[o][i] = int'($urandom_range(0, 2)) - 1;
          else      w[o][i] = ($urandom_range(0, 1) != 0) ? 1 : -1;
        end
        c = longint'($urandom_range(0, 32'(s))) - s / 2;
        d = longint'($urandom_range(0, 32'(s)));
        if (act == ACT_TERNARY_TANH) begin
          thr0[o] = c - d; thr1[o] = c + d;
        end else begin
          thr0[o] = c; thr1[o] = 0;
        end
        if ($urandom_range(0, 7) == 0) sc[o] = ($urandom_range(0, 1) != 0) ? 32767 : -32768;
        else                           sc[o] = longint'($urandom_range(0, 4095)) - 2048;
        sh[o] = longint'($urandom_range(0, 2 << out_f)) - (1 << out_f);
      end
    endfunction

    function void forward(input longint x[], output longint acc[], output longint y[]);
      longint p, one;
      int shamt;
      acc = new[n_out];
      y = new[n_out];
      one = longint'(1) << out_f;
      shamt = acc_f + BN_SCALE_F - out_f;
      for (int o = 0; o < n_out; o++) begin
        acc[o] = 0;
        for (int i = 0; i < n_in; i++) acc[o] += w[o][i] * x[i];
        if (thresh) begin
          if (act == ACT_BINARY_TANH) y[o] = (acc[o] >= thr0[o]) ? 1 : -1;
          else y[o] = (acc[o] > thr1[o]) ? 1 : (acc[o] < thr0[o]) ? -1 : 0;
          if (y[o] == 0) n_zero++;
        end else begin
          p = acc[o] * sc[o];
          p = (shamt >= 0) ? (p >>> shamt) : (p <<< (-shamt));
          p = p + sh[o];
          if (wrap(p, fw) != p) n_wrap++;
          y[o] = wrap(p, fw);
          if (!last) begin
            if (y[o] < 0) begin y[o] = 0; n_relu0++; end
            else if (act == ACT_CLIPPED_RELU && y[o] > one) begin y[o] = one; n_clip++; end
          end
        end
      end
    endfunction

    // Configuration writes that load this block's parameters.
    function void cfg_list(int layer_id, ref cfg_wr_t q[$]);
      cfg_wr_t c;
      for (int r = 0; r < reuse; r++) begin
        for (int o = 0; o < n_out; o++) begin
          c = '0;
          c.en = 1'b1; c.layer = CFG_LAYER_W'(layer_id); c.sel = CFG_WEIGHT;
          c.addr = CFG_AW'(r * n_out + o);
          for (int k = 0; k < ch; k++) begin
            int i;
            i = r * ch + k;
            if (i < n_in) begin
              if (tern) c.data[k*2 +: 2] = (w[o][i] > 0) ? 2'b01 : (w[o][i] < 0) ? 2'b11 : 2'b00;
              else      c.data[k] = (w[o][i] > 0);
            end
          end
          q.push_back(c);
        end
      end
      for (int o = 0; o < n_out; o++) begin
        c = '0;
        c.en = 1'b1; c.layer = CFG_LAYER_W'(layer_id); c.addr = CFG_AW'(o);
        if (thresh) begin
          c.sel = CFG_THR0; c.data = CFG_DW'(thr0[o]); q.push_back(c);
          if (act == ACT_TERNARY_TANH) begin
            c.sel = CFG_THR1; c.data = CFG_DW'(thr1[o]); q.push_back(c);
          end
        end else begin
          c.sel = CFG_BN_SCALE; c.data = CFG_DW'(sc[o]); q.push_back(c);
          c.sel = CFG_BN_SHIFT; c.data = CFG_DW'(sh[o]); q.push_back(c);
        end
      end
    endfunction
  endclass

endpackage

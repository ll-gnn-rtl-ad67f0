// tb_ref_pkg: golden models for the testbenches, written from the algebra of
// the interaction network rather than from the RTL structure.
//
// Numbers are plain integers holding Q12.12 values (4096 = 1.0). A layer
// output is b*16 + sum(floor(x*w/256)) (a Q16.16 sum), clipped to 32 bits,
// divided by 16 with rounding down, clipped to 24 bits, then passed through
// ReLU where the layer has one. Edge features, aggregation and concatenation
// are computed with explicit receiving and sending matrices Rr and Rs, built
// by listing every ordered pair (receiver, sender != receiver).
package tb_ref_pkg;

  function automatic longint clip(longint v, int bits);
    longint hi, lo;
    hi = (longint'(1) <<< (bits - 1)) - 1;
    lo = -(longint'(1) <<< (bits - 1));
    return (v > hi) ? hi : ((v < lo) ? lo : v);
  endfunction

  // Q16.16 sum -> Q12.12 value
  function automatic longint acc_out(longint s);
    return clip(clip(s, 32) >>> 4, 24);
  endfunction

  function automatic longint rnd_q(int lo_milli, int hi_milli);
    // uniform Q12.12 value in [lo, hi] (given in thousandths)
    int span;
    span = (hi_milli - lo_milli) * 4096 / 1000;
    return longint'(lo_milli) * 4096 / 1000 + longint'($urandom_range(span, 0));
  endfunction

  // one dense layer; w holds OUT rows of IN weights then OUT biases from off
  function automatic void layer_ref(input longint x[], input longint w[], input int off,
                                    input int n_in, input int n_out, input bit use_relu,
                                    output longint y[]);
    y = new[n_out];
    for (int o = 0; o < n_out; o++) begin
      longint s;
      s = w[off + n_out * n_in + o] * 16;
      for (int i = 0; i < n_in; i++) s += (x[i] * w[off + o * n_in + i]) >>> 8;
      y[o] = acc_out(s);
      if (use_relu && y[o] < 0) y[o] = 0;
    end
  endfunction

  function automatic void mlp_ref(input longint x[], input longint w[], input int dims[],
                                  input bit last_relu, output longint y[]);
    longint a[];
    int off;
    a = x;
    off = 0;
    for (int l = 0; l + 1 < dims.size(); l++) begin
      layer_ref(a, w, off, dims[l], dims[l+1], (l + 2 < dims.size()) ? 1'b1 : last_relu, y);
      off += dims[l] * dims[l+1] + dims[l+1];
      a = y;
    end
  endfunction

  function automatic int mlp_size(input int dims[]);
    int n = 0;
    for (int l = 0; l + 1 < dims.size(); l++) n += dims[l] * dims[l+1] + dims[l+1];
    return n;
  endfunction

  // Rr / Rs of the fully connected graph: rr[n][e], rs[n][e]
  function automatic void adjacency(input int no, output bit rr[][], output bit rs[][]);
    int e;
    rr = new[no];
    rs = new[no];
    for (int n = 0; n < no; n++) begin
      rr[n] = new[no * (no - 1)];
      rs[n] = new[no * (no - 1)];
    end
    e = 0;
    for (int r = 0; r < no; r++)
      for (int s = 0; s < no; s++)
        if (s != r) begin
          rr[r][e] = 1'b1;
          rs[s][e] = 1'b1;
          e++;
        end
  endfunction

  // O matrix (o[node][feature]) of the interaction network for features im[node][p]
  function automatic void jedi_o_ref(input longint im[][], input int p,
                                     input longint wr[], input int dr[],
                                     input longint wo[], input int dof[],
                                     output longint o[][]);
    bit rr[][], rs[][];
    int no, ne, de;
    longint e[][];
    no = im.size();
    ne = no * (no - 1);
    de = dr[dr.size() - 1];
    adjacency(no, rr, rs);
    e = new[ne];
    for (int k = 0; k < ne; k++) begin
      longint b[];
      b = new[2 * p];
      for (int f = 0; f < p; f++) begin
        b[f] = 0;
        b[p + f] = 0;
        for (int n = 0; n < no; n++) begin
          b[f]     += rr[n][k] ? im[n][f] : 0;   // I * Rr
          b[p + f] += rs[n][k] ? im[n][f] : 0;   // I * Rs
        end
      end
      mlp_ref(b, wr, dr, 1'b1, e[k]);
    end
    o = new[no];
    for (int n = 0; n < no; n++) begin
      longint c[];
      c = new[de + p];
      for (int j = 0; j < de; j++) begin
        longint s = 0;
        for (int k = 0; k < ne; k++) s += rr[n][k] ? e[k][j] * 16 : 0;   // E * Rr^T
        c[j] = acc_out(s);
      end
      for (int f = 0; f < p; f++) c[de + f] = im[n][f];
      mlp_ref(c, wo, dof, 1'b1, o[n]);
    end
  endfunction

  // head: sum O over nodes, then phi_O with a linear last layer
  function automatic void head_ref(input longint o[][], input longint wp[], input int dp[],
                                   output longint y[]);
    longint s[];
    s = new[dp[0]];
    for (int j = 0; j < dp[0]; j++) begin
      longint a = 0;
      for (int n = 0; n < o.size(); n++) a += o[n][j] * 16;
      s[j] = acc_out(a);
    end
    mlp_ref(s, wp, dp, 1'b0, y);
  endfunction

endpackage

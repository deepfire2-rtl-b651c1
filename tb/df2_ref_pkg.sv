// df2_ref_pkg - behavioural reference model of a DeepFire2 network, for the
// testbenches. It is written from the network definition only, not from the
// RTL structure: every layer computes, for each output position and neuron,
// sum over the kernel window of weight x input (zero outside the padded map)
// and fires when the sum is strictly greater than the neuron's threshold.
// It also provides the mapping from a neuron to its weight unit, split part
// and memory round, needed to load parameters over the prm bus, and the
// weight word for one input beat. Window element order is dx, dy, channel.
package df2_ref_pkg;
  import df2_pkg::*;

  typedef int int_q [$];

  class df2_net;
    layer_cfg_t cfg [];
    int_q       wts [];   // per layer: [n*NELEM + i]
    int_q       thr [];   // per layer: [n]

    function new(layer_cfg_t c []);
      cfg = c;
      wts = new[c.size()];
      thr = new[c.size()];
    endfunction

    function int nelem(int l);
      return int'(cfg[l].kh) * int'(cfg[l].kw) * int'(cfg[l].c_in);
    endfunction
    function int hout(int l);
      return out_dim(int'(cfg[l].h_in), int'(cfg[l].kh), int'(cfg[l].s), int'(cfg[l].p));
    endfunction
    function int wout(int l);
      return out_dim(int'(cfg[l].w_in), int'(cfg[l].kw), int'(cfg[l].s), int'(cfg[l].p));
    endfunction

    // Random parameters: weights in [-WR, WR-1], thresholds around zero.
    function void randomize_params(int wr, int tr, int tr_trans);
      for (int l = 0; l < cfg.size(); l++) begin
        int n_out = int'(cfg[l].c_out);
        wts[l] = {};
        thr[l] = {};
        for (int n = 0; n < n_out; n++) begin
          for (int i = 0; i < nelem(l); i++) wts[l].push_back(int'($urandom_range(2*wr - 1)) - wr);
          if (cfg[l].ew == 8) thr[l].push_back(int'($urandom_range(2*tr_trans)) - tr_trans);
          else                thr[l].push_back(int'($urandom_range(2*tr)) - tr);
        end
      end
    endfunction

    // One layer: x is H_IN x W_IN x C_IN, result is HOUT x WOUT x C_OUT (0/1).
    function int_q run_layer(int l, int_q x);
      int_q y;
      int H = int'(cfg[l].h_in), W = int'(cfg[l].w_in), C = int'(cfg[l].c_in);
      int KH = int'(cfg[l].kh), KW = int'(cfg[l].kw), S = int'(cfg[l].s), P = int'(cfg[l].p);
      int N = int'(cfg[l].c_out), NE = nelem(l);
      for (int r = 0; r < hout(l); r++)
        for (int c = 0; c < wout(l); c++)
          for (int n = 0; n < N; n++) begin
            longint acc = 0;
            for (int dx = 0; dx < KW; dx++)
              for (int dy = 0; dy < KH; dy++)
                for (int ch = 0; ch < C; ch++) begin
                  int rr = r*S - P + dy, cc = c*S - P + dx;
                  if (rr >= 0 && rr < H && cc >= 0 && cc < W)
                    acc += longint'(wts[l][n*NE + (dx*KH + dy)*C + ch]) * x[(rr*W + cc)*C + ch];
                end
            y.push_back(acc > thr[l][n] ? 1 : 0);
          end
      return y;
    endfunction

    function int_q run(int_q img);
      int_q x = img;
      for (int l = 0; l < cfg.size(); l++) x = run_layer(l, x);
      return x;
    endfunction

    // Neuron n of layer l lives in part p, weight unit j, round r.
    function void locate(int l, int n, output int p, output int j, output int r);
      int parts = int'(cfg[l].parts);
      int op    = int'(cfg[l].omega) / parts;
      int gb = n / 8, bt = n % 8, s;
      p = gb % parts;
      s = (gb / parts) * 8 + bt;
      r = s / op;
      j = s % op;
    endfunction

    function logic [BEAT_W-1:0] weight_word(int l, int n, int b);
      logic [BEAT_W-1:0] wd = '0;
      for (int ln = 0; ln < SPB; ln++) begin
        int i = b*SPB + ln;
        if (i < nelem(l)) wd[ln*8 +: 8] = 8'(wts[l][n*nelem(l) + i]);
      end
      return wd;
    endfunction
  endclass
endpackage

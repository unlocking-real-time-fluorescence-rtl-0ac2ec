// fli_ref_pkg -- bit-exact software reference of the accelerator, for testbenches.
//
// Written from the arithmetic specification, not from the RTL structure:
//   sigmoid  : PLAN piecewise-linear (1/4, 1/8, 1/32 slopes), then rounded to Q1.7
//   tanh     : 2 sigmoid(2x) - 1, rounded to Q1.7
//   GRU cell : z, r from sigmoid, rh = (r h) >> 7, candidate from tanh over
//              U (r.h), h' = ((128 - z) h + z hc) >> 7   (floor shifts)
//   dense    : y = clip16((b << 7 + sum W h) >> 4)
//   lifetime : tau = (dt * sum(S_k + S_{k-1}) << 8) / (2 S_max), 0 if S_max <= 0
// Weight words use the documented layout: per cell (encoder layers, then
// decoder layers) gate blocks z, r, h of H rows [b, W(IN), U(H)], then the
// dense row [b_o, W_o(H)].
package fli_ref_pkg;
  import fli_pkg::*;

  // sigmoid of v (12 fraction bits), result with 12 fraction bits
  function automatic longint sig12(input longint v);
    longint a, y;
    a = (v < 0) ? -v : v;
    // thresholds 5.0, 2.375, 1.0 as multiples of 1/4096
    if (a >= 20480)      y = 4096;
    else if (a >= 9728)  y = (a >> 5) + 3456;
    else if (a >= 4096)  y = (a >> 3) + 2560;
    else                 y = (a >> 2) + 2048;
    return (v < 0) ? 4096 - y : y;
  endfunction

  function automatic int round_q7(input longint v12);
    longint r;
    r = (v12 + 16) >>> 5;
    if (r > 127) r = 127;
    if (r < -128) r = -128;
    return int'(r);
  endfunction

  function automatic int ref_sig(input longint acc);
    return round_q7(sig12(acc));
  endfunction

  function automatic int ref_tanh(input longint acc);
    return round_q7(2 * sig12(2 * acc) - 4096);
  endfunction

  function automatic int sat16(input longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  function automatic int row_words(input int l, input int h);
    return 1 + ((l == 0) ? 1 : h) + h;
  endfunction

  function automatic int base_of(input int ph, input int l, input int h, input int layers);
    int b = 0;
    for (int c = 0; c < ph * layers + l; c++) b += 3 * h * row_words(c % layers, h);
    return b;
  endfunction

  // Run the whole network for one pixel. cw: weight words, x: T samples (Q1.7).
  // y receives T outputs (8 fraction bits).
  function automatic void run_pixel(input int h, input int layers, input int t_len,
                                    ref byte cw[], ref byte x[], ref int y[]);
    int st[][], z[], rh[], inv[];
    longint acc;
    int b, rl, nin, hc;
    st = new[layers];
    foreach (st[i]) begin st[i] = new[h]; foreach (st[i][j]) st[i][j] = 0; end
    z = new[h]; rh = new[h];
    y = new[t_len];
    for (int ph = 0; ph < 2; ph++) begin
      for (int t = 0; t < t_len; t++) begin
        for (int l = 0; l < layers; l++) begin
          // input vector of this layer
          if (l == 0) begin
            nin = (ph == 0) ? 1 : 0;
            inv = new[1]; inv[0] = (ph == 0) ? int'(x[t]) : 0;
          end else begin
            nin = h; inv = new[h];
            for (int k = 0; k < h; k++) inv[k] = st[l-1][k];
          end
          rl = row_words(l, h);
          for (int gate = 0; gate < 3; gate++) begin
            for (int j = 0; j < h; j++) begin
              b = base_of(ph, l, h, layers) + gate * h * rl + j * rl;
              acc = longint'(cw[b]) * 128;
              for (int k = 0; k < nin; k++) acc += longint'(cw[b + 1 + k]) * inv[k];
              for (int k = 0; k < h; k++)
                acc += longint'(cw[b + 1 + (rl - 1 - h) + k]) * ((gate == 2) ? rh[k] : st[l][k]);
              if (gate == 0) z[j] = ref_sig(acc);
              else if (gate == 1) rh[j] = (ref_sig(acc) * st[l][j]) >>> 7;
              else begin
                hc = ref_tanh(acc);
                st[l][j] = ((128 - z[j]) * st[l][j] + z[j] * hc) >>> 7;
              end
            end
          end
        end
        if (ph == 1) begin
          b = base_of(2, 0, h, layers);
          acc = longint'(cw[b]) * 128;
          for (int k = 0; k < h; k++) acc += longint'(cw[b + 1 + k]) * st[layers-1][k];
          y[t] = sat16(acc >>> 4);
        end
      end
    end
  endfunction

  function automatic longint ref_tau(input int dt, ref int y[]);
    longint s, m;
    s = 0; m = y[0];
    for (int k = 1; k < y.size(); k++) begin
      s += y[k] + y[k-1];
      if (y[k] > m) m = y[k];
    end
    if (m <= 0 || s < 0) return 0;
    return ((longint'(dt) * s) * 256) / (2 * m);
  endfunction

  function automatic int cmem_words(input int h, input int layers);
    return base_of(2, 0, h, layers) + 1 + h;
  endfunction

  // Expected command stream of one GRU/dense pass (no clear, no drain), as
  // given by Algorithm 1: for phase, time gate, group, layer, gate z/r/h, row:
  // bias, input MACs, recurrent MACs, finish; then the dense row in the decoder.
  function automatic void gen_schedule(input int h, input int layers, input int t_len,
                                       input int groups, ref lane_cmd_t cq[$], ref int aq[$]);
    lane_cmd_t c;
    int rb, rw, nin, indim, db;
    cq.delete(); aq.delete();
    db = base_of(2, 0, h, layers);
    for (int ph = 0; ph < 2; ph++)
      for (int t = 0; t < t_len; t++)
        for (int g = 0; g < groups; g++) begin
          for (int l = 0; l < layers; l++) begin
            rw = row_words(l, h);
            indim = rw - 1 - h;
            nin = (l == 0) ? ((ph == 0) ? 1 : 0) : h;
            for (int gate = 0; gate < 3; gate++)
              for (int j = 0; j < h; j++) begin
                rb = base_of(ph, l, h, layers) + gate * h * rw + j * rw;
                c = '0; c.grp = 8'(g); c.first = (t == 0); c.pb_addr = ADDR_W'(g * t_len + t);
                c.op = OP_BIAS; cq.push_back(c); aq.push_back(rb);
                for (int k = 0; k < nin; k++) begin
                  c.op = OP_MAC; c.src = (l == 0) ? SRC_X : SRC_H;
                  c.sh_addr = (l == 0) ? '0 : ADDR_W'(((l - 1) * groups + g) * h + k);
                  c.dm_addr = '0;
                  cq.push_back(c); aq.push_back(rb + 1 + k);
                end
                for (int k = 0; k < h; k++) begin
                  c.op = OP_MAC; c.src = (gate == 2) ? SRC_RH : SRC_H;
                  c.sh_addr = ADDR_W'((l * groups + g) * h + k); c.dm_addr = ADDR_W'(k);
                  cq.push_back(c); aq.push_back(rb + 1 + indim + k);
                end
                c.op = (gate == 0) ? OP_FIN_Z : (gate == 1) ? OP_FIN_R : OP_FIN_C;
                c.src = SRC_X;
                c.sh_addr = ADDR_W'((l * groups + g) * h + j); c.dm_addr = ADDR_W'(j);
                cq.push_back(c); aq.push_back(0);
              end
          end
          if (ph == 1) begin
            c = '0; c.grp = 8'(g); c.first = (t == 0); c.pb_addr = ADDR_W'(g * t_len + t);
            c.op = OP_BIAS; cq.push_back(c); aq.push_back(db);
            for (int k = 0; k < h; k++) begin
              c.op = OP_MAC; c.src = SRC_H; c.sh_addr = ADDR_W'(((layers - 1) * groups + g) * h + k);
              cq.push_back(c); aq.push_back(db + 1 + k);
            end
            c.op = OP_FIN_Y; c.src = SRC_X; c.sh_addr = '0;
            cq.push_back(c); aq.push_back(0);
          end
        end
  endfunction

endpackage

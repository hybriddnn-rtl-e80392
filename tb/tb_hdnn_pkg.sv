// tb_hdnn_pkg: instruction builders, a reference model and a small
// instruction generator for CONV layers, shared by the testbenches.
//
// gen_layer() plays the role of the off-line compiler: for one CONV layer it
// writes the input feature map (when it is the first layer), the weights and
// the biases into a memory image, emits the instruction sequence for the
// chosen mode (Spatial or Winograd) and dataflow (IS or WS) with the
// dependency flags that keep the ping-pong halves safe, and computes the
// expected output bytes with an independent model of the arithmetic:
// Spatial mode is a direct convolution; Winograd mode is
// Y = A^T [sum_c U (.) sat12(B^T d B)] A per tile and r x r kernel piece,
// with U given directly in the transformed domain (the weight transform is
// done off-line, so random U values are as valid as transformed ones).
// The reference model follows the arithmetic of the architecture (12-bit
// features, 8-bit weights, shift quantisation); the layer scheduler and test
// helpers are this package's own choice.
package tb_hdnn_pkg;
  import hdnn_pkg::*;

  typedef logic [127:0] inst_t;

  typedef struct {
    int H, W, C, K, R, pad, stride;
    bit wino, relu, dst_wino, ws;
    int shift, pool, gk;
    int in_base, out_base, w_base, b_base;
  } layer_t;

  // counters of the generator (token bookkeeping spans layers)
  int n_li, n_lw, n_out;
  int fence;    // SAVEs issued before the current layer
  // mechanism counters
  int cnt_wino_layers, cnt_spat_layers, cnt_is, cnt_ws, cnt_pool, cnt_kdec;
  int cnt_tr [4];   // W2W, W2S, S2S, S2W

  function automatic void reset_gen();
    n_li = 0; n_lw = 0; n_out = 0; fence = 0;
    cnt_wino_layers = 0; cnt_spat_layers = 0; cnt_is = 0; cnt_ws = 0;
    cnt_pool = 0; cnt_kdec = 0;
    for (int i = 0; i < 4; i++) cnt_tr[i] = 0;
  endfunction

  // ---------------- instruction builders ----------------
  function automatic inst_t mk_load(opcode_e op, logic [5:0] df, int half, int bbase, int dbase,
                                    logic [29:0] size, int pads, bit wino, int row0, int rows,
                                    int fence = 0);
    load_inst_t li;
    li = '0;
    li.opcode = op; li.dept_flag = df; li.buff_id = 3'(half); li.buff_base = 16'(bbase);
    li.dram_base = 32'(dbase); li.size = size; li.pads = 4'(pads); li.wino_flag = wino;
    li.wino_offset = 10'(row0); li.iw_blk_num = 10'(rows); li.save_fence = 13'(fence);
    return inst_t'(li);
  endfunction

  function automatic inst_t mk_comp(logic [5:0] df, int ih, int wh, int oh, int wbase,
                                    int iw, int ow, int ic, int oc, int stride, bit wino,
                                    int offr, int offc, bit relu, int shift, bit first, bit last);
    comp_inst_t ci;
    ci = '0;
    ci.opcode = OP_COMP; ci.dept_flag = df; ci.buff_id = {1'(oh), 1'(wh), 1'(ih)};
    ci.inp_base = '0; ci.out_base = '0; ci.wgt_base = 11'(wbase);
    ci.iw_num = 10'(iw); ci.ow_num = 10'(ow); ci.ic_num = 8'(ic); ci.oc_num = 8'(oc);
    ci.stride = 3'(stride); ci.wino_flag = wino; ci.off_r = 4'(offr); ci.off_c = 4'(offc);
    ci.relu = relu; ci.shift = 5'(shift); ci.acc_first = first; ci.acc_last = last;
    return inst_t'(ci);
  endfunction

  function automatic inst_t mk_save(logic [5:0] df, int half, int dbase, int wo, int kv,
                                    int pool, bit src, bit dst, int ocb, int owb);
    save_inst_t si;
    si = '0;
    si.opcode = OP_SAVE; si.dept_flag = df; si.buff_id = 3'(half); si.buff_base = '0;
    si.dram_base = 32'(dbase); si.size = {10'd0, 10'(kv), 10'(wo)}; si.pool = 4'(pool);
    si.src_wino = src; si.dst_wino = dst; si.oc_blk_num = 10'(ocb); si.ow_blk_num = 10'(owb);
    return inst_t'(si);
  endfunction

  // ---------------- helpers ----------------
  function automatic int sat(int v, int lo, int hi);
    return (v > hi) ? hi : (v < lo) ? lo : v;
  endfunction

  function automatic int quant(longint acc, int shift, int bias, bit relu);
    int a, v;
    a = int'(acc);            // 32-bit accumulator
    v = (a >>> shift) + bias;
    if (relu && v < 0) v = 0;
    return sat(v, -128, 127);
  endfunction

  function automatic int s8(int v);
    return int'($signed(8'(v)));
  endfunction

  // byte address of element (c, h, w) of a tensor with CV vectors of VL channels
  function automatic int fm_addr(int base, bit wino, int H, int W, int CV, int VL,
                                 int c, int h, int w);
    int cv, l;
    cv = c / VL; l = c % VL;
    if (wino) return base + ((h * CV + cv) * W + w) * VL + l;
    return base + ((h * W + w) * CV + cv) * VL + l;
  endfunction

  // ---------------- layer generator ----------------
  // fm_in:  C x H x W input values (index (c*H + h)*W + w), int8 range
  // fm_out: K x Ho x Wo output (after pooling), returned
  task automatic gen_layer(input layer_t L, input int PI, input int PO, input int PT,
                           input bit first_layer, ref int fm_in[],
                           ref byte unsigned img[int], ref inst_t prog[$],
                           ref int fm_out[], output int Ho, output int Wo);
    int M, Hp, Wp, CV, KV, np, taps, Fc, Fk, Fkg, Fy, groups, rows, P;
    int HoP, WoP;
    int wt[];      // spatial weights  [k][c][u][v], or wino U [k][c][piece][i][j]
    int bias[];
    longint acc[]; // K x Ho x Wo
    fence = n_out;
    M  = PT - 2;
    Hp = L.H + 2 * L.pad;
    Wp = L.W + 2 * L.pad;
    CV = L.C / PI;
    KV = L.K / PO;
    P  = (L.pool == 2) ? 2 : 1;
    if (L.wino) begin
      np   = (L.R + 2) / 3;
      taps = np * np;
      Ho = Hp - L.R + 1; Wo = Wp - L.R + 1;
      Fc = CV; Fk = KV;
      Fy = (Wo + M - 1) / M;
      groups = Ho / M;
      rows = (np - 1) * 3 + PT;
      wt = new[L.K * L.C * taps * PT * PT];
      cnt_wino_layers++;
      if (np > 1) cnt_kdec++;
    end else begin
      np = 0;
      taps = L.R * L.R;
      Ho = (Hp - L.R) / L.stride + 1; Wo = (Wp - L.R) / L.stride + 1;
      Fc = CV / PT; Fk = KV / PT;
      Fy = Wo;
      groups = Ho;
      rows = L.R;
      wt = new[L.K * L.C * taps];
      cnt_spat_layers++;
    end
    if (L.ws) cnt_ws++; else cnt_is++;
    if (P == 2) cnt_pool++;
    cnt_tr[L.wino ? (L.dst_wino ? 0 : 1) : (L.dst_wino ? 3 : 2)]++;
    if (L.gk < 1 || Fk % L.gk != 0) $error("gen_layer: %0d output groups cannot be split into %0d weight groups", Fk, L.gk);
    Fkg = Fk / L.gk;
    HoP = Ho / P; WoP = Wo / P;

    // ---- data ----
    foreach (wt[i]) wt[i] = $urandom_range(0, 6) - 3;
    bias = new[L.K];
    foreach (bias[i]) bias[i] = $urandom_range(0, 8) - 4;
    if (first_layer)
      for (int c = 0; c < L.C; c++)
        for (int h = 0; h < L.H; h++)
          for (int w = 0; w < L.W; w++)
            img[fm_addr(L.in_base, L.wino, L.H, L.W, CV, PI, c, h, w)] =
              8'(fm_in[(c*L.H + h)*L.W + w]);
    for (int k = 0; k < L.K; k++) img[L.b_base + k] = 8'(bias[k]);
    // weight blocks, per group: entry e = (tap*Fkg + k)*Fc + c, beat i, bank j
    for (int g = 0; g < L.gk; g++)
      for (int t = 0; t < taps; t++)
        for (int k = 0; k < Fkg; k++)
          for (int c = 0; c < Fc; c++)
            for (int i = 0; i < PT; i++)
              for (int j = 0; j < PT; j++)
                for (int o = 0; o < PO; o++)
                  for (int p = 0; p < PI; p++) begin
                    int e, a, kch, cch, val;
                    e = (t * Fkg + k) * Fc + c;
                    a = L.w_base + g * taps * Fkg * Fc * PT * PT * PO * PI +
                        ((e * PT + i) * PT + j) * PO * PI + o * PI + p;
                    if (L.wino) begin
                      kch = (g * Fkg + k) * PO + o;
                      cch = c * PI + p;
                      val = wt[((kch * L.C + cch) * taps + t) * PT * PT + i * PT + j];
                    end else begin
                      kch = ((g * Fkg + k) * PT + i) * PO + o;
                      cch = (c * PT + j) * PI + p;
                      val = wt[((kch * L.C + cch) * L.R + t / L.R) * L.R + t % L.R];
                    end
                    img[a] = 8'(val);
                  end

    // ---- reference ----
    acc = new[L.K * Ho * Wo];
    foreach (acc[i]) acc[i] = 0;
    if (!L.wino) begin
      for (int k = 0; k < L.K; k++)
        for (int x = 0; x < Ho; x++)
          for (int y = 0; y < Wo; y++) begin
            longint s;
            s = 0;
            for (int c = 0; c < L.C; c++)
              for (int u = 0; u < L.R; u++)
                for (int v = 0; v < L.R; v++) begin
                  int h, w, d;
                  h = x * L.stride + u - L.pad;
                  w = y * L.stride + v - L.pad;
                  d = (h >= 0 && h < L.H && w >= 0 && w < L.W) ? fm_in[(c*L.H + h)*L.W + w] : 0;
                  s += d * wt[((k * L.C + c) * L.R + u) * L.R + v];
                end
            acc[(k*Ho + x)*Wo + y] = s;
          end
    end else begin
      for (int x = 0; x < groups; x++)
        for (int y = 0; y < Fy; y++)
          for (int t = 0; t < taps; t++) begin
            int pu, pv;
            pu = t / np; pv = t % np;
            for (int k = 0; k < L.K; k++) begin
              longint Rk [8][8];
              longint tmp [8][8];
              for (int i = 0; i < PT; i++) for (int j = 0; j < PT; j++) Rk[i][j] = 0;
              for (int c = 0; c < L.C; c++) begin
                int d [8][8];
                int t1 [8][8];
                for (int i = 0; i < PT; i++)
                  for (int j = 0; j < PT; j++) begin
                    int ph, pw, h, w;
                    ph = x * M + pu * 3 + i;
                    pw = y * M + pv * 3 + j;
                    h = ph - L.pad; w = pw - L.pad;
                    d[i][j] = (pw < Wp && h >= 0 && h < L.H && w >= 0 && w < L.W) ?
                              fm_in[(c*L.H + h)*L.W + w] : 0;
                  end
                for (int i = 0; i < PT; i++)
                  for (int j = 0; j < PT; j++) begin
                    t1[i][j] = 0;
                    for (int q = 0; q < PT; q++) t1[i][j] += bt_coef(PT, i, q) * d[q][j];
                  end
                for (int i = 0; i < PT; i++)
                  for (int j = 0; j < PT; j++) begin
                    int vv;
                    vv = 0;
                    for (int q = 0; q < PT; q++) vv += t1[i][q] * bt_coef(PT, j, q);
                    vv = sat(vv, -2048, 2047);
                    Rk[i][j] += vv * wt[((k * L.C + c) * taps + t) * PT * PT + i * PT + j];
                  end
              end
              for (int a = 0; a < M; a++)
                for (int j = 0; j < PT; j++) begin
                  tmp[a][j] = 0;
                  for (int q = 0; q < PT; q++) tmp[a][j] += at_coef(PT, a, q) * Rk[q][j];
                end
              for (int a = 0; a < M; a++)
                for (int b = 0; b < M; b++) begin
                  longint yy;
                  int oh, ow;
                  yy = 0;
                  for (int q = 0; q < PT; q++) yy += tmp[a][q] * at_coef(PT, b, q);
                  oh = x * M + a; ow = y * M + b;
                  if (oh < Ho && ow < Wo)
                    acc[(k*Ho + oh)*Wo + ow] = longint'(int'(acc[(k*Ho + oh)*Wo + ow] + yy));
                end
            end
          end
    end
    fm_out = new[L.K * HoP * WoP];
    for (int k = 0; k < L.K; k++)
      for (int h = 0; h < HoP; h++)
        for (int w = 0; w < WoP; w++) begin
          int mx;
          mx = -1000;
          for (int a = 0; a < P; a++)
            for (int b = 0; b < P; b++) begin
              int q;
              q = quant(acc[(k*Ho + h*P + a)*Wo + w*P + b], L.shift, bias[k], L.relu);
              if (q > mx) mx = q;
            end
          fm_out[(k*HoP + h)*WoP + w] = mx;
        end
    Ho = HoP; Wo = WoP;

    // ---- instructions ----
    begin
      int nx, ngi;
      int li_half, lw_half, o_half;
      nx = groups;
      if (!L.ws) begin
        for (int x = 0; x < nx; x++) begin
          emit_li(L, PI, PT, x, rows, Hp, Wp, CV, prog, li_half);
          for (int g = 0; g < L.gk; g++) begin
            emit_lw(L, PI, PO, PT, g, taps, Fkg, Fc, prog, lw_half);
            emit_comps(L, PI, PO, PT, x, g, taps, np, Wp, Fy, Fc, Fkg, li_half, lw_half,
                       g == 0, g == L.gk - 1, 1'b1, 1'b1, KV, Wo, prog);
          end
        end
      end else begin
        for (int g = 0; g < L.gk; g++) begin
          emit_lw(L, PI, PO, PT, g, taps, Fkg, Fc, prog, lw_half);
          for (int x = 0; x < nx; x++) begin
            emit_li(L, PI, PT, x, rows, Hp, Wp, CV, prog, li_half);
            emit_comps(L, PI, PO, PT, x, g, taps, np, Wp, Fy, Fc, Fkg, li_half, lw_half,
                       1'b1, 1'b1, x == 0, x == nx - 1, KV, Wo, prog);
          end
        end
      end
    end
  endtask

  task automatic emit_li(input layer_t L, input int PI, input int PT, input int x, input int rows,
                         input int Hp, input int Wp, input int CV, ref inst_t prog[$],
                         output int half);
    logic [5:0] df;
    int M, row0;
    M = PT - 2;
    row0 = L.wino ? x * M : x * L.stride;
    half = n_li % 2;
    df = 6'b000010 | ((n_li >= 2) ? 6'b000001 : 6'b0);
    prog.push_back(mk_load(OP_LOAD_INP, df, half, 0, L.in_base,
                           {10'(CV), 10'(L.W), 10'(L.H)}, L.pad, L.wino, row0, rows,
                           fence));
    n_li++;
  endtask

  task automatic emit_lw(input layer_t L, input int PI, input int PO, input int PT, input int g,
                         input int taps, input int Fkg, input int Fc, ref inst_t prog[$],
                         output int half);
    logic [5:0] df;
    int nent, nb;
    half = n_lw % 2;
    df = 6'b000010 | ((n_lw >= 2) ? 6'b000001 : 6'b0);
    nent = taps * Fkg * Fc;
    prog.push_back(mk_load(OP_LOAD_WGT, df, half, 0,
                           L.w_base + g * nent * PT * PT * PO * PI, 30'(nent), 0, L.wino, 0, 0));
    nb = L.wino ? Fkg : Fkg * PT;     // bias vectors of this group
    prog.push_back(mk_load(OP_LOAD_BIAS, 6'b0, half, 0, L.b_base + g * nb * PO, 30'(nb),
                           0, L.wino, 0, 0));
    n_lw++;
  endtask

  task automatic emit_comps(input layer_t L, input int PI, input int PO, input int PT,
                            input int x, input int g, input int taps, input int np,
                            input int Wp, input int Fy, input int Fc, input int Fkg,
                            input int ih, input int wh, input bit wait_i, input bit sig_i,
                            input bit wait_w, input bit sig_w, input int KV, input int WoP,
                            ref inst_t prog[$]);
    int M, oh, MP, row0, kv0, dbase;
    bit src, dst;
    M = PT - 2;
    oh = n_out % 2;
    for (int t = 0; t < taps; t++) begin
      logic [5:0] df;
      int offr, offc;
      df = '0;
      if (t == 0) begin
        if (wait_i) df[DF_WAIT_INP] = 1'b1;
        if (wait_w) df[DF_WAIT_WGT] = 1'b1;
        if (n_out >= 2) df[DF_WAIT_OUT] = 1'b1;
      end
      if (t == taps - 1) begin
        if (sig_i) df[DF_SIG_INP] = 1'b1;
        if (sig_w) df[DF_SIG_WGT] = 1'b1;
        df[DF_SIG_OUT] = 1'b1;
      end
      if (L.wino) begin offr = (t / np) * 3; offc = (t % np) * 3; end
      else        begin offr = t / L.R;      offc = t % L.R;      end
      prog.push_back(mk_comp(df, ih, wh, oh, t * Fkg * Fc, Wp, Fy, Fc, Fkg,
                             L.wino ? 1 : L.stride, L.wino, offr, offc, L.relu, L.shift,
                             t == 0, t == taps - 1));
    end
    src = L.wino; dst = L.dst_wino;
    if (src) begin
      MP = (L.pool == 2) ? M / 2 : M;
      row0 = x * MP; kv0 = g * Fkg;
    end else begin
      row0 = x; kv0 = g * Fkg * PT;
    end
    if (dst) dbase = L.out_base + ((row0 * KV + kv0) * WoP) * PO;
    else     dbase = L.out_base + ((row0 * WoP) * KV + kv0) * PO;
    prog.push_back(mk_save(6'b000011, oh, dbase, WoP, KV, L.pool, src, dst, Fkg, Fy));
    n_out++;
  endtask
endpackage

// hurry_flow.svh: one layer through one IMA, driven by tile commands. Shared by the
// tile and chip testbenches, which define before including it:
//   R (array rows of the IMA), KR (Conv rows used), NO (outputs, 8 columns each),
//   chk(ok, what), send_cmd(tile, tile_cmd_t), read_word(tile, addr, data).
// Flow: weights, a residual and an 8-bit input vector go to eDRAM, then into the IR;
// the Conv FB (rows 0..KR-1) and the Res FB under it (row KR) are configured, reset
// and written; a VMM with merged Res produces x.W + res in OR[0..NO-1]; a Max/ReLU
// pooling of the outputs runs while a second VMM (without Res) writes OR[8..];
// a plain Max finds x_max of the scaled outputs and the look-up table computes their
// softmax into eDRAM; results are read back and compared with values computed here.
// Counters n_relu, n_res, n_softmax record that each mechanism ran.

int n_relu = 0, n_res = 0, n_softmax = 0;

function automatic logic [BUS_BITS-1:0] col_word(input logic [R-1:0] v);
  col_word = '0;
  col_word[R-1:0] = v;
endfunction

task automatic run_layer(input int t, input int m, input int seed);
  logic [7:0] w [KR][NO];
  logic [7:0] x [KR];
  logic [7:0] res [NO];
  longint expv [NO];
  tile_cmd_t c;
  logic [BUS_BITS-1:0] d;
  int sh;
  void'($urandom(seed));
  for (int r = 0; r < KR; r++) for (int o = 0; o < NO; o++) w[r][o] = 8'($urandom);
  for (int o = 0; o < NO; o++) res[o] = 8'($urandom);
  for (int r = 0; r < KR; r++) x[r] = 8'($urandom);
  // eDRAM[0..8NO-1] Conv columns, [64..] Res columns, [128..135] input bit-planes
  for (int k = 0; k < 8*NO; k++) begin
    logic [R-1:0] v;
    v = '0;
    for (int r = 0; r < KR; r++) v[r] = w[r][k/8][k%8];
    c = '0; c.op = T_EDRAM_WR; c.addr = 13'(k); c.data = col_word(v); send_cmd(t, c);
    v = '0; v[KR] = res[k/8][k%8];
    c = '0; c.op = T_EDRAM_WR; c.addr = 13'(64 + k); c.data = col_word(v); send_cmd(t, c);
  end
  for (int p = 0; p < 8; p++) begin
    logic [R-1:0] v;
    v = '0;
    for (int r = 0; r < KR; r++) v[r] = x[r][p];
    c = '0; c.op = T_EDRAM_WR; c.addr = 13'(128 + p); c.data = col_word(v); send_cmd(t, c);
  end
  c = '0; c.op = T_LOAD_IR; c.ima = 3'(m); c.addr = 0;   c.ir_addr = 0;   c.len = 6'(8*NO); send_cmd(t, c);
  c = '0; c.op = T_LOAD_IR; c.ima = 3'(m); c.addr = 64;  c.ir_addr = 32;  c.len = 6'(8*NO); send_cmd(t, c);
  c = '0; c.op = T_LOAD_IR; c.ima = 3'(m); c.addr = 128; c.ir_addr = 100; c.len = 8;        send_cmd(t, c);
  // FB setup and programming
  c = '0; c.op = T_IMA; c.ima = 3'(m);
  c.icmd = '0; c.icmd.op = I_CFG; c.icmd.fb = 0; c.icmd.cfg = '{r0: 0, r1: IDX_BITS'(KR-1), c0: 0, c1: IDX_BITS'(8*NO-1)}; send_cmd(t, c);
  c.icmd.fb = 1; c.icmd.cfg = '{r0: IDX_BITS'(KR), r1: IDX_BITS'(KR), c0: 0, c1: IDX_BITS'(8*NO-1)}; send_cmd(t, c);
  c.icmd = '0; c.icmd.op = I_RESET; c.icmd.fb = 0; send_cmd(t, c);
  c.icmd.fb = 1; send_cmd(t, c);
  c.icmd = '0; c.icmd.op = I_WRITE; c.icmd.fb = 0; c.icmd.a = 0;  send_cmd(t, c);
  c.icmd.fb = 1; c.icmd.a = 32; send_cmd(t, c);
  // Conv + Res
  c.icmd = '0; c.icmd.op = I_VMM; c.icmd.fb = 0; c.icmd.res_en = 1; c.icmd.res_fb = 1; c.icmd.a = 100; c.icmd.b = 0;
  send_cmd(t, c); n_res++;
  for (int o = 0; o < NO; o++) begin
    expv[o] = res[o];
    for (int r = 0; r < KR; r++) expv[o] += x[r] * w[r][o];
  end
  // scale so that the largest output lands in the 8-bit range
  sh = 0;
  for (int o = 0; o < NO; o++) while ((expv[o] >> sh) > 120) sh++;
  // next Conv (no Res) into OR[8..]; Max/ReLU of OR[0..NO-1] runs alongside
  c.icmd = '0; c.icmd.op = I_VMM; c.icmd.fb = 0; c.icmd.a = 100; c.icmd.b = 8; send_cmd(t, c);
  c.icmd = '0; c.icmd.op = I_MAX; c.icmd.a = 0; c.icmd.len = 6'(NO); c.icmd.shift = 5'(sh); c.icmd.relu = 1; c.icmd.b = 20;
  send_cmd(t, c); n_relu++;
  // x_max for softmax (plain Max) into OR[21]
  c.icmd.relu = 0; c.icmd.b = 21; send_cmd(t, c);
  // softmax of OR[0..NO-1] >> sh into eDRAM[201] (the tile waits until the IMA is idle)
  c = '0; c.op = T_SOFTMAX; c.ima = 3'(m); c.or_addr = 0; c.len = 6'(NO); c.xmax_addr = 21; c.shift = 5'(sh); c.addr2 = 201;
  send_cmd(t, c); n_softmax++;
  // OR[0..15] -> eDRAM[200], OR[16..31] -> eDRAM[202]
  c = '0; c.op = T_STORE_OR; c.ima = 3'(m); c.or_addr = 0;  c.addr = 200; send_cmd(t, c);
  c = '0; c.op = T_STORE_OR; c.ima = 3'(m); c.or_addr = 16; c.addr = 202; send_cmd(t, c);
  read_word(t, 200, d);
  for (int o = 0; o < NO; o++) begin
    chk(d[32*o +: 32] == 32'(expv[o]), $sformatf("tile %0d ima %0d out %0d = %0d exp %0d", t, m, o, d[32*o +: 32], expv[o]));
    chk(d[32*(8+o) +: 32] == 32'(expv[o] - res[o]), $sformatf("tile %0d ima %0d out w/o res %0d", t, m, o));
  end
  begin
    longint mx;
    real den;
    mx = 0;
    for (int o = 0; o < NO; o++) if ((expv[o] >> sh) > mx) mx = expv[o] >> sh;
    read_word(t, 202, d);
    chk(d[32*4 +: 32] == 32'(mx), $sformatf("tile %0d ima %0d max/relu %0d exp %0d", t, m, d[32*4 +: 32], mx));
    chk(d[32*5 +: 32] == 32'(mx), $sformatf("tile %0d ima %0d x_max", t, m));
    read_word(t, 201, d);
    den = 0.0;
    for (int o = 0; o < NO; o++) den += $exp((real'(expv[o] >> sh) - real'(mx)) / 16.0);
    for (int o = 0; o < NO; o++) begin
      real r, got;
      r = $exp((real'(expv[o] >> sh) - real'(mx)) / 16.0) / den;
      got = real'(d[16*o +: 16]) / 65536.0;
      chk(got - r < 0.03 && r - got < 0.03, $sformatf("tile %0d ima %0d softmax %0d %f exp %f", t, m, o, got, r));
    end
  end
endtask

// tb_vita_top: end-to-end test of the ViTA accelerator.
//
// Loads random int8 token activations through the host port, runs encoder layers with weights
// served by a behavioural off-chip memory (weights are a hash of layer, matrix, row and column,
// so nothing is stored), reads the activations back and compares every element with a
// reference model of the encoder layer computed here from the same fixed-point recipe:
// LayerNorm, Q/K/V projection, Q.K^T, softmax, S.V, MSA projection with skip, LayerNorm, MLP
// with GELU and skip. It also counts how often each mechanism of the design was exercised
// (weight-fetch stalls, head-level overlap of the two engines, the row pipeline of PE block 4,
// softmax and PE block 5 in flight at once, hidden and output MLP rows in the same cycle,
// skip-connection writes, staged-sum final pass), counting a failure for any that never
// happened, and checks the cycle count against the schedule's estimate.
//
// Sizes are parameters of this module; the defaults here are a reduced configuration that
// keeps every divisibility rule of the design (see README).
module tb_vita_top;
  import vita_pkg::*;
  localparam int N = 16, D = 24, H = 2, DH = 12, M = 24;
  localparam int K1 = 4, K2 = 3, K3 = 2, K4 = 2, WB = 4;
  localparam int LAYERS = 2;
  localparam int NA = $clog2(N), DA = $clog2(D);
  localparam int SH_QKV = 5, SH_SM = 6, SH_SV = 7, SH_O = 6, SH_H = 5, SH_OUT = 5;

  logic clk = 0, rst_n = 0;
  logic start = 0;
  logic [7:0] layers = 8'(LAYERS);
  logic busy, done;
  int8_t ln1_gamma [D], ln1_beta [D], ln2_gamma [D], ln2_beta [D];
  acc_t  mlp_b1 [M], mlp_b2 [D];
  logic hst_we = 0;
  logic [NA-1:0] hst_row = '0;
  logic [DA-1:0] hst_col = '0;
  int8_t hst_wdata [K2], hst_rdata [K2];
  logic dram_req_valid, dram_req_ready, dram_rvalid;
  wkind_e dram_req_kind;
  logic [7:0] dram_req_layer;
  logic [15:0] dram_req_index;
  logic [WB*8-1:0] dram_rdata;
  logic [31:0] perf_cycles, perf_e1_busy, perf_e2_busy, perf_wstall;

  vita_top #(.N(N), .D(D), .H(H), .DH(DH), .M(M), .K1(K1), .K2(K2), .K3(K3), .K4(K4), .WB(WB))
  dut (
    .clk, .rst_n, .start, .layers, .busy, .done,
    .sh_qkv(5'(SH_QKV)), .sh_sm(5'(SH_SM)), .sh_sv(5'(SH_SV)), .sh_o(5'(SH_O)),
    .sh_h(5'(SH_H)), .sh_out(5'(SH_OUT)),
    .ln1_gamma, .ln1_beta, .ln2_gamma, .ln2_beta, .mlp_b1, .mlp_b2,
    .hst_we, .hst_row, .hst_col, .hst_wdata, .hst_rdata,
    .dram_req_valid, .dram_req_ready, .dram_req_kind, .dram_req_layer, .dram_req_index,
    .dram_rvalid, .dram_rdata,
    .perf_cycles, .perf_e1_busy, .perf_e2_busy, .perf_wstall);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------------------------------
  // weights: matrix 0..2 = W^Q, W^K, W^V (D x H*DH), 3 = W^msa (D x D), 4 = W1 (D x M),
  // 5 = W2 (M x D); value in -15..15
  function automatic int wval(int layer, int mat, int r, int c);
    int unsigned h;
    h = 32'h9E3779B9 * (layer + 1) ^ (mat * 32'h85EBCA6B) ^ (r * 32'hC2B2AE35) ^ (c * 32'h27D4EB2F);
    h = h ^ (h >> 15);
    h = h * 32'h2C1B3C6D;
    h = h ^ (h >> 12);
    return int'(h % 31) - 15;
  endfunction

  // behavioural off-chip memory: accepts a request after a random delay, then streams the
  // vectors' words with random gaps
  initial begin
    dram_req_ready = 0; dram_rvalid = 0; dram_rdata = '0;
    forever begin
      @(posedge clk);
      if (dram_req_valid) begin
        int nvec, lay, idx;
        wkind_e kd;
        kd = dram_req_kind; lay = dram_req_layer; idx = dram_req_index;
        repeat ($urandom % 4) @(posedge clk);
        #1 dram_req_ready = 1;
        @(posedge clk); #1 dram_req_ready = 0;
        nvec = (kd == WK_MLP) ? 6 : 3;
        for (int v = 0; v < nvec; v++)
          for (int w = 0; w < D / WB; w++) begin
            while (($urandom % 5) == 0) begin @(posedge clk); #1; end
            for (int b = 0; b < WB; b++) begin
              int r, e;
              r = w * WB + b;
              case (kd)
                WK_QKV:    e = wval(lay, v, r, idx);
                WK_CONCAT: e = wval(lay, 3, r, idx + v);
                default:   e = (v < 3) ? wval(lay, 4, r, idx + v) : wval(lay, 5, idx + v - 3, r);
              endcase
              dram_rdata[8*b +: 8] = 8'(e);
            end
            dram_rvalid = 1;
            @(posedge clk); #1 dram_rvalid = 0;
          end
      end
    end
  end

  // ---------------------------------------------------------------------------------------
  // reference model
  int x [N][D];
  int snap_ln1 [N][D], dbg_ln1 [N][D];
  bit snapped = 0;
  always @(posedge clk) if (!snapped && dut.ph_q == 3'd2 && int'(dut.layer_q) == LAYERS - 1) begin
    snapped = 1;
    for (int t = 0; t < N; t++) for (int c = 0; c < D; c++) snap_ln1[t][c] = $signed(dut.u_lnmem.mem[t][c]);
  end
  int dbg_q [N][DH], dbg_v [N][DH];
  int dbg_sa [N][D], dbg_ln2 [N][D], dbg_x1 [N][D];

  function automatic int rq(longint v, int sh);
    longint r;
    r = (sh == 0) ? v : ((v + (longint'(1) << (sh - 1))) >>> sh);
    if (r > 127) return 127;
    if (r < -128) return -128;
    return int'(r);
  endfunction
  function automatic int sat8(int v);
    return (v > 127) ? 127 : (v < -128) ? -128 : v;
  endfunction
  function automatic int isqrt(longint v);
    int r;
    r = 0;
    while (longint'(r + 1) * longint'(r + 1) <= v) r++;
    return r;
  endfunction
  function automatic int gelu_ref(int xi);
    int ax, t, c, d, e, f;
    ax = (xi < 0) ? -xi : xi;
    t = (ax * 181 + 128) / 256;
    c = (t > 28) ? 28 : t;
    d = 28 - c;
    e = 256 - ((d * d * 74 + 128) / 256);
    f = (xi < 0) ? 256 - e : 256 + e;
    return (xi * f + 256) >>> 9;
  endfunction
  function automatic int exp_ref(longint d);
    real v;
    if (d > 127) return 0;
    v = 65535.0 * (2.0 ** (-(d % 8) / 8.0));
    return int'($floor(v + 0.5)) >> (d / 8);
  endfunction

  task automatic layernorm(input int src [N][D], input int gm [D], input int bt [D],
                           output int dst [N][D]);
    for (int t = 0; t < N; t++) begin
      longint s, q, var_, mean;
      int sd, inv;
      s = 0; q = 0;
      for (int c = 0; c < D; c++) begin s += src[t][c]; q += src[t][c] * src[t][c]; end
      var_ = (D * q - s * s) / (D * D);
      mean = ((s < 0 ? -s : s) + D / 2) / D;
      if (s < 0) mean = -mean;
      sd = isqrt(var_);
      if (sd == 0) sd = 1;
      inv = 65536 / sd;
      for (int c = 0; c < D; c++)
        dst[t][c] = sat8(rq((longint'(src[t][c]) - mean) * inv * gm[c], 18) + bt[c]);
    end
  endtask

  task automatic ref_layer(input int lay);
    int g1 [D], b1_ [D], g2 [D], b2_ [D];
    int ln [N][D], q [N][DH], k [N][DH], v [N][DH], sa [N][D], hid [N][M];
    for (int c = 0; c < D; c++) begin
      g1[c] = ln1_gamma[c]; b1_[c] = ln1_beta[c]; g2[c] = ln2_gamma[c]; b2_[c] = ln2_beta[c];
    end
    layernorm(x, g1, b1_, ln);
    dbg_ln1 = ln;
    for (int h = 0; h < H; h++) begin
      for (int t = 0; t < N; t++)
        for (int c = 0; c < DH; c++) begin
          longint aq, ak, av;
          aq = 0; ak = 0; av = 0;
          for (int d = 0; d < D; d++) begin
            aq += ln[t][d] * wval(lay, 0, d, h * DH + c);
            ak += ln[t][d] * wval(lay, 1, d, h * DH + c);
            av += ln[t][d] * wval(lay, 2, d, h * DH + c);
          end
          q[t][c] = rq(aq, SH_QKV); k[t][c] = rq(ak, SH_QKV); v[t][c] = rq(av, SH_QKV);
        end
      dbg_q = q; dbg_v = v;

      for (int i = 0; i < N; i++) begin
        longint sc [N], mx;
        int e [N], p [N];
        longint sum, r;
        for (int j = 0; j < N; j++) begin
          sc[j] = 0;
          for (int c = 0; c < DH; c++) sc[j] += q[i][c] * k[j][c];
        end
        mx = sc[0];
        for (int j = 1; j < N; j++) if (sc[j] > mx) mx = sc[j];
        sum = 0;
        for (int j = 0; j < N; j++) begin e[j] = exp_ref((mx - sc[j]) >> SH_SM); sum += e[j]; end
        r = (longint'(127) << 24) / sum;
        for (int j = 0; j < N; j++) p[j] = int'((longint'(e[j]) * r) >> 24);
        for (int c = 0; c < DH; c++) begin
          longint a;
          a = 0;
          for (int j = 0; j < N; j++) a += p[j] * v[j][c];
          sa[i][h * DH + c] = rq(a, SH_SV);
        end
      end
    end
    for (int t = 0; t < N; t++)
      for (int d = 0; d < D; d++) begin
        longint a;
        a = 0;
        for (int e2 = 0; e2 < D; e2++) a += sa[t][e2] * wval(lay, 3, e2, d);
        x[t][d] = sat8(x[t][d] + rq(a, SH_O));
      end
    layernorm(x, g2, b2_, ln);
    dbg_sa = sa; dbg_ln2 = ln; dbg_x1 = x;
    for (int t = 0; t < N; t++)
      for (int j = 0; j < M; j++) begin
        longint a;
        a = mlp_b1[j];
        for (int d = 0; d < D; d++) a += ln[t][d] * wval(lay, 4, d, j);
        hid[t][j] = gelu_ref(rq(a, SH_H));
      end
    for (int t = 0; t < N; t++)
      for (int d = 0; d < D; d++) begin
        longint a;
        a = mlp_b2[d];
        for (int j = 0; j < M; j++) a += hid[t][j] * wval(lay, 5, j, d);
        x[t][d] = sat8(x[t][d] + rq(a, SH_OUT));
      end
  endtask

  // ---------------------------------------------------------------------------------------
  // mechanism counters (observed inside the design)
  int n_wstall = 0, n_head_overlap = 0, n_row_pipe = 0, n_mlp_both = 0, n_skip = 0, n_fin = 0;
  always @(posedge clk) begin
    if (dut.wstall) n_wstall++;
    if (dut.t1_q.valid && dut.ph_q == 3'd2 && (dut.p4_v1_q || dut.p5_v1_q)) n_head_overlap++;
    if (dut.p4_v1_q && dut.p5_v1_q && dut.sm_busy) n_row_pipe++;
    if (dut.t1_q.valid && dut.t1_q.hact && dut.t1_q.pact) n_mlp_both++;
    if (dut.cat_rv_q && dut.ph_q == 3'd3) n_skip++;
    if (dut.fin_v1_q) n_fin++;
  end

  initial begin
    int cyc;
    for (int c = 0; c < D; c++) begin
      ln1_gamma[c] = int8_t'(48 + ($urandom % 33));
      ln2_gamma[c] = int8_t'(48 + ($urandom % 33));
      ln1_beta[c]  = int8_t'(int'($urandom % 9) - 4);
      ln2_beta[c]  = int8_t'(int'($urandom % 9) - 4);
      mlp_b2[c]    = int'($urandom % 201) - 100;
    end
    for (int j = 0; j < M; j++) mlp_b1[j] = int'($urandom % 201) - 100;
    for (int k = 0; k < K2; k++) hst_wdata[k] = '0;
    for (int t = 0; t < N; t++)
      for (int c = 0; c < D; c++) x[t][c] = int'($urandom % 101) - 50;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // load the activations
    for (int t = 0; t < N; t++)
      for (int c = 0; c < D; c += K2) begin
        @(negedge clk);
        hst_we = 1; hst_row = NA'(t); hst_col = DA'(c);
        for (int k = 0; k < K2; k++) hst_wdata[k] = int8_t'(x[t][c + k]);
      end
    @(negedge clk); hst_we = 0;
    // run
    start = 1;
    @(negedge clk); start = 0;
    cyc = 0;
    while (!done) begin @(posedge clk); cyc++; end
    for (int l = 0; l < LAYERS; l++) ref_layer(l);
    for (int t = 0; t < N; t++)
      for (int c = 0; c < D; c++) begin
        checks++;
        if (snap_ln1[t][c] != dbg_ln1[t][c]) begin
          failures++;
          if (failures < 10) $display("ln1[%0d][%0d] = %0d, expected %0d", t, c, snap_ln1[t][c], dbg_ln1[t][c]);
        end
      end
    for (int t = 0; t < N; t++)
      for (int c = 0; c < DH; c++) begin
        checks += 2;
        if (int'($signed(dut.u_qmem.mem[((H - 1) % 2) * DH + c][t])) != dbg_q[t][c]) begin
          failures++;
          if (failures < 10) $display("q[%0d][%0d] = %0d, expected %0d", t, c, $signed(dut.u_qmem.mem[((H - 1) % 2) * DH + c][t]), dbg_q[t][c]);
        end
        if (int'($signed(dut.u_vmem.mem[((H - 1) % 2) * DH + c][t])) != dbg_v[t][c]) failures++;
      end
    // the buffers that the last layer leaves behind: SA results and the second LayerNorm
    for (int t = 0; t < N; t++)
      for (int c = 0; c < D; c++) begin
        checks += 2;
        if (int'($signed(dut.u_samem.mem[t][c])) != dbg_sa[t][c]) begin
          failures++;
          if (failures < 10) $display("sa[%0d][%0d] = %0d, expected %0d", t, c, $signed(dut.u_samem.mem[t][c]), dbg_sa[t][c]);
        end
        if (int'($signed(dut.u_lnmem.mem[t][c])) != dbg_ln2[t][c]) begin
          failures++;
          if (failures < 20) $display("ln2[%0d][%0d] = %0d, expected %0d", t, c, $signed(dut.u_lnmem.mem[t][c]), dbg_ln2[t][c]);
        end
      end
    // read back and compare
    for (int t = 0; t < N; t++)
      for (int c = 0; c < D; c += K2) begin
        @(negedge clk); hst_row = NA'(t); hst_col = DA'(c);
        @(posedge clk); #1;
        for (int k = 0; k < K2; k++) begin
          checks++;
          if (int'(hst_rdata[k]) != x[t][c + k]) begin
            failures++;
            if (failures < 20) $display("out[%0d][%0d] = %0d, expected %0d", t, c + k, hst_rdata[k], x[t][c + k]);
          end
        end
      end
    $display("cycles %0d (counter %0d), engine-1 busy %0d, engine-2 busy %0d, weight stalls %0d",
             cyc, perf_cycles, perf_e1_busy, perf_e2_busy, perf_wstall);
    $display("mechanisms: wstall=%0d head_overlap=%0d row_pipeline=%0d mlp_hidden+output=%0d skip_writes=%0d final=%0d",
             n_wstall, n_head_overlap, n_row_pipe, n_mlp_both, n_skip, n_fin);
    checks += 6;
    if (n_wstall == 0) failures++;
    if (n_head_overlap == 0) failures++;
    if (n_row_pipe == 0) failures++;
    if (n_mlp_both == 0) failures++;
    if (n_skip == 0) failures++;
    if (n_fin == 0) failures++;
    // engine-1 busy cycles must equal the MAC work of PE blocks 1-3 (per layer: QKV H*DH
    // columns x N/K1 groups x D/K2 chunks, concat D/3 x N/K1 x D/K2, MLP M/3 x N/(K1/2) x D/K2
    // plus the drain item)
    checks++;
    if (perf_e1_busy != LAYERS * ((H * DH + D / 3) * (N / K1) * (D / K2) + (M / 3 * N / (K1 / 2) + 1) * (D / K2))) begin
      failures++;
      $display("engine-1 busy count %0d unexpected", perf_e1_busy);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

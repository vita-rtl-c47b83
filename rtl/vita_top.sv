// vita_top: the ViTA vision-transformer encoder accelerator.
//
// The token activations of the image (N tokens x D int8 features) stay on chip for the whole
// inference; only weights are streamed in from off-chip memory, one weight column (or MLP
// weight row) at a time, into buffers that hold two so that the next one is fetched while the
// current one is used. One start runs `layers` encoder layers in place on the resident
// activations:
//
//   LN1     LayerNorm of the activations into the normalised-activation buffer.
//   MSA     head-level coarse pipeline in H+1 slots. In slot s, PE blocks 1, 2, 3 compute
//           the columns of Q, K, V of head s (one weight column at a time, k1 tokens x k2
//           features per cycle) into one half of the Q/K/V buffers, while PE block 4, the
//           softmax unit and PE block 5 work on head s-1 from the other half. These three
//           form a row-granular pipeline in N+2 row slots: PE block 4 forms row r of Q.K^T,
//           the softmax unit normalises row r-1, PE block 5 forms row r-2 of S.V into the SA
//           buffer.
//   CONCAT  PE blocks 1, 2, 3 multiply the SA buffer by three columns of W^msa at a time; the
//           adder unit adds the result to the resident activations (skip connection).
//   LN2     LayerNorm again.
//   MLP     inter-layer schedule. Each PE block works on one hidden unit j: its top k1/2
//           rows form the hidden values of k1/2 tokens from a column of W1, which go through
//           the GELU unit; in the next item its bottom k1/2 rows multiply them by the row j
//           of W2 and hand k2 partial products per row per cycle to the adder unit, which
//           sums the three blocks and accumulates into the staged output sums. The hidden
//           layer is never stored.
//   FINAL   the adder unit adds bias, requantises the staged sums and adds the skip.
//
// What follows the paper: the buffers and PE blocks of its block diagram, the PE block
// structure, k1 x k2 = 16 x 6 and k3 x k4 = 8 x 4, the head-level and row-level pipelines,
// the two-column weight buffers, reuse of PE blocks 1-3 for the MSA projection and the MLP
// with half the rows each for hidden and output layer, int8 data. This design's own choices:
// a separate buffer for the LayerNorm output (so the residual survives), an int32 staging
// buffer for the MLP output sums, requantisation by per-stage power-of-two shifts, the
// weight-stream protocol, the softmax/LayerNorm/GELU arithmetic, no Q/K/V/W^msa biases (the
// paper's equations have none) and MLP biases as configuration inputs.
//
// Interfaces: host access to the activation buffer (only while idle) through hst_* ports,
// K2 elements of one row per access, read data one cycle after the address. Weights arrive on
// the dram_* stream (see weight_loader). Performance counters count cycles, busy cycles of
// the two compute engines and cycles lost waiting for weights.
module vita_top
  import vita_pkg::*;
#(
  parameter int unsigned N  = N_DEF,
  parameter int unsigned D  = D_DEF,
  parameter int unsigned H  = H_DEF,
  parameter int unsigned DH = DH_DEF,
  parameter int unsigned M  = M_DEF,
  parameter int unsigned K1 = K1_DEF,
  parameter int unsigned K2 = K2_DEF,
  parameter int unsigned K3 = K3_DEF,
  parameter int unsigned K4 = K4_DEF,
  parameter int unsigned WB = WBYTES_DEF,
  localparam int unsigned NA = $clog2(N),
  localparam int unsigned DA = $clog2(D)
) (
  input  logic            clk,
  input  logic            rst_n,
  // control
  input  logic            start,
  input  logic [7:0]      layers,
  output logic            busy,
  output logic            done,
  // requantisation shifts
  input  logic [4:0]      sh_qkv,     // Q, K, V accumulators -> int8
  input  logic [4:0]      sh_sm,      // Q.K^T score -> softmax exponent input
  input  logic [4:0]      sh_sv,      // S.V accumulators -> int8
  input  logic [4:0]      sh_o,       // MSA projection -> int8 before the skip add
  input  logic [4:0]      sh_h,       // MLP hidden (after bias) -> int8 Q4 GELU input
  input  logic [4:0]      sh_out,     // MLP output (after bias) -> int8 before the skip add
  // LayerNorm and MLP parameters
  input  int8_t           ln1_gamma [D],
  input  int8_t           ln1_beta  [D],
  input  int8_t           ln2_gamma [D],
  input  int8_t           ln2_beta  [D],
  input  acc_t            mlp_b1    [M],
  input  acc_t            mlp_b2    [D],
  // host access to the activation buffer
  input  logic            hst_we,
  input  logic [NA-1:0]   hst_row,
  input  logic [DA-1:0]   hst_col,
  input  int8_t           hst_wdata [K2],
  output int8_t           hst_rdata [K2],
  // off-chip weight stream
  output logic            dram_req_valid,
  input  logic            dram_req_ready,
  output wkind_e          dram_req_kind,
  output logic [7:0]      dram_req_layer,
  output logic [15:0]     dram_req_index,
  input  logic            dram_rvalid,
  input  logic [WB*8-1:0] dram_rdata,
  // performance counters
  output logic [31:0]     perf_cycles,
  output logic [31:0]     perf_e1_busy,     // PE blocks 1-3 fed with data
  output logic [31:0]     perf_e2_busy,     // PE block 4 or 5 fed with data
  output logic [31:0]     perf_wstall       // waiting for a weight fetch
);

  // ---------------------------------------------------------------------------------------
  // derived sizes
  localparam int unsigned HR    = K1 / 2;       // MLP rows per half
  localparam int unsigned CH    = D / K2;       // k2-chunks in a feature row
  localparam int unsigned NG1   = N / K1;       // token groups, PE blocks 1-3
  localparam int unsigned NGM   = N / HR;       // token groups, MLP
  localparam int unsigned C4    = DH / K4;      // PE4 chunks per score
  localparam int unsigned G4    = N / K3;       // PE4 token groups per row
  localparam int unsigned C5    = N / K4;       // PE5 chunks per output
  localparam int unsigned G5    = DH / K3;      // PE5 column groups per row
  localparam int unsigned NQKV  = H * DH;       // QKV weight steps
  localparam int unsigned NCAT  = D / 3;        // concat weight steps
  localparam int unsigned NJ    = M / 3;        // MLP weight steps
  localparam int unsigned NIT   = NJ * NGM;     // MLP items
  localparam int unsigned HA    = $clog2(2 * DH);

  // ---------------------------------------------------------------------------------------
  // memories
  // activation (Input/MSA) buffer
  logic [NA-1:0] x_rrow [K1];  logic [DA-1:0] x_rcol [K1];  logic [7:0] x_rdat [K1][K2];
  logic [K1-1:0][K2-1:0] x_we; logic [NA-1:0] x_wrow [K1];  logic [DA-1:0] x_wcol [K1];
  logic [7:0] x_wdat [K1][K2];
  vita_mem #(.ROWS(N), .COLS(D), .DW(8), .RP(K1), .RW(K2), .WP(K1), .WW(K2)) u_xmem (
    .clk, .rd_row(x_rrow), .rd_col(x_rcol), .rd_data(x_rdat),
    .wr_en(x_we), .wr_row(x_wrow), .wr_col(x_wcol), .wr_data(x_wdat));

  // LayerNorm output buffer
  logic [NA-1:0] l_rrow [K1];  logic [DA-1:0] l_rcol [K1];  logic [7:0] l_rdat [K1][K2];
  logic [0:0][K2-1:0] l_we;    logic [NA-1:0] l_wrow [1];   logic [DA-1:0] l_wcol [1];
  logic [7:0] l_wdat [1][K2];
  vita_mem #(.ROWS(N), .COLS(D), .DW(8), .RP(K1), .RW(K2), .WP(1), .WW(K2)) u_lnmem (
    .clk, .rd_row(l_rrow), .rd_col(l_rcol), .rd_data(l_rdat),
    .wr_en(l_we), .wr_row(l_wrow), .wr_col(l_wcol), .wr_data(l_wdat));

  // SA results buffer
  logic [NA-1:0] s_rrow [K1];  logic [DA-1:0] s_rcol [K1];  logic [7:0] s_rdat [K1][K2];
  logic [0:0][K3-1:0] s_we;    logic [NA-1:0] s_wrow [1];   logic [DA-1:0] s_wcol [1];
  logic [7:0] s_wdat [1][K3];
  vita_mem #(.ROWS(N), .COLS(D), .DW(8), .RP(K1), .RW(K2), .WP(1), .WW(K3)) u_samem (
    .clk, .rd_row(s_rrow), .rd_col(s_rcol), .rd_data(s_rdat),
    .wr_en(s_we), .wr_row(s_wrow), .wr_col(s_wcol), .wr_data(s_wdat));

  // Q, K, V buffers, stored transposed: row = half*DH + column of the head, col = token
  logic [HA-1:0] q_rrow [K4];  logic [NA-1:0] q_rcol [K4];  logic [7:0] q_rdat [K4][1];
  logic [HA-1:0] k_rrow [K4];  logic [NA-1:0] k_rcol [K4];  logic [7:0] k_rdat [K4][K3];
  logic [HA-1:0] v_rrow [K3];  logic [NA-1:0] v_rcol [K3];  logic [7:0] v_rdat [K3][K4];
  logic [0:0][K1-1:0] qkv_we [3];
  logic [HA-1:0] qkv_wrow [1]; logic [NA-1:0] qkv_wcol [1];
  logic [7:0] qkv_wdat [3][1][K1];
  vita_mem #(.ROWS(2*DH), .COLS(N), .DW(8), .RP(K4), .RW(1), .WP(1), .WW(K1)) u_qmem (
    .clk, .rd_row(q_rrow), .rd_col(q_rcol), .rd_data(q_rdat),
    .wr_en(qkv_we[0]), .wr_row(qkv_wrow), .wr_col(qkv_wcol), .wr_data(qkv_wdat[0]));
  vita_mem #(.ROWS(2*DH), .COLS(N), .DW(8), .RP(K4), .RW(K3), .WP(1), .WW(K1)) u_kmem (
    .clk, .rd_row(k_rrow), .rd_col(k_rcol), .rd_data(k_rdat),
    .wr_en(qkv_we[1]), .wr_row(qkv_wrow), .wr_col(qkv_wcol), .wr_data(qkv_wdat[1]));
  vita_mem #(.ROWS(2*DH), .COLS(N), .DW(8), .RP(K3), .RW(K4), .WP(1), .WW(K1)) u_vmem (
    .clk, .rd_row(v_rrow), .rd_col(v_rcol), .rd_data(v_rdat),
    .wr_en(qkv_we[2]), .wr_row(qkv_wrow), .wr_col(qkv_wcol), .wr_data(qkv_wdat[2]));

  // weight buffers: primary (W^Q / W^K / W^V, or W1 columns), two halves each;
  // secondary (W^msa columns or W2 rows), rows half*3 + block
  logic [0:0] p_rrow [1];  logic [DA-1:0] p_rcol [1];  logic [7:0] p_rdat [3][1][K2];
  logic [2:0] wl_pri_we;   logic wl_pri_row;   logic wl_sec_we;   logic [2:0] wl_sec_row;
  logic [DA-1:0] wl_col;   int8_t wl_data [WB];
  logic [7:0] wl_wdat [1][WB];
  logic [2:0] w_rrow [3];  logic [DA-1:0] w_rcol [3];  logic [7:0] w_rdat [3][K2];
  always_comb for (int b = 0; b < int'(WB); b++) wl_wdat[0][b] = wl_data[b];
  for (genvar b = 0; b < 3; b++) begin : g_wpri
    logic [0:0][WB-1:0] we;
    logic [0:0] wrow [1];
    logic [DA-1:0] wcol [1];
    assign we[0]   = wl_pri_we[b] ? '1 : '0;
    assign wrow[0] = wl_pri_row;
    assign wcol[0] = wl_col;
    vita_mem #(.ROWS(2), .COLS(D), .DW(8), .RP(1), .RW(K2), .WP(1), .WW(WB)) u_wpri (
      .clk, .rd_row(p_rrow), .rd_col(p_rcol), .rd_data(p_rdat[b]),
      .wr_en(we), .wr_row(wrow), .wr_col(wcol), .wr_data(wl_wdat));
  end
  logic [0:0][WB-1:0] wsec_we;
  logic [2:0] wsec_wrow [1];
  logic [DA-1:0] wsec_wcol [1];
  assign wsec_we[0]   = wl_sec_we ? '1 : '0;
  assign wsec_wrow[0] = wl_sec_row;
  assign wsec_wcol[0] = wl_col;
  vita_mem #(.ROWS(6), .COLS(D), .DW(8), .RP(3), .RW(K2), .WP(1), .WW(WB)) u_wsec (
    .clk, .rd_row(w_rrow), .rd_col(w_rcol), .rd_data(w_rdat),
    .wr_en(wsec_we), .wr_row(wsec_wrow), .wr_col(wsec_wcol), .wr_data(wl_wdat));

  // MLP output staging buffer (int32)
  logic [NA-1:0] g_rrow [HR];  logic [DA-1:0] g_rcol [HR];  logic [31:0] g_rdat [HR][K2];
  logic [HR-1:0][K2-1:0] g_we; logic [NA-1:0] g_wrow [HR];  logic [DA-1:0] g_wcol [HR];
  logic [31:0] g_wdat [HR][K2];
  vita_mem #(.ROWS(N), .COLS(D), .DW(32), .RP(HR), .RW(K2), .WP(HR), .WW(K2)) u_stage (
    .clk, .rd_row(g_rrow), .rd_col(g_rcol), .rd_data(g_rdat),
    .wr_en(g_we), .wr_row(g_wrow), .wr_col(g_wcol), .wr_data(g_wdat));

  // ---------------------------------------------------------------------------------------
  // phase control
  typedef enum logic [2:0] {PH_IDLE, PH_LN1, PH_MSA, PH_CAT, PH_LN2, PH_MLP, PH_FIN} phase_e;
  phase_e ph_q;
  logic [7:0] layer_q, nlayers_q;
  logic       ph_enter;      // first cycle of a phase
  logic       ph_done;       // the phase's engines are finished

  // ---------------------------------------------------------------------------------------
  // weight loader
  logic       wl_start, wl_busy, wl_half;
  wkind_e     wl_kind;
  logic [15:0] wl_index;
  weight_loader #(.D(D), .WB(WB)) u_wl (
    .clk, .rst_n, .start(wl_start), .kind(wl_kind), .layer(layer_q), .index(wl_index),
    .half(wl_half), .busy(wl_busy),
    .req_valid(dram_req_valid), .req_ready(dram_req_ready), .req_kind(dram_req_kind),
    .req_layer(dram_req_layer), .req_index(dram_req_index), .rvalid(dram_rvalid),
    .rdata(dram_rdata), .pri_we(wl_pri_we), .pri_row(wl_pri_row), .sec_we(wl_sec_we),
    .sec_row(wl_sec_row), .wr_col(wl_col), .wr_data(wl_data));

  // Weight step bookkeeping: ld_step_q is the last step whose fetch was started in this
  // phase; the fetch has finished when the loader is idle again.
  logic        ld_valid_q;
  logic [15:0] ld_step_q;

  // ---------------------------------------------------------------------------------------
  // LayerNorm unit
  logic ln_start, ln_busy, ln_done;
  logic [NA-1:0] ln_rrow;  logic [DA-1:0] ln_rcol;  int8_t ln_rdat [K2];
  logic [K2-1:0] ln_we;    logic [NA-1:0] ln_wrow;  logic [DA-1:0] ln_wcol;  int8_t ln_wdat [K2];
  int8_t ln_gamma [D], ln_beta [D];
  always_comb
    for (int c = 0; c < int'(D); c++) begin
      ln_gamma[c] = (ph_q == PH_LN2) ? ln2_gamma[c] : ln1_gamma[c];
      ln_beta[c]  = (ph_q == PH_LN2) ? ln2_beta[c]  : ln1_beta[c];
    end
  always_comb for (int k = 0; k < int'(K2); k++) ln_rdat[k] = x_rdat[0][k];
  layernorm_unit #(.N(N), .D(D), .K2(K2)) u_ln (
    .clk, .rst_n, .start(ln_start), .busy(ln_busy), .done(ln_done),
    .gamma(ln_gamma), .beta(ln_beta), .rd_row(ln_rrow), .rd_col(ln_rcol), .rd_data(ln_rdat),
    .wr_en(ln_we), .wr_row(ln_wrow), .wr_col(ln_wcol), .wr_data(ln_wdat));
  assign ln_start = ph_enter && ((ph_q == PH_LN1) || (ph_q == PH_LN2));

  // ---------------------------------------------------------------------------------------
  // Engine 1 (PE blocks 1-3): column engine for QKV and CONCAT, item engine for MLP
  typedef enum logic [2:0] {E1_IDLE, E1_WAIT, E1_RUN, E1_DRAIN, E1_DONE} e1state_e;
  e1state_e e1_q;
  logic [15:0] e1_step_q, e1_last_q;  // current, last and number of steps
  logic [15:0] e1_grp_q;
  logic [15:0] e1_ch_q;
  logic [1:0]  e1_drain_q;
  logic        e1_start;                         // launch for the current phase / head
  logic [15:0] e1_start_step, e1_start_last;
  // MLP item state
  logic [31:0] it_q;                             // item number
  logic [15:0] it_s_q, it_g_q;                   // hidden: weight step, token group
  logic [15:0] pv_s_q, pv_g_q;                   // output: step and group of previous item
  logic        hid_act, out_act;
  int8_t       gv_q  [3][HR];                    // GELU values feeding the output rows
  int8_t       gvn_q [3][HR];                    // GELU values being formed
  logic        wstall;
  // FINAL phase sequencer state
  logic        fin_run_q, fin_v1_q, fin_fin_q;
  logic [15:0] fin_row_q, fin_ch_q, fin_row1_q, fin_ch1_q;

  assign hid_act = (ph_q == PH_MLP) && (it_q < NIT);
  assign out_act = (ph_q == PH_MLP) && (it_q != 0);

  // pipeline tags: stage 1 = memory data / PE input, stage 2 = PE result
  typedef struct packed {
    logic        valid;
    logic        first;
    logic        last;
    logic [15:0] grp;
    logic [15:0] ch;
    logic [15:0] step;
    logic [15:0] pgrp;    // MLP: group of the output rows
    logic [15:0] pstep;   // MLP: step of the output rows
    logic        pact;    // MLP: output rows active
    logic        hact;    // MLP: hidden rows active
  } e1tag_t;
  e1tag_t t0, t1_q, t2_q;

  logic e1_issue;
  assign e1_issue = (e1_q == E1_RUN);

  always_comb begin
    t0        = '0;
    t0.valid  = e1_issue;
    t0.first  = (e1_ch_q == 0);
    t0.last   = (int'(e1_ch_q) == int'(CH) - 1);
    t0.grp    = (ph_q == PH_MLP) ? it_g_q : e1_grp_q;
    t0.ch     = e1_ch_q;
    t0.step   = (ph_q == PH_MLP) ? it_s_q : e1_step_q;
    t0.pgrp   = pv_g_q;
    t0.pstep  = pv_s_q;
    t0.pact   = out_act;
    t0.hact   = hid_act;
  end

  // launch / wait / fetch logic of engine 1
  logic [15:0] e1_nsteps;
  wkind_e      e1_kind;
  always_comb begin
    e1_kind   = (ph_q == PH_MSA) ? WK_QKV : (ph_q == PH_CAT) ? WK_CONCAT : WK_MLP;
    e1_nsteps = (ph_q == PH_MSA) ? 16'(NQKV) : (ph_q == PH_CAT) ? 16'(NCAT) : 16'(NJ);
  end

  // the step that must be resident before issuing, and the one to prefetch
  logic        need_valid, pref_ok;
  logic [15:0] need_step, pref_step;
  always_comb begin
    if (ph_q == PH_MLP) begin
      need_valid = hid_act && (it_g_q == 0);
      need_step  = it_s_q;
      pref_ok    = hid_act && (int'(it_g_q) == 1 || NGM == 1) && (int'(it_s_q) + 1 < int'(NJ));
      pref_step  = it_s_q + 1'b1;
    end else begin
      need_valid = 1'b1;
      need_step  = e1_step_q;
      pref_ok    = (int'(e1_step_q) + 1 < int'(e1_nsteps));
      pref_step  = e1_step_q + 1'b1;
    end
  end

  logic need_ready;
  // the loader works in order, so once the following step has been started this one is in
  assign need_ready = !need_valid ||
                      (ld_valid_q && ((ld_step_q == need_step && !wl_busy) ||
                                      (ld_step_q == need_step + 1'b1)));

  logic [15:0] wl_step;
  always_comb begin
    wl_start = 1'b0;
    wl_step  = '0;
    wl_kind  = e1_kind;
    wl_index = '0;
    wl_half  = 1'b0;
    wstall   = 1'b0;
    if (e1_q == E1_WAIT) begin
      if (!need_ready) begin
        wstall = 1'b1;
        if (!(ld_valid_q && ld_step_q == need_step) && !wl_busy) begin
          wl_start = 1'b1;
          wl_step  = need_step;
          wl_index = (ph_q == PH_MSA) ? need_step : 16'(int'(need_step) * 3);
          wl_half  = need_step[0];
        end
      end else if (pref_ok && !(ld_valid_q && ld_step_q == pref_step) && !wl_busy) begin
        wl_start = 1'b1;
        wl_step  = pref_step;
        wl_index = (ph_q == PH_MSA) ? pref_step : 16'(int'(pref_step) * 3);
        wl_half  = pref_step[0];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ld_valid_q <= 1'b0; ld_step_q <= '0;
    end else if (ph_enter) begin
      ld_valid_q <= 1'b0;
    end else if (wl_start) begin
      ld_valid_q <= 1'b1; ld_step_q <= wl_step;
    end
  end

  // engine-1 sequencer
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      e1_q <= E1_IDLE; e1_step_q <= '0; e1_last_q <= '0; e1_grp_q <= '0;
      e1_ch_q <= '0; e1_drain_q <= '0; it_q <= '0; it_s_q <= '0; it_g_q <= '0;
      pv_s_q <= '0; pv_g_q <= '0;
      for (int b = 0; b < 3; b++)
        for (int a = 0; a < int'(HR); a++) begin gv_q[b][a] <= '0; end
    end else begin
      unique case (e1_q)
        E1_IDLE, E1_DONE: if (e1_start) begin
          e1_step_q <= e1_start_step; e1_last_q <= e1_start_last;
          e1_grp_q <= '0; e1_ch_q <= '0; it_q <= '0; it_s_q <= '0; it_g_q <= '0;
          e1_q <= E1_WAIT;
        end
        E1_WAIT: if (need_ready && !wl_start) e1_q <= E1_RUN;
        E1_RUN: begin
          if (int'(e1_ch_q) == int'(CH) - 1) begin
            e1_ch_q <= '0;
            if (ph_q == PH_MLP || int'(e1_grp_q) == int'(NG1) - 1) begin
              e1_grp_q   <= '0;
              e1_drain_q <= '0;
              e1_q       <= E1_DRAIN;
            end else begin
              e1_grp_q <= e1_grp_q + 1'b1;
            end
          end else begin
            e1_ch_q <= e1_ch_q + 1'b1;
          end
        end
        E1_DRAIN: begin
          e1_drain_q <= e1_drain_q + 1'b1;
          if (e1_drain_q == 2'd2) begin
            if (ph_q == PH_MLP) begin
              // advance the item: hidden group / step, previous item for the output rows
              gv_q   <= gvn_q;
              pv_s_q <= it_s_q;
              pv_g_q <= it_g_q;
              it_q   <= it_q + 1'b1;
              if (int'(it_g_q) == int'(NGM) - 1) begin
                it_g_q <= '0; it_s_q <= it_s_q + 1'b1;
              end else begin
                it_g_q <= it_g_q + 1'b1;
              end
              e1_q <= (it_q == NIT) ? E1_DONE : E1_WAIT;
            end else if (e1_step_q == e1_last_q) begin
              e1_q <= E1_DONE;
            end else begin
              e1_step_q <= e1_step_q + 1'b1;
              e1_q <= E1_WAIT;
            end
          end
        end
        default: e1_q <= E1_IDLE;
      endcase
    end
  end

  // ---------------------------------------------------------------------------------------
  // Engine 1 datapath
  int8_t pe_in  [3][K1][K2];
  int8_t pe_wlo [3][K2];
  int8_t pe_whi [3][K2];
  acc_t  pe_acc [3][K1];
  int16_t pe_prod [3][K1][K2];

  // stage-0 read addresses
  always_comb begin
    for (int a = 0; a < int'(K1); a++) begin
      l_rrow[a] = '0; l_rcol[a] = '0; s_rrow[a] = '0; s_rcol[a] = '0;
    end
    p_rrow[0] = '0; p_rcol[0] = '0;
    for (int b = 0; b < 3; b++) begin w_rrow[b] = '0; w_rcol[b] = '0; end
    if (ph_q == PH_MSA || ph_q == PH_MLP) begin
      for (int a = 0; a < int'(K1); a++) begin
        l_rrow[a] = (ph_q == PH_MLP) ? NA'(int'(t0.grp) * int'(HR) + (a % int'(HR)))
                                     : NA'(int'(t0.grp) * int'(K1) + a);
        l_rcol[a] = DA'(int'(t0.ch) * int'(K2));
      end
    end
    if (ph_q == PH_CAT)
      for (int a = 0; a < int'(K1); a++) begin
        s_rrow[a] = NA'(int'(t0.grp) * int'(K1) + a);
        s_rcol[a] = DA'(int'(t0.ch) * int'(K2));
      end
    p_rrow[0] = t0.step[0];
    p_rcol[0] = DA'(int'(t0.ch) * int'(K2));
    for (int b = 0; b < 3; b++) begin
      w_rrow[b] = (ph_q == PH_MLP) ? 3'(int'(t0.pstep[0]) * 3 + b) : 3'(int'(t0.step[0]) * 3 + b);
      w_rcol[b] = DA'(int'(t0.ch) * int'(K2));
    end
  end

  // stage-1 PE inputs
  always_comb begin
    for (int b = 0; b < 3; b++) begin
      for (int k = 0; k < int'(K2); k++) begin
        pe_wlo[b][k] = (ph_q == PH_CAT) ? int8_t'(w_rdat[b][k]) : int8_t'(p_rdat[b][0][k]);
        pe_whi[b][k] = int8_t'(w_rdat[b][k]);
      end
      for (int a = 0; a < int'(K1); a++)
        for (int k = 0; k < int'(K2); k++) begin
          if (ph_q == PH_CAT)                        pe_in[b][a][k] = int8_t'(s_rdat[a][k]);
          else if (ph_q == PH_MLP && a >= int'(HR))  pe_in[b][a][k] = gv_q[b][a - int'(HR)];
          else                                       pe_in[b][a][k] = int8_t'(l_rdat[a][k]);
        end
    end
  end

  for (genvar b = 0; b < 3; b++) begin : g_pe13
    pe_block #(.A(K1), .B(K2)) u_pe (
      .clk, .rst_n, .in_valid(t1_q.valid), .first(t1_q.first), .split(ph_q == PH_MLP),
      .in_data(pe_in[b]), .w_lo(pe_wlo[b]), .w_hi(pe_whi[b]),
      .acc_q(pe_acc[b]), .prod_q(pe_prod[b]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      t1_q <= '0; t2_q <= '0;
    end else begin
      t1_q <= t0;
      t2_q <= t1_q;
    end
  end

  // stage-2: QKV results -> Q/K/V buffers (half = head parity)
  logic [15:0] qkv_head, qkv_col;
  always_comb begin
    qkv_head = 16'(int'(t2_q.step) / int'(DH));
    qkv_col  = 16'(int'(t2_q.step) % int'(DH));
    qkv_wrow[0] = HA'(int'(qkv_head[0]) * int'(DH) + int'(qkv_col));
    qkv_wcol[0] = NA'(int'(t2_q.grp) * int'(K1));
    for (int b = 0; b < 3; b++) begin
      qkv_we[b] = (ph_q == PH_MSA && t2_q.valid && t2_q.last) ? '1 : '0;
      for (int a = 0; a < int'(K1); a++) qkv_wdat[b][0][a] = requant8(40'(pe_acc[b][a]), sh_qkv);
    end
  end

  // stage-2: MSA projection results, residual add over three cycles (one block per cycle)
  acc_t        cat_res_q [3][K1];
  logic [1:0]  cat_k_q;           // block being read (0..2), 3 = idle
  logic        cat_rv_q;          // read data of block cat_kr_q valid
  logic [1:0]  cat_kr_q;
  logic [15:0] cat_grp_q, cat_step_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cat_k_q <= 2'd3; cat_rv_q <= 1'b0; cat_kr_q <= '0; cat_grp_q <= '0; cat_step_q <= '0;
    end else begin
      cat_rv_q <= (cat_k_q != 2'd3);
      cat_kr_q <= cat_k_q;
      if (ph_q == PH_CAT && t2_q.valid && t2_q.last) begin
        for (int b = 0; b < 3; b++)
          for (int a = 0; a < int'(K1); a++) cat_res_q[b][a] <= pe_acc[b][a];
        cat_grp_q <= t2_q.grp; cat_step_q <= t2_q.step; cat_k_q <= 2'd0;
      end else if (cat_k_q != 2'd3) begin
        cat_k_q <= cat_k_q + 1'b1;
      end
    end
  end

  // stage 1 of the MLP output path: staging-buffer reads for the output rows
  always_comb begin
    for (int a = 0; a < int'(HR); a++) begin
      g_rrow[a] = NA'(int'(t1_q.pgrp) * int'(HR) + a);
      g_rcol[a] = DA'(int'(t1_q.ch) * int'(K2));
    end
    if (ph_q == PH_FIN) begin     // FINAL reads the staged sums on port 0
      g_rrow[0] = NA'(fin_row_q);
      g_rcol[0] = DA'(int'(fin_ch_q) * int'(K2));
    end
  end

  // adder unit
  localparam int unsigned AL = HR * K2;
  acc_t  ad_acc [AL], ad_p0 [AL], ad_p1 [AL], ad_p2 [AL], ad_sum [AL];
  acc_t  ad_v [AL], ad_bias [AL];
  int8_t ad_x [AL], ad_res [AL];
  logic  ad_first;
  logic [4:0] ad_shift;
  adder_unit #(.LANES(AL)) u_add (
    .first(ad_first), .acc_in(ad_acc), .p0(ad_p0), .p1(ad_p1), .p2(ad_p2), .sum_out(ad_sum),
    .v_in(ad_v), .bias(ad_bias), .x_in(ad_x), .shift(ad_shift), .res_out(ad_res));

  // FINAL phase sequencer: one k2-chunk of one row per cycle
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fin_run_q <= 1'b0; fin_v1_q <= 1'b0; fin_row_q <= '0; fin_ch_q <= '0;
      fin_row1_q <= '0; fin_ch1_q <= '0; fin_fin_q <= 1'b0;
    end else begin
      fin_v1_q   <= fin_run_q;
      fin_row1_q <= fin_row_q;
      fin_ch1_q  <= fin_ch_q;
      fin_fin_q  <= 1'b0;
      if (ph_enter && ph_q == PH_FIN) begin
        fin_run_q <= 1'b1; fin_row_q <= '0; fin_ch_q <= '0;
      end else if (fin_run_q) begin
        if (int'(fin_ch_q) == int'(CH) - 1) begin
          fin_ch_q <= '0;
          if (int'(fin_row_q) == int'(N) - 1) fin_run_q <= 1'b0;
          else                                fin_row_q <= fin_row_q + 1'b1;
        end else begin
          fin_ch_q <= fin_ch_q + 1'b1;
        end
      end
      if (fin_v1_q && !fin_run_q) fin_fin_q <= 1'b1;
    end
  end

  // adder inputs and the writes of the activation and staging buffers
  always_comb begin
    ad_first = (t2_q.pstep == 0);
    ad_shift = (ph_q == PH_CAT) ? sh_o : sh_out;
    for (int l = 0; l < int'(AL); l++) begin
      ad_acc[l] = '0; ad_p0[l] = '0; ad_p1[l] = '0; ad_p2[l] = '0;
      ad_v[l] = '0; ad_bias[l] = '0; ad_x[l] = '0;
    end
    // MLP partial products: lane = a*K2 + k
    for (int a = 0; a < int'(HR); a++)
      for (int k = 0; k < int'(K2); k++) begin
        ad_acc[a*K2+k] = acc_t'(g_rdat[a][k]);
        ad_p0[a*K2+k]  = acc_t'(pe_prod[0][int'(HR) + a][k]);
        ad_p1[a*K2+k]  = acc_t'(pe_prod[1][int'(HR) + a][k]);
        ad_p2[a*K2+k]  = acc_t'(pe_prod[2][int'(HR) + a][k]);
      end
    if (ph_q == PH_CAT) begin
      for (int a = 0; a < int'(K1) && a < int'(AL); a++) begin
        ad_v[a] = cat_res_q[cat_kr_q][a];
        ad_x[a] = int8_t'(x_rdat[a][0]);
      end
    end else begin
      for (int k = 0; k < int'(K2); k++) begin
        ad_v[k]    = acc_t'(g_rdat[0][k]);
        ad_bias[k] = mlp_b2[DA'(int'(fin_ch1_q) * int'(K2) + k)];
        ad_x[k]    = int8_t'(x_rdat[0][k]);
      end
    end

    // staging buffer writes
    for (int a = 0; a < int'(HR); a++) begin
      g_we[a]   = (ph_q == PH_MLP && t2_q.valid && t2_q.pact) ? '1 : '0;
      g_wrow[a] = NA'(int'(t2_q.pgrp) * int'(HR) + a);
      g_wcol[a] = DA'(int'(t2_q.ch) * int'(K2));
      for (int k = 0; k < int'(K2); k++) g_wdat[a][k] = ad_sum[a*K2+k];
    end
  end

  // activation buffer ports
  always_comb begin
    for (int a = 0; a < int'(K1); a++) begin
      x_rrow[a] = '0; x_rcol[a] = '0; x_we[a] = '0; x_wrow[a] = '0; x_wcol[a] = '0;
      for (int k = 0; k < int'(K2); k++) x_wdat[a][k] = '0;
    end
    unique case (ph_q)
      PH_IDLE: begin
        x_rrow[0] = hst_row; x_rcol[0] = hst_col;
        x_we[0]   = hst_we ? '1 : '0;
        x_wrow[0] = hst_row; x_wcol[0] = hst_col;
        for (int k = 0; k < int'(K2); k++) x_wdat[0][k] = hst_wdata[k];
      end
      PH_LN1, PH_LN2: begin
        x_rrow[0] = ln_rrow; x_rcol[0] = ln_rcol;
      end
      PH_CAT: begin
        for (int a = 0; a < int'(K1); a++) begin
          x_rrow[a] = NA'(int'(cat_grp_q) * int'(K1) + a);
          x_rcol[a] = DA'(int'(cat_step_q) * 3 + int'(cat_k_q));
          x_we[a][0] = cat_rv_q;
          x_wrow[a] = NA'(int'(cat_grp_q) * int'(K1) + a);
          x_wcol[a] = DA'(int'(cat_step_q) * 3 + int'(cat_kr_q));
          x_wdat[a][0] = ad_res[a];
        end
      end
      PH_FIN: begin
        x_rrow[0] = NA'(fin_row_q); x_rcol[0] = DA'(int'(fin_ch_q) * int'(K2));
        x_we[0]   = fin_v1_q ? '1 : '0;
        x_wrow[0] = NA'(fin_row1_q); x_wcol[0] = DA'(int'(fin_ch1_q) * int'(K2));
        for (int k = 0; k < int'(K2); k++) x_wdat[0][k] = ad_res[k];
      end
      default: ;
    endcase
  end

  always_comb for (int k = 0; k < int'(K2); k++) hst_rdata[k] = int8_t'(x_rdat[0][k]);

  // LayerNorm writes
  always_comb begin
    l_we[0]   = ln_we;
    l_wrow[0] = ln_wrow;
    l_wcol[0] = ln_wcol;
    for (int k = 0; k < int'(K2); k++) l_wdat[0][k] = ln_wdat[k];
  end

  // MLP hidden results: bias, requantise to Q4, GELU
  int8_t gelu_x [3*HR], gelu_y [3*HR];
  gelu_unit #(.LANES(3*HR)) u_gelu (.x(gelu_x), .y(gelu_y));
  always_comb
    for (int b = 0; b < 3; b++)
      for (int a = 0; a < int'(HR); a++)
        gelu_x[b*HR+a] = requant8(40'(pe_acc[b][a]) + 40'(mlp_b1[$clog2(M)'(int'(t2_q.step) * 3 + b)]),
                                  sh_h);
  always_ff @(posedge clk)
    if (ph_q == PH_MLP && t2_q.valid && t2_q.last && t2_q.hact)
      for (int b = 0; b < 3; b++)
        for (int a = 0; a < int'(HR); a++) gvn_q[b][a] <= gelu_y[b*HR+a];

  // ---------------------------------------------------------------------------------------
  // Engine 2: PE block 4, softmax unit, PE block 5, row-granular pipeline for one head
  typedef enum logic [1:0] {E2_IDLE, E2_ROW, E2_DONE} e2state_e;
  e2state_e e2_q;
  logic        e2_start;
  logic [15:0] e2_head_q;
  logic [15:0] e2_r_q;                       // row slot 0..N+1
  logic        p4_run_q, p5_run_q;
  logic [15:0] p4_g_q, p4_c_q, p5_g_q, p5_c_q;
  logic        sm_wait_q;
  logic        p4_d1_q, p4_d2_q, p5_d1_q, p5_d2_q; // drain
  logic        sm_start, sm_busy, sm_done;

  logic e2_slot_done;
  assign e2_slot_done = (e2_q == E2_ROW) && !p4_run_q && !p5_run_q && !sm_wait_q &&
                        !p4_d1_q && !p4_d2_q && !p5_d1_q && !p5_d2_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      e2_q <= E2_IDLE; e2_head_q <= '0; e2_r_q <= '0; p4_run_q <= 1'b0; p5_run_q <= 1'b0;
      p4_g_q <= '0; p4_c_q <= '0; p5_g_q <= '0; p5_c_q <= '0; sm_wait_q <= 1'b0;
    end else begin
      unique case (e2_q)
        E2_IDLE, E2_DONE: if (e2_start) begin
          e2_head_q <= 16'(int'(e1_start_step) / int'(DH)) - 1'b1;
          e2_r_q <= '0;
          p4_run_q <= 1'b1; p4_g_q <= '0; p4_c_q <= '0;
          p5_run_q <= 1'b0; sm_wait_q <= 1'b0;
          e2_q <= E2_ROW;
        end
        E2_ROW: begin
          if (p4_run_q) begin
            if (int'(p4_c_q) == int'(C4) - 1) begin
              p4_c_q <= '0;
              if (int'(p4_g_q) == int'(G4) - 1) begin p4_g_q <= '0; p4_run_q <= 1'b0; end
              else p4_g_q <= p4_g_q + 1'b1;
            end else p4_c_q <= p4_c_q + 1'b1;
          end
          if (p5_run_q) begin
            if (int'(p5_c_q) == int'(C5) - 1) begin
              p5_c_q <= '0;
              if (int'(p5_g_q) == int'(G5) - 1) begin p5_g_q <= '0; p5_run_q <= 1'b0; end
              else p5_g_q <= p5_g_q + 1'b1;
            end else p5_c_q <= p5_c_q + 1'b1;
          end
          if (sm_done) sm_wait_q <= 1'b0;
          if (e2_slot_done) begin
            if (int'(e2_r_q) == int'(N) + 1) begin
              e2_q <= E2_DONE;
            end else begin
              e2_r_q   <= e2_r_q + 1'b1;
              p4_run_q <= (int'(e2_r_q) + 1 < int'(N));
              p5_run_q <= (int'(e2_r_q) + 1 >= 2);
              sm_wait_q <= (int'(e2_r_q) + 1 >= 1) && (int'(e2_r_q) + 1 <= int'(N));
            end
          end
        end
        default: e2_q <= E2_IDLE;
      endcase
    end
  end

  // softmax of row r-1 starts in the first cycle of slot r
  logic e2_slot_first_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) e2_slot_first_q <= 1'b0;
    else        e2_slot_first_q <= (e2_q == E2_ROW) && e2_slot_done && (int'(e2_r_q) != int'(N) + 1);
  end
  assign sm_start = e2_slot_first_q && sm_wait_q;

  logic e2_half;
  assign e2_half = e2_head_q[0];
  logic [15:0] p4_row, p5_row, sm_row;
  assign p4_row = e2_r_q;
  assign sm_row = e2_r_q - 1'b1;
  assign p5_row = e2_r_q - 16'd2;

  // PE4 stage 0: Q (weights) and K (inputs) reads
  always_comb begin
    for (int b = 0; b < int'(K4); b++) begin
      q_rrow[b] = HA'(int'(e2_half) * int'(DH) + int'(p4_c_q) * int'(K4) + b);
      q_rcol[b] = NA'(p4_row);
      k_rrow[b] = HA'(int'(e2_half) * int'(DH) + int'(p4_c_q) * int'(K4) + b);
      k_rcol[b] = NA'(int'(p4_g_q) * int'(K3));
    end
    for (int a = 0; a < int'(K3); a++) begin
      v_rrow[a] = HA'(int'(e2_half) * int'(DH) + int'(p5_g_q) * int'(K3) + a);
      v_rcol[a] = NA'(int'(p5_c_q) * int'(K4));
    end
  end

  logic p4_v1_q, p4_f1_q, p4_l1_q, p4_v2_q, p4_l2_q;
  logic p5_v1_q, p5_f1_q, p5_l1_q, p5_v2_q, p5_l2_q;
  logic [15:0] p4_g1_q, p4_g2_q, p5_g1_q, p5_g2_q, p4_r1_q, p4_r2_q, p5_r1_q, p5_r2_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      {p4_v1_q, p4_f1_q, p4_l1_q, p4_v2_q, p4_l2_q} <= '0;
      {p5_v1_q, p5_f1_q, p5_l1_q, p5_v2_q, p5_l2_q} <= '0;
      p4_g1_q <= '0; p4_g2_q <= '0; p5_g1_q <= '0; p5_g2_q <= '0;
      p4_r1_q <= '0; p4_r2_q <= '0; p5_r1_q <= '0; p5_r2_q <= '0;
      p4_d1_q <= 1'b0; p4_d2_q <= 1'b0; p5_d1_q <= 1'b0; p5_d2_q <= 1'b0;
    end else begin
      p4_v1_q <= p4_run_q && e2_q == E2_ROW;
      p4_f1_q <= (p4_c_q == 0);
      p4_l1_q <= (int'(p4_c_q) == int'(C4) - 1);
      p4_g1_q <= p4_g_q; p4_r1_q <= p4_row;
      p4_v2_q <= p4_v1_q; p4_l2_q <= p4_l1_q; p4_g2_q <= p4_g1_q; p4_r2_q <= p4_r1_q;
      p5_v1_q <= p5_run_q && e2_q == E2_ROW;
      p5_f1_q <= (p5_c_q == 0);
      p5_l1_q <= (int'(p5_c_q) == int'(C5) - 1);
      p5_g1_q <= p5_g_q; p5_r1_q <= p5_row;
      p5_v2_q <= p5_v1_q; p5_l2_q <= p5_l1_q; p5_g2_q <= p5_g1_q; p5_r2_q <= p5_r1_q;
      p4_d1_q <= p4_run_q && e2_q == E2_ROW; p4_d2_q <= p4_d1_q;
      p5_d1_q <= p5_run_q && e2_q == E2_ROW; p5_d2_q <= p5_d1_q;
    end
  end

  int8_t p4_in [K3][K4], p4_w [K4], p5_in [K3][K4], p5_w [K4];
  acc_t  p4_acc [K3], p5_acc [K3];
  int16_t p4_prod [K3][K4], p5_prod [K3][K4];
  int8_t sm_rd [K4];
  always_comb begin
    for (int b = 0; b < int'(K4); b++) begin
      p4_w[b] = int8_t'(q_rdat[b][0]);
      p5_w[b] = sm_rd[b];
      for (int a = 0; a < int'(K3); a++) begin
        p4_in[a][b] = int8_t'(k_rdat[b][a]);
        p5_in[a][b] = int8_t'(v_rdat[a][b]);
      end
    end
  end

  pe_block #(.A(K3), .B(K4)) u_pe4 (
    .clk, .rst_n, .in_valid(p4_v1_q), .first(p4_f1_q), .split(1'b0),
    .in_data(p4_in), .w_lo(p4_w), .w_hi(p4_w), .acc_q(p4_acc), .prod_q(p4_prod));
  pe_block #(.A(K3), .B(K4)) u_pe5 (
    .clk, .rst_n, .in_valid(p5_v1_q), .first(p5_f1_q), .split(1'b0),
    .in_data(p5_in), .w_lo(p5_w), .w_hi(p5_w), .acc_q(p5_acc), .prod_q(p5_prod));

  softmax_unit #(.N(N), .K3(K3), .K4(K4)) u_sm (
    .clk, .rst_n,
    .wr_en(p4_v2_q && p4_l2_q), .wr_bank(p4_r2_q[0]), .wr_idx(NA'(int'(p4_g2_q) * int'(K3))),
    .wr_data(p4_acc),
    .start(sm_start), .src_bank(sm_row[0]), .dst_bank(sm_row[0]), .shift(sh_sm),
    .busy(sm_busy), .done(sm_done),
    .rd_bank(p5_row[0]), .rd_idx(NA'(int'(p5_c_q) * int'(K4))), .rd_data(sm_rd));

  // PE5 results -> SA buffer
  always_comb begin
    s_we[0]   = (p5_v2_q && p5_l2_q) ? '1 : '0;
    s_wrow[0] = NA'(p5_r2_q);
    s_wcol[0] = DA'(int'(e2_head_q) * int'(DH) + int'(p5_g2_q) * int'(K3));
    for (int a = 0; a < int'(K3); a++) s_wdat[0][a] = requant8(40'(p5_acc[a]), sh_sv);
  end

  // ---------------------------------------------------------------------------------------
  // head-slot and phase sequencing
  logic [15:0] slot_q;
  logic        slot_run_q;
  logic        e1_fin, e2_fin;
  assign e1_fin = (e1_q == E1_DONE);
  assign e2_fin = (e2_q == E2_DONE);

  always_comb begin
    e1_start      = 1'b0;
    e2_start      = 1'b0;
    e1_start_step = '0;
    e1_start_last = '0;
    if (ph_q == PH_MSA && !slot_run_q) begin
      e1_start_step = 16'(int'(slot_q) * int'(DH));
      e1_start_last = 16'(int'(slot_q) * int'(DH) + int'(DH) - 1);
      e1_start      = (int'(slot_q) < int'(H));
      e2_start      = (slot_q != 0);
    end else if ((ph_q == PH_CAT || ph_q == PH_MLP) && ph_enter) begin
      e1_start      = 1'b1;
      e1_start_step = '0;
      e1_start_last = (ph_q == PH_CAT) ? 16'(NCAT - 1) : 16'(NJ - 1);
    end
  end

  logic slot_e1_q, slot_e2_q;   // engines active in the current slot
  always_comb begin
    unique case (ph_q)
      PH_LN1, PH_LN2: ph_done = ln_done;
      PH_MSA:         ph_done = slot_run_q && (!slot_e1_q || e1_fin) && (!slot_e2_q || e2_fin)
                                && (int'(slot_q) == int'(H));
      PH_CAT:         ph_done = !ph_enter && e1_fin && cat_k_q == 2'd3 && !cat_rv_q;
      PH_MLP:         ph_done = !ph_enter && e1_fin;
      PH_FIN:         ph_done = fin_fin_q;
      default:        ph_done = 1'b0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ph_q <= PH_IDLE; ph_enter <= 1'b0; layer_q <= '0; nlayers_q <= '0; done <= 1'b0;
      slot_q <= '0; slot_run_q <= 1'b0; slot_e1_q <= 1'b0; slot_e2_q <= 1'b0;
    end else begin
      ph_enter <= 1'b0;
      done     <= 1'b0;
      unique case (ph_q)
        PH_IDLE: if (start && layers != 0) begin
          layer_q <= '0; nlayers_q <= layers; ph_q <= PH_LN1; ph_enter <= 1'b1;
        end
        PH_LN1: if (ph_done) begin
          ph_q <= PH_MSA; ph_enter <= 1'b1; slot_q <= '0; slot_run_q <= 1'b0;
        end
        PH_MSA: begin
          if (!slot_run_q) begin
            slot_run_q <= 1'b1;
            slot_e1_q  <= e1_start;
            slot_e2_q  <= e2_start;
          end else if ((!slot_e1_q || e1_fin) && (!slot_e2_q || e2_fin)) begin
            if (int'(slot_q) == int'(H)) begin
              ph_q <= PH_CAT; ph_enter <= 1'b1;
            end else begin
              slot_q <= slot_q + 1'b1;
              slot_run_q <= 1'b0;
            end
          end
        end
        PH_CAT: if (ph_done) begin ph_q <= PH_LN2; ph_enter <= 1'b1; end
        PH_LN2: if (ph_done) begin ph_q <= PH_MLP; ph_enter <= 1'b1; end
        PH_MLP: if (ph_done) begin ph_q <= PH_FIN; ph_enter <= 1'b1; end
        PH_FIN: if (ph_done) begin
          if (layer_q + 1'b1 == nlayers_q) begin
            ph_q <= PH_IDLE; done <= 1'b1;
          end else begin
            layer_q <= layer_q + 1'b1; ph_q <= PH_LN1; ph_enter <= 1'b1;
          end
        end
        default: ph_q <= PH_IDLE;
      endcase
    end
  end

  assign busy = (ph_q != PH_IDLE);

  // performance counters
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      perf_cycles <= '0; perf_e1_busy <= '0; perf_e2_busy <= '0; perf_wstall <= '0;
    end else if (ph_q == PH_IDLE && start) begin
      perf_cycles <= '0; perf_e1_busy <= '0; perf_e2_busy <= '0; perf_wstall <= '0;
    end else if (busy) begin
      perf_cycles  <= perf_cycles + 1'b1;
      perf_e1_busy <= perf_e1_busy + 32'(t1_q.valid);
      perf_e2_busy <= perf_e2_busy + 32'(p4_v1_q || p5_v1_q);
      perf_wstall  <= perf_wstall + 32'(wstall);
    end
  end

  // ---------------------------------------------------------------------------------------
  // assertions
  // weights are only fetched while engine 1 waits, so a buffer half is never overwritten
  // while its reads are in flight
  a_fetch_in_wait: assert property (@(posedge clk) disable iff (!rst_n)
    wl_start |-> (e1_q == E1_WAIT));
  // the softmax unit never falls behind the row pipeline
  a_sm_in_time: assert property (@(posedge clk) disable iff (!rst_n)
    sm_start |-> !sm_busy);

endmodule

// softmax_unit: row softmax of the attention scores Q.K^T of one head.
//
// The paper places a dedicated softmax module between PE block 4 (Q.K^T) and PE block 5
// (S.V), working one score row at a time so that the three form a row-granular pipeline; it
// does not give the module's insides. This design's implementation:
//
//   * Two score banks of N 32-bit scores. PE block 4 writes row r into one bank (K3 scores per
//     write) while the unit normalises row r-1 from the other; the running maximum of each bank
//     is tracked as it is written (a write with wr_idx == 0 restarts it).
//   * start launches one row: pass 1 (N cycles) forms d = (max - s) >> shift, saturated, and
//     e = 2^(-d/8) in Q16 from an 8-entry table of 2^(-k/8) and a right shift by d/8, and sums
//     e; a sequential divider then forms R = floor(127 * 2^24 / sum) (32 cycles); pass 2
//     (N/K4 cycles) writes p = (e * R) >> 24 into one of two probability banks.
//     A base-2 exponent is used: the factor log2(e) and 1/sqrt(Dh) are folded into shift.
//   * Probabilities are int8 in Q7 (127 ~ 1.0). PE block 5 reads K4 of them per cycle
//     (synchronous, one cycle latency) from the bank it names, while the other bank is filled.
//
// Latency of one row: N + 32 + N/K4 + a few cycles (353 cycles at N = 256, K4 = 4), shorter
// than the N.Dh/(k3.k4) = 512 cycles PE blocks 4 and 5 take per row, so the row pipeline is
// never held up by this unit. done pulses for one cycle when the probabilities are written.
module softmax_unit
  import vita_pkg::*;
#(
  parameter int unsigned N  = N_DEF,
  parameter int unsigned K3 = K3_DEF,
  parameter int unsigned K4 = K4_DEF,
  localparam int unsigned NA = $clog2(N)
) (
  input  logic          clk,
  input  logic          rst_n,
  // score write port (from PE block 4)
  input  logic          wr_en,
  input  logic          wr_bank,
  input  logic [NA-1:0] wr_idx,
  input  acc_t          wr_data [K3],
  // row control
  input  logic          start,
  input  logic          src_bank,
  input  logic          dst_bank,
  input  logic [4:0]    shift,
  output logic          busy,
  output logic          done,
  // probability read port (to PE block 5)
  input  logic          rd_bank,
  input  logic [NA-1:0] rd_idx,
  output int8_t         rd_data [K4]
);

  localparam logic [15:0] EXP_FRAC [8] = '{16'd65535, 16'd60096, 16'd55108, 16'd50534,
                                           16'd46340, 16'd42494, 16'd38967, 16'd35733};

  acc_t        score [2][N];
  acc_t        max_q [2];
  logic [15:0] ebuf  [N];
  int8_t       prob  [2][N];

  typedef enum logic [1:0] {S_IDLE, S_EXP, S_DIV, S_NORM} state_e;
  state_e state_q;

  logic [NA:0]  idx_q;
  logic         src_q, dst_q;
  logic [4:0]   sh_q;
  logic [31:0]  sum_q;
  logic [31:0]  recip_q;

  // running maximum including the scores written this cycle
  acc_t max_n;
  always_comb begin
    max_n = (wr_idx == '0) ? wr_data[0] : max_q[wr_bank];
    for (int k = 0; k < int'(K3); k++)
      if (wr_data[k] > max_n) max_n = wr_data[k];
  end

  // score bank writes and running maxima
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      max_q[0] <= '0;
      max_q[1] <= '0;
    end else if (wr_en) begin
      max_q[wr_bank] <= max_n;
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en)
      for (int k = 0; k < int'(K3); k++)
        if (int'(wr_idx) + k < int'(N)) score[wr_bank][int'(wr_idx) + k] <= wr_data[k];
  end

  // exponent of the current element
  logic [15:0] e_cur;
  always_comb begin
    logic [32:0] diff;
    logic [32:0] d;
    diff  = 33'(max_q[src_q]) - 33'(score[src_q][idx_q[NA-1:0]]);  // >= 0
    d     = diff >> sh_q;
    if (d > 33'd127) e_cur = 16'd0;
    else             e_cur = EXP_FRAC[d[2:0]] >> d[6:3];
  end

  // divider for the reciprocal
  logic        div_start, div_busy, div_done;
  logic [31:0] div_q;
  seq_div #(.W(32)) u_div (
    .clk, .rst_n, .start(div_start), .dividend(32'd127 << 24), .divisor(sum_q),
    .busy(div_busy), .done(div_done), .quotient(div_q)
  );
  assign div_start = (state_q == S_DIV) && !div_busy && !div_done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE; idx_q <= '0; src_q <= 1'b0; dst_q <= 1'b0; sh_q <= '0;
      sum_q <= '0; recip_q <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state_q)
        S_IDLE: if (start) begin
          src_q <= src_bank; dst_q <= dst_bank; sh_q <= shift;
          idx_q <= '0; sum_q <= '0; state_q <= S_EXP;
        end
        S_EXP: begin
          sum_q <= sum_q + 32'(e_cur);
          idx_q <= idx_q + 1'b1;
          if (int'(idx_q) == int'(N) - 1) state_q <= S_DIV;
        end
        S_DIV: if (div_done) begin
          recip_q <= div_q;
          idx_q   <= '0;
          state_q <= S_NORM;
        end
        S_NORM: begin
          idx_q <= idx_q + (NA+1)'(K4);
          if (int'(idx_q) + int'(K4) >= int'(N)) begin
            state_q <= S_IDLE;
            done    <= 1'b1;
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  assign busy = (state_q != S_IDLE);

  // exponent and probability buffers (plain RAM writes, no reset)
  always_ff @(posedge clk) begin
    if (state_q == S_EXP) ebuf[idx_q[NA-1:0]] <= e_cur;
    if (state_q == S_NORM)
      for (int k = 0; k < int'(K4); k++) begin
        logic [47:0] p;
        p = 48'(ebuf[int'(idx_q) + k]) * 48'(recip_q);
        prob[dst_q][int'(idx_q) + k] <= int8_t'(p >> 24);
      end
  end

  always_ff @(posedge clk)
    for (int k = 0; k < int'(K4); k++)
      rd_data[k] <= (int'(rd_idx) + k < int'(N)) ? prob[rd_bank][int'(rd_idx) + k] : 8'sd0;

endmodule

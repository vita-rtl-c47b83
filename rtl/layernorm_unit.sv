// layernorm_unit: LayerNorm over the D features of every token of the resident activations.
//
// The paper includes a dedicated LayerNorm unit next to the Input/MSA buffer but does not
// describe it. This design's implementation normalises all N token rows in turn, each in two
// passes over the row, K2 int8 elements per cycle:
//   pass 1  reads the row and accumulates sum(x) and sum(x^2);
//   stats   mean = round(sum/D) and var = (D*sum(x^2) - sum(x)^2) / D^2 on two sequential
//           dividers, std = max(1, floor(sqrt(var))), inv = floor(2^16 / std);
//   pass 2  reads the row again and writes
//           y = sat8( sat8(round((x - mean) * inv * gamma / 2^18)) + beta ).
// x is int8 (any scale), gamma is int8 in Q6 (64 = 1.0), beta and y are int8 in Q4, so y has
// the scale the GELU unit and the PE blocks expect.
//
// Interface: start runs all N rows, done pulses at the end. The unit drives one read port of
// the source buffer (row/col address, data one cycle later) and one write port of the
// destination buffer. One row takes 2*D/K2 + about 170 cycles.
module layernorm_unit
  import vita_pkg::*;
#(
  parameter int unsigned N  = N_DEF,
  parameter int unsigned D  = D_DEF,
  parameter int unsigned K2 = K2_DEF,
  localparam int unsigned NA = $clog2(N),
  localparam int unsigned DA = $clog2(D)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  output logic           busy,
  output logic           done,
  input  int8_t          gamma [D],
  input  int8_t          beta  [D],
  output logic [NA-1:0]  rd_row,
  output logic [DA-1:0]  rd_col,
  input  int8_t          rd_data [K2],
  output logic [K2-1:0]  wr_en,
  output logic [NA-1:0]  wr_row,
  output logic [DA-1:0]  wr_col,
  output int8_t          wr_data [K2]
);

  localparam int unsigned WORDS = D / K2;

  typedef enum logic [2:0] {L_IDLE, L_P1, L_STAT, L_SQRT, L_INV, L_P2} state_e;
  state_e state_q;

  logic [NA:0]   row_q;
  logic [DA:0]   cnt_q;         // read issue counter within a pass
  logic          rv_q;          // read data valid this cycle
  logic [DA-1:0] rcol_q;        // column of the data now on rd_data
  logic signed [31:0] sum_q;
  logic [31:0]   sq_q;
  logic signed [15:0] mean_q;
  logic [16:0]   inv_q;
  logic          issuing;

  // dividers / square root
  logic        da_start, da_busy, da_done, db_start, db_busy, db_done;
  logic [39:0] da_n, da_d, da_q, db_n, db_d, db_q;
  logic        sq_start, sq_busy, sq_done;
  logic [15:0] sq_root;
  logic [39:0] var_q;

  seq_div #(.W(40)) u_div_a (.clk, .rst_n, .start(da_start), .dividend(da_n), .divisor(da_d),
                             .busy(da_busy), .done(da_done), .quotient(da_q));
  seq_div #(.W(40)) u_div_b (.clk, .rst_n, .start(db_start), .dividend(db_n), .divisor(db_d),
                             .busy(db_busy), .done(db_done), .quotient(db_q));
  seq_isqrt #(.W(32)) u_sqrt (.clk, .rst_n, .start(sq_start), .radicand(var_q[31:0]),
                              .busy(sq_busy), .done(sq_done), .root(sq_root));

  logic [39:0] abs_sum;
  always_comb begin
    abs_sum = sum_q[31] ? 40'(-sum_q) : 40'(sum_q);
    da_n = 40'(D) * 40'(sq_q) - 40'(abs_sum * abs_sum);
    da_d = 40'(D) * 40'(D);
    if (state_q == L_INV) begin
      db_n = 40'd1 << 16;
      db_d = (sq_root == 0) ? 40'd1 : 40'(sq_root);
    end else begin
      db_n = abs_sum + 40'(D / 2);
      db_d = 40'(D);
    end
  end

  logic stat_started, inv_started, a_ok, b_ok;
  assign da_start = (state_q == L_STAT) && !stat_started;
  assign db_start = ((state_q == L_STAT) && !stat_started) || ((state_q == L_INV) && !inv_started);
  assign sq_start = (state_q == L_SQRT) && !sq_busy && !sq_done && !inv_started;

  assign issuing = ((state_q == L_P1) || (state_q == L_P2)) && (int'(cnt_q) < int'(WORDS));
  assign rd_row  = row_q[NA-1:0];
  assign rd_col  = DA'(int'(cnt_q) * int'(K2));

  // running sums of x and x^2 over the K2 features read this cycle
  logic signed [31:0] sum_n;
  logic [31:0]        sq_n;
  always_comb begin
    sum_n = sum_q; sq_n = sq_q;
    for (int k = 0; k < int'(K2); k++) begin
      sum_n = sum_n + 32'(rd_data[k]);
      sq_n  = sq_n + 32'(16'(rd_data[k]) * 16'(rd_data[k]));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= L_IDLE; row_q <= '0; cnt_q <= '0; rv_q <= 1'b0; rcol_q <= '0;
      sum_q <= '0; sq_q <= '0; mean_q <= '0; inv_q <= '0; var_q <= '0;
      stat_started <= 1'b0; inv_started <= 1'b0; a_ok <= 1'b0; b_ok <= 1'b0; done <= 1'b0;
    end else begin
      done   <= 1'b0;
      rv_q   <= issuing;
      rcol_q <= rd_col;
      if (issuing) cnt_q <= cnt_q + 1'b1;
      unique case (state_q)
        L_IDLE: if (start) begin
          row_q <= '0; cnt_q <= '0; sum_q <= '0; sq_q <= '0; state_q <= L_P1;
        end
        L_P1: begin
          if (rv_q) begin
            sum_q <= sum_n; sq_q <= sq_n;
          end
          if (rv_q && !issuing) begin
            state_q <= L_STAT; stat_started <= 1'b0; a_ok <= 1'b0; b_ok <= 1'b0;
          end
        end
        L_STAT: begin
          stat_started <= 1'b1;
          if (da_done) begin a_ok <= 1'b1; var_q <= da_q; end
          if (db_done) begin
            b_ok   <= 1'b1;
            mean_q <= sum_q[31] ? -16'(db_q) : 16'(db_q);
          end
          if ((a_ok || da_done) && (b_ok || db_done)) begin
            state_q <= L_SQRT; inv_started <= 1'b0;
          end
        end
        L_SQRT: if (sq_done) begin
          state_q <= L_INV;
        end
        L_INV: begin
          inv_started <= 1'b1;
          if (db_done) begin
            inv_q <= 17'(db_q);
            cnt_q <= '0;
            state_q <= L_P2;
          end
        end
        L_P2: if (rv_q && !issuing) begin
          if (int'(row_q) == int'(N) - 1) begin
            state_q <= L_IDLE;
            done    <= 1'b1;
          end else begin
            row_q <= row_q + 1'b1; cnt_q <= '0; sum_q <= '0; sq_q <= '0;
            state_q <= L_P1;
          end
        end
        default: state_q <= L_IDLE;
      endcase
    end
  end

  assign busy = (state_q != L_IDLE);

  // pass-2 output datapath
  always_comb begin
    wr_en  = (state_q == L_P2 && rv_q) ? '1 : '0;
    wr_row = row_q[NA-1:0];
    wr_col = rcol_q;
    for (int k = 0; k < int'(K2); k++) begin
      logic signed [47:0] t;
      int c;
      c = int'(rcol_q) + k;
      if (c >= int'(D)) c = int'(D) - 1;
      t = 48'(18'(rd_data[k]) - 18'(mean_q)) * 48'(signed'({1'b0, inv_q})) * 48'(gamma[c]);
      wr_data[k] = sat_add8(requant8(40'(t), 5'd18), beta[c]);
    end
  end

endmodule

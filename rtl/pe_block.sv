// pe_block: one processing-element block of the ViTA array.
//
// A rows of B signed 8x8 multipliers. In every row the B products go through an adder tree
// into a 32-bit accumulator, so one row computes B terms of a dot product per cycle. The B
// weights are shared by the rows; each row has its own B inputs. For PE blocks 1-3 the array
// is A = k1 by B = k2, for PE blocks 4-5 it is A = k3 by B = k4 (this structure follows the
// paper's PE block figure).
//
// Two additions of this design's own, both needed by the MLP schedule in which half of the rows
// compute the hidden layer and half the output layer:
//   * split: rows A/2..A-1 take their weights from w_hi instead of w_lo, so the two halves
//     can work on different weight vectors (hidden-layer column, output-layer row);
//   * prod_q: the individual products of the last valid cycle are registered, so the output
//     half can hand its per-cycle partial products to the adder unit instead of accumulating.
//
// Timing: when in_valid is high, acc_q[a] <= (first ? 0 : acc_q[a]) + sum_b in[a][b]*w[b]
// and prod_q[a][b] <= in[a][b]*w[b], both visible the next cycle. Nothing changes when
// in_valid is low. Reset clears the accumulators.
module pe_block
  import vita_pkg::*;
#(
  parameter int unsigned A = K1_DEF,
  parameter int unsigned B = K2_DEF
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  input  logic   first,                 // start a new accumulation with this cycle's terms
  input  logic   split,                 // rows A/2.. use w_hi
  input  int8_t  in_data [A][B],
  input  int8_t  w_lo    [B],
  input  int8_t  w_hi    [B],
  output acc_t   acc_q   [A],
  output int16_t prod_q  [A][B]
);

  int16_t prod     [A][B];
  acc_t   tree_sum [A];

  always_comb begin
    for (int a = 0; a < A; a++) begin
      tree_sum[a] = '0;
      for (int b = 0; b < B; b++) begin
        prod[a][b] = (split && (a >= A / 2)) ? int16_t'(in_data[a][b]) * int16_t'(w_hi[b])
                                              : int16_t'(in_data[a][b]) * int16_t'(w_lo[b]);
        tree_sum[a] = tree_sum[a] + acc_t'(prod[a][b]);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int a = 0; a < A; a++) begin
        acc_q[a] <= '0;
        for (int b = 0; b < B; b++) prod_q[a][b] <= '0;
      end
    end else if (in_valid) begin
      for (int a = 0; a < A; a++) begin
        acc_q[a] <= (first ? acc_t'(0) : acc_q[a]) + tree_sum[a];
        for (int b = 0; b < B; b++) prod_q[a][b] <= prod[a][b];
      end
    end
  end

endmodule

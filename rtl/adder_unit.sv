// adder_unit: skip connections and partial-sum reduction.
//
// The paper names an adder unit that takes the outputs of PE blocks 1-3 and writes into the
// Input/MSA buffer, and says residual (skip) connections are handled by a dedicated unit; it
// gives no insides. This design gives it two combinational lane-parallel paths:
//
//   sum_out[l] = (first ? 0 : acc_in[l]) + p0[l] + p1[l] + p2[l]
//       adds the per-cycle output-layer partial products of the three PE blocks to the staged
//       MLP output sums (the staging of the paper's inter-layer MLP schedule);
//   res_out[l] = sat8( x_in[l] + sat8(round((v_in[l] + bias[l]) / 2^shift)) )
//       requantises a finished 32-bit result and adds the int8 residual: the skip connection
//       after the MSA projection and after the MLP.
//
// No state, no latency.
module adder_unit
  import vita_pkg::*;
#(
  parameter int unsigned LANES = 48
) (
  input  logic       first,
  input  acc_t       acc_in [LANES],
  input  acc_t       p0     [LANES],
  input  acc_t       p1     [LANES],
  input  acc_t       p2     [LANES],
  output acc_t       sum_out[LANES],
  input  acc_t       v_in   [LANES],
  input  acc_t       bias   [LANES],
  input  int8_t      x_in   [LANES],
  input  logic [4:0] shift,
  output int8_t      res_out[LANES]
);

  always_comb begin
    for (int l = 0; l < int'(LANES); l++) begin
      sum_out[l] = (first ? acc_t'(0) : acc_in[l]) + p0[l] + p1[l] + p2[l];
      res_out[l] = sat_add8(x_in[l], requant8(40'(v_in[l]) + 40'(bias[l]), shift));
    end
  end

endmodule

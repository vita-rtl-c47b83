// tb_adder_unit: self-checking test of adder_unit.
// Random partial products, staged sums, results, biases and residuals, both values of first
// and a range of shifts; both paths are compared with arithmetic done here.
module tb_adder_unit;
  import vita_pkg::*;
  localparam int L = 6;
  logic first;
  acc_t acc_in [L], p0 [L], p1 [L], p2 [L], sum_out [L], v_in [L], bias [L];
  int8_t x_in [L], res_out [L];
  logic [4:0] shift;
  logic clk = 0;
  int checks = 0, failures = 0;
  adder_unit #(.LANES(L)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int it = 0; it < 2000; it++) begin
      first = it[0];
      shift = 5'(it % 12);
      for (int l = 0; l < L; l++) begin
        acc_in[l] = int'($urandom % 2000001) - 1000000;
        p0[l] = int'($urandom % 32769) - 16384;
        p1[l] = int'($urandom % 32769) - 16384;
        p2[l] = int'($urandom % 32769) - 16384;
        v_in[l] = int'($urandom % 200001) - 100000;
        bias[l] = int'($urandom % 2001) - 1000;
        x_in[l] = int8_t'($urandom);
      end
      #1;
      for (int l = 0; l < L; l++) begin
        longint s, r;
        int y;
        s = (first ? 0 : longint'(acc_in[l])) + p0[l] + p1[l] + p2[l];
        checks++;
        if (longint'(sum_out[l]) != s) failures++;
        r = longint'(v_in[l]) + bias[l];
        if (shift != 0) r = (r + (longint'(1) << (shift - 1))) >>> shift;
        if (r > 127) r = 127;
        if (r < -128) r = -128;
        y = int'(r) + x_in[l];
        if (y > 127) y = 127;
        if (y < -128) y = -128;
        checks++;
        if (int'(res_out[l]) != y) begin
          failures++;
          if (failures < 10) $display("res lane %0d: %0d vs %0d", l, res_out[l], y);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_gelu_unit: self-checking test of gelu_unit.
// Sweeps all 256 int8 inputs (Q4) and compares with GELU computed in floating point from the
// tanh form 0.5x(1 + tanh(sqrt(2/pi)(x + 0.044715x^3))). The integer approximation must stay
// within 1 LSB, and the output must be monotonic for x >= 0 and bounded by x.
module tb_gelu_unit;
  import vita_pkg::*;
  localparam int L = 4;
  int8_t x [L], y [L];
  int checks = 0, failures = 0;
  logic clk = 0;
  gelu_unit #(.LANES(L)) dut (.x(x), .y(y));
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  function automatic real gelu_ref(real v);
    real u, t;
    u = 0.7978845608 * (v + 0.044715 * v * v * v);
    t = ($exp(u) - $exp(-u)) / ($exp(u) + $exp(-u));
    return 0.5 * v * (1.0 + t);
  endfunction
  initial begin
    int prev;
    prev = -1000;
    for (int v = -128; v < 128; v += L) begin
      for (int l = 0; l < L; l++) x[l] = int8_t'(v + l);
      #1;
      for (int l = 0; l < L; l++) begin
        real r, err;
        r = gelu_ref(real'(v + l) / 16.0) * 16.0;
        err = real'(y[l]) - r;
        checks++;
        if (err > 1.0 || err < -1.0) begin
          failures++;
          $display("x=%0d y=%0d ref=%f", v + l, y[l], r);
        end
        if (v + l >= 0) begin
          checks++;
          if (int'(y[l]) < prev || int'(y[l]) > v + l) failures++;
          prev = y[l];
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_layernorm_unit: self-checking test of layernorm_unit.
// Serves the unit's reads from a random N x D int8 array (one cycle read latency, like the
// activation buffer), captures its writes, and compares every output with a reference
// LayerNorm computed here: mean = round(sum/D), var = (D*sum(x^2) - sum(x)^2) / D^2,
// std = max(1, isqrt(var)), inv = 2^16 / std,
// y = sat8(sat8(round((x - mean) * inv * gamma / 2^18)) + beta). One row must take no more
// than 2*D/K2 + 200 cycles.
module tb_layernorm_unit;
  import vita_pkg::*;
  localparam int N = 8, D = 24, K2 = 3, NA = $clog2(N), DA = $clog2(D);
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  int8_t gamma [D], beta [D];
  logic [NA-1:0] rd_row, wr_row;
  logic [DA-1:0] rd_col, wr_col;
  int8_t rd_data [K2], wr_data [K2];
  logic [K2-1:0] wr_en;
  int checks = 0, failures = 0;
  int src [N][D], dst [N][D];

  layernorm_unit #(.N(N), .D(D), .K2(K2)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    for (int k = 0; k < K2; k++) rd_data[k] <= int8_t'(src[rd_row][int'(rd_col) + k]);
    for (int k = 0; k < K2; k++) if (wr_en[k]) dst[wr_row][int'(wr_col) + k] <= wr_data[k];
  end

  function automatic int rq(longint v, int sh);
    longint r;
    r = (v + (longint'(1) << (sh - 1))) >>> sh;
    return (r > 127) ? 127 : (r < -128) ? -128 : int'(r);
  endfunction

  initial begin
    int cyc;
    for (int t = 0; t < N; t++)
      for (int c = 0; c < D; c++) begin
        case (t % 4)
          0: src[t][c] = int'($urandom % 256) - 128;
          1: src[t][c] = int'($urandom % 11) - 5 + 40;
          2: src[t][c] = 7;
          default: src[t][c] = int'($urandom % 61) - 30;
        endcase
        dst[t][c] = 0;
      end
    for (int c = 0; c < D; c++) begin
      gamma[c] = int8_t'(int'($urandom % 129) - 32);
      beta[c]  = int8_t'(int'($urandom % 21) - 10);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(posedge clk); cyc++; end
    @(posedge clk);
    checks++;
    if (cyc > N * (2 * D / K2 + 200)) failures++;
    for (int t = 0; t < N; t++) begin
      longint s, q, v, mean;
      int sd, inv;
      s = 0; q = 0;
      for (int c = 0; c < D; c++) begin s += src[t][c]; q += src[t][c] * src[t][c]; end
      v = (D * q - s * s) / (D * D);
      mean = ((s < 0 ? -s : s) + D / 2) / D;
      if (s < 0) mean = -mean;
      sd = 0;
      while ((sd + 1) * (sd + 1) <= v) sd++;
      if (sd == 0) sd = 1;
      inv = 65536 / sd;
      for (int c = 0; c < D; c++) begin
        int y;
        y = rq((longint'(src[t][c]) - mean) * inv * gamma[c], 18) + beta[c];
        y = (y > 127) ? 127 : (y < -128) ? -128 : y;
        checks++;
        if (dst[t][c] != y) begin
          failures++;
          if (failures < 10) $display("y[%0d][%0d] = %0d, expected %0d", t, c, dst[t][c], y);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

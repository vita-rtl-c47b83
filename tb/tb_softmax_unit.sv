// tb_softmax_unit: self-checking test of softmax_unit.
// Writes random score rows into alternating banks (the next row is written while the previous
// one is normalised), runs the unit on each and compares every probability with a reference
// model of the same fixed-point recipe written here: d = (max - s) >> shift,
// e = round(65535 * 2^(-d/8)) by table and shift, R = floor(127 * 2^24 / sum e),
// p = (e * R) >> 24. It also checks the sum of the probabilities against 127 and that a row
// takes no more than N + N/K4 + 40 cycles.
module tb_softmax_unit;
  import vita_pkg::*;
  localparam int N = 16, K3 = 2, K4 = 2, NA = $clog2(N);
  logic clk = 0, rst_n = 0;
  logic wr_en = 0, wr_bank = 0, start = 0, src_bank = 0, dst_bank = 0, rd_bank = 0;
  logic [NA-1:0] wr_idx = '0, rd_idx = '0;
  acc_t wr_data [K3];
  logic [4:0] shift = '0;
  logic busy, done;
  int8_t rd_data [K4];
  int checks = 0, failures = 0;
  int scores [2][N];

  softmax_unit #(.N(N), .K3(K3), .K4(K4)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int exp_ref(int d);
    real v;
    if (d > 127) return 0;
    v = 65535.0 * (2.0 ** (-(d % 8) / 8.0));
    return int'($floor(v + 0.5)) >> (d / 8);
  endfunction

  task automatic write_row(input int bank, input int row_kind);
    for (int i = 0; i < N; i += K3) begin
      @(negedge clk);
      wr_en = 1; wr_bank = bank[0]; wr_idx = NA'(i);
      for (int k = 0; k < K3; k++) begin
        case (row_kind % 3)
          0: scores[bank][i+k] = int'($urandom % 4000) - 2000;
          1: scores[bank][i+k] = int'($urandom % 100000) - 50000;
          default: scores[bank][i+k] = 777;
        endcase
        wr_data[k] = scores[bank][i+k];
      end
    end
    @(negedge clk); wr_en = 0;
  endtask

  task automatic check_row(input int bank, input int sh);
    int mx, sum, e [N], r, psum;
    mx = scores[bank][0];
    for (int i = 0; i < N; i++) if (scores[bank][i] > mx) mx = scores[bank][i];
    sum = 0;
    for (int i = 0; i < N; i++) begin
      e[i] = exp_ref((mx - scores[bank][i]) >> sh);
      sum += e[i];
    end
    r = int'((longint'(127) << 24) / longint'(sum));
    psum = 0;
    for (int i = 0; i < N; i += K4) begin
      @(negedge clk); rd_bank = bank[0]; rd_idx = NA'(i);
      @(posedge clk); #1;
      for (int k = 0; k < K4; k++) begin
        int p;
        p = int'((longint'(e[i+k]) * longint'(r)) >> 24);
        psum += rd_data[k];
        checks++;
        if (int'(rd_data[k]) != p) begin
          failures++;
          $display("prob mismatch bank %0d idx %0d: %0d vs %0d", bank, i + k, rd_data[k], p);
        end
      end
    end
    checks++;
    if (psum > 127 || psum < 127 - N) begin
      failures++;
      $display("probability sum %0d", psum);
    end
  endtask

  initial begin
    for (int k = 0; k < K3; k++) wr_data[k] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    write_row(0, 0);
    for (int row = 0; row < 12; row++) begin
      int b, cyc, sh;
      b = row % 2;
      sh = (row % 3 == 1) ? 8 : 3;
      @(negedge clk);
      start = 1; src_bank = b[0]; dst_bank = b[0]; shift = 5'(sh);
      @(negedge clk); start = 0;
      fork
        write_row(1 - b, row + 1);
      join_none
      cyc = 1;
      while (!done) begin @(posedge clk); cyc++; end
      checks++;
      if (cyc > N + N / K4 + 40) begin
        failures++;
        $display("row took %0d cycles", cyc);
      end
      wait fork;
      check_row(b, sh);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

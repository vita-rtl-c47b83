// tb_pe_block: self-checking test of pe_block.
// Drives random int8 inputs and weights over accumulation runs of random length, with and
// without the split weight mode, and compares accumulators and products with a reference
// computed here. Each accumulated term must appear one cycle after it was presented.
module tb_pe_block;
  import vita_pkg::*;
  localparam int A = 4, B = 3;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, first = 0, split = 0;
  int8_t in_data [A][B];
  int8_t w_lo [B], w_hi [B];
  acc_t acc_q [A];
  int16_t prod_q [A][B];
  int checks = 0, failures = 0;
  longint ref_acc [A];
  int ref_prod [A][B];

  pe_block #(.A(A), .B(B)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < A; a++) begin
      ref_acc[a] = 0;
      for (int b = 0; b < B; b++) in_data[a][b] = '0;
    end
    for (int b = 0; b < B; b++) begin w_lo[b] = '0; w_hi[b] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < 200; run++) begin
      int len;
      len = 1 + ($urandom % 9);
      split = run[0];
      for (int t = 0; t < len; t++) begin
        @(negedge clk);
        in_valid = ($urandom % 4) != 0 || t == 0;
        first = (t == 0);
        for (int b = 0; b < B; b++) begin
          w_lo[b] = int8_t'($urandom);
          w_hi[b] = int8_t'($urandom);
        end
        for (int a = 0; a < A; a++)
          for (int b = 0; b < B; b++) in_data[a][b] = int8_t'($urandom);
        if (run % 17 == 3) for (int a = 0; a < A; a++) in_data[a][0] = -8'sd128;
        if (in_valid) begin
          for (int a = 0; a < A; a++) begin
            if (first) ref_acc[a] = 0;
            for (int b = 0; b < B; b++) begin
              int w;
              w = (split && a >= A / 2) ? int'(w_hi[b]) : int'(w_lo[b]);
              ref_prod[a][b] = int'(in_data[a][b]) * w;
              ref_acc[a] += ref_prod[a][b];
            end
          end
        end
        @(posedge clk); #1;
        for (int a = 0; a < A; a++) begin
          checks++;
          if (longint'(acc_q[a]) != ref_acc[a]) begin
            failures++;
            $display("acc mismatch run %0d row %0d: %0d vs %0d", run, a, acc_q[a], ref_acc[a]);
          end
          if (in_valid)
            for (int b = 0; b < B; b++) begin
              checks++;
              if (int'(prod_q[a][b]) != ref_prod[a][b]) failures++;
            end
        end
      end
    end
    in_valid = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

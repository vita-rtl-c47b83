// tb_vita_mem: self-checking test of vita_mem.
// Random multi-port writes with per-element enables and random multi-port reads, including
// reads that run past the end of a row; read data is compared, one cycle after the address,
// with a shadow array kept here.
module tb_vita_mem;
  localparam int ROWS = 8, COLS = 12, DW = 8, RP = 3, RW = 4, WP = 2, WW = 3;
  localparam int RA = $clog2(ROWS), CA = $clog2(COLS);
  logic clk = 0;
  logic [RA-1:0] rd_row [RP];
  logic [CA-1:0] rd_col [RP];
  logic [DW-1:0] rd_data [RP][RW];
  logic [WP-1:0][WW-1:0] wr_en;
  logic [RA-1:0] wr_row [WP];
  logic [CA-1:0] wr_col [WP];
  logic [DW-1:0] wr_data [WP][WW];
  int shadow [ROWS][COLS];
  int expect_q [RP][RW];
  int checks = 0, failures = 0;
  vita_mem #(.ROWS(ROWS), .COLS(COLS), .DW(DW), .RP(RP), .RW(RW), .WP(WP), .WW(WW)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    // fill
    wr_en = '0;
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c += WW) begin
        @(negedge clk);
        wr_en = '0; wr_en[0] = '1; wr_row[0] = RA'(r); wr_col[0] = CA'(c);
        wr_row[1] = '0; wr_col[1] = '0;
        for (int e = 0; e < WW; e++) begin
          wr_data[0][e] = DW'($urandom); shadow[r][c + e] = wr_data[0][e];
          wr_data[1][e] = '0;
        end
      end
    for (int it = 0; it < 3000; it++) begin
      @(negedge clk);
      // compare the reads issued last cycle
      if (it > 0)
        for (int p = 0; p < RP; p++)
          for (int e = 0; e < RW; e++) begin
            checks++;
            if (int'(rd_data[p][e]) != expect_q[p][e]) failures++;
          end
      wr_en = '0;
      for (int p = 0; p < RP; p++) begin
        rd_row[p] = RA'($urandom % ROWS);
        rd_col[p] = CA'($urandom % COLS);
        for (int e = 0; e < RW; e++)
          expect_q[p][e] = (int'(rd_col[p]) + e < COLS) ? shadow[rd_row[p]][int'(rd_col[p]) + e] : 0;
      end
      for (int p = 0; p < WP; p++) begin
        wr_row[p] = RA'($urandom % ROWS);
        wr_col[p] = CA'((p * 6 + ($urandom % 3)) % COLS);
        for (int e = 0; e < WW; e++) begin
          wr_en[p][e] = $urandom % 2;
          wr_data[p][e] = DW'($urandom);
        end
      end
      // writes land at the next edge, after this cycle's reads
      for (int p = 0; p < WP; p++)
        for (int e = 0; e < WW; e++)
          if (wr_en[p][e] && int'(wr_col[p]) + e < COLS) shadow[wr_row[p]][int'(wr_col[p]) + e] = wr_data[p][e];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

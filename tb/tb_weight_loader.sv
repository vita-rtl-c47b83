// tb_weight_loader: self-checking test of weight_loader.
// Issues random requests of all three kinds and both halves; a memory model here answers
// the handshake after a random delay and streams the words with random gaps. Every buffer
// write is checked against the expected target (buffer, row, column) and the data is
// checked against the word that was sent; the number of writes per request is checked too.
module tb_weight_loader;
  import vita_pkg::*;
  localparam int D = 24, WB = 4, DA = $clog2(D), WPV = D / WB;
  logic clk = 0, rst_n = 0;
  logic start, half, busy, req_valid, req_ready, rvalid;
  wkind_e kind, req_kind;
  logic [7:0] layer, req_layer;
  logic [15:0] index, req_index;
  logic [WB*8-1:0] rdata;
  logic [2:0] pri_we;
  logic pri_row, sec_we;
  logic [2:0] sec_row;
  logic [DA-1:0] wr_col;
  int8_t wr_data [WB];
  int checks = 0, failures = 0;
  int nwr;
  // expected target of the word currently presented
  int exp_pri, exp_row, exp_col;
  logic exp_sec;
  logic [WB*8-1:0] exp_data;
  weight_loader #(.D(D), .WB(WB)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  // check every write at the clock edge
  always @(posedge clk) if (rst_n && (pri_we != 0 || sec_we)) begin
    nwr++;
    checks++;
    if (exp_sec ? (!sec_we || pri_we != 0 || int'(sec_row) != exp_row)
                : (sec_we || pri_we != 3'(1 << exp_pri) || int'(pri_row) != exp_row)) failures++;
    checks++;
    if (int'(wr_col) != exp_col) failures++;
    for (int b = 0; b < WB; b++) begin
      checks++;
      if (wr_data[b] != exp_data[8*b +: 8]) failures++;
    end
  end
  initial begin
    start = 0; req_ready = 0; rvalid = 0; rdata = '0; kind = WK_QKV; layer = '0; index = '0; half = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int it = 0; it < 300; it++) begin
      int nv;
      @(posedge clk); #1;
      kind = wkind_e'($urandom % 3); layer = 8'($urandom); index = 16'($urandom); half = $urandom % 2;
      start = 1;
      @(posedge clk); #1;
      start = 0;
      checks++;
      if (!busy) failures++;
      while (($urandom % 4) != 0) begin @(posedge clk); #1; end
      checks++;
      if (!req_valid || req_kind != kind || req_layer != layer || req_index != index) failures++;
      req_ready = 1;
      @(posedge clk); #1;
      req_ready = 0;
      nwr = 0;
      nv = (kind == WK_MLP) ? 6 : 3;
      for (int v = 0; v < nv; v++)
        for (int w = 0; w < WPV; w++) begin
          while (($urandom % 3) == 0) begin rvalid = 0; @(posedge clk); #1; end
          exp_sec = (kind == WK_CONCAT) || (kind == WK_MLP && v >= 3);
          exp_pri = v % 3;
          exp_row = exp_sec ? int'(half) * 3 + v % 3 : int'(half);
          exp_col = w * WB;
          exp_data = {$urandom, $urandom};
          rdata = exp_data;
          rvalid = 1;
          @(posedge clk); #1;
          rvalid = 0;
        end
      checks++;
      if (busy || nwr != nv * WPV) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// seq_isqrt: integer square root, one result bit per cycle (digit-by-digit method).
//
// Helper for the LayerNorm unit. A start pulse loads radicand; done pulses W/2 cycles later
// with root = floor(sqrt(radicand)). W must be even. start is ignored while busy.
// The remainder register is W+2 bits wide so the trial subtraction cannot wrap; its top two
// bits are never read because the remainder itself never exceeds W bits (a lint tool reports
// them as unused).
module seq_isqrt #(
  parameter int unsigned W = 32
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [W-1:0]   radicand,
  output logic           busy,
  output logic           done,
  output logic [W/2-1:0] root
);

  logic [W-1:0]   x_q;      // remaining radicand bits, shifted left two per step
  logic [W+1:0]   rem_q;
  logic [W/2-1:0] root_q;
  logic [$clog2(W)-1:0] cnt_q;
  logic [W+1:0]   rem_n, trial;

  always_comb begin
    rem_n = {rem_q[W-1:0], x_q[W-1:W-2]};  // rem_q never exceeds W bits
    trial = (W+2)'({root_q, 2'b01});
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x_q <= '0; rem_q <= '0; root_q <= '0; cnt_q <= '0; busy <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        x_q <= radicand; rem_q <= '0; root_q <= '0; cnt_q <= '0; busy <= 1'b1;
      end else if (busy) begin
        x_q <= {x_q[W-3:0], 2'b00};
        if (rem_n >= trial) begin
          rem_q  <= rem_n - trial;
          root_q <= {root_q[W/2-2:0], 1'b1};
        end else begin
          rem_q  <= rem_n;
          root_q <= {root_q[W/2-2:0], 1'b0};
        end
        cnt_q <= cnt_q + 1'b1;
        if (int'(cnt_q) == int'(W / 2) - 1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  assign root = root_q;

endmodule

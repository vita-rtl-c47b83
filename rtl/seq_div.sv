// seq_div: unsigned restoring divider, one quotient bit per cycle.
//
// Helper for the softmax and LayerNorm units (their reciprocals and means). A start pulse
// loads dividend and divisor; done pulses W cycles later with quotient = dividend / divisor
// (floor). Division by zero returns all ones. start is ignored while busy.
module seq_div #(
  parameter int unsigned W = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [W-1:0] dividend,
  input  logic [W-1:0] divisor,
  output logic         busy,
  output logic         done,
  output logic [W-1:0] quotient
);

  logic [W-1:0]   rem_q, div_q, quo_q;
  logic [$clog2(W+1)-1:0] cnt_q;
  logic [W:0]     trial;

  always_comb trial = {rem_q[W-1:0], quo_q[W-1]} - {1'b0, div_q};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rem_q <= '0; div_q <= '0; quo_q <= '0; cnt_q <= '0; busy <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        rem_q <= '0;
        div_q <= divisor;
        quo_q <= dividend;
        cnt_q <= '0;
        busy  <= 1'b1;
      end else if (busy) begin
        // shift the next dividend bit into the remainder and try to subtract
        if (!trial[W]) begin
          rem_q <= trial[W-1:0];
          quo_q <= {quo_q[W-2:0], 1'b1};
        end else begin
          rem_q <= {rem_q[W-2:0], quo_q[W-1]};
          quo_q <= {quo_q[W-2:0], 1'b0};
        end
        cnt_q <= cnt_q + 1'b1;
        if (int'(cnt_q) == int'(W) - 1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  assign quotient = quo_q;

endmodule

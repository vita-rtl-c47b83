// weight_loader: fetches weights from off-chip memory into the double-buffered weight BRAMs.
//
// The paper keeps activations on chip and streams weights in on demand, one weight-matrix
// column at a time, into buffers that hold two columns so that the next column is fetched
// while the current one is used. This unit carries out one such fetch per request:
//
//   WK_QKV    (index = global column h*Dh+c): columns of W^Q, W^K, W^V -> primary buffers 0,1,2
//   WK_CONCAT (index = d): columns d, d+1, d+2 of W^msa                -> secondary slots 0,1,2
//   WK_MLP    (index = j): columns j..j+2 of W1 -> primary 0..2, then rows j..j+2 of W2
//                          -> secondary slots 0..2
//
// Each vector is D int8 values sent as D/WB words of WB bytes, element 0 in the low byte.
// The off-chip side is a request handshake (req_valid/req_ready with kind, layer, index)
// followed by the vectors' words in the order above on rvalid/rdata, at most one word per cycle
// and without back-pressure; the word format and handshake are this design's own choice.
// The buffers are written with the half given with the request; the primary buffers have
// rows {half}, the secondary buffer rows {half*3 + slot}. busy stays high from the accepted
// request until the last word is written.
module weight_loader
  import vita_pkg::*;
#(
  parameter int unsigned D  = D_DEF,
  parameter int unsigned WB = WBYTES_DEF,
  localparam int unsigned DA = $clog2(D)
) (
  input  logic           clk,
  input  logic           rst_n,
  // request from the controller
  input  logic           start,
  input  wkind_e         kind,
  input  logic [7:0]     layer,
  input  logic [15:0]    index,
  input  logic           half,
  output logic           busy,
  // off-chip memory
  output logic           req_valid,
  input  logic           req_ready,
  output wkind_e         req_kind,
  output logic [7:0]     req_layer,
  output logic [15:0]    req_index,
  input  logic           rvalid,
  input  logic [WB*8-1:0] rdata,
  // buffer write ports
  output logic [2:0]     pri_we,          // one per primary buffer
  output logic           pri_row,
  output logic           sec_we,
  output logic [2:0]     sec_row,
  output logic [DA-1:0]  wr_col,
  output int8_t          wr_data [WB]
);

  localparam int unsigned WPV = D / WB;   // words per vector

  typedef enum logic [1:0] {W_IDLE, W_REQ, W_DATA} state_e;
  state_e state_q;
  wkind_e kind_q;
  logic   half_q;
  logic [2:0]    vec_q;     // vector number within the request
  logic [DA:0]   word_q;    // word within the vector
  logic [2:0]    nvec;

  assign nvec = (kind_q == WK_MLP) ? 3'd6 : 3'd3;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= W_IDLE; kind_q <= WK_QKV; half_q <= 1'b0; vec_q <= '0; word_q <= '0;
      req_kind <= WK_QKV; req_layer <= '0; req_index <= '0;
    end else begin
      unique case (state_q)
        W_IDLE: if (start) begin
          kind_q <= kind; half_q <= half; vec_q <= '0; word_q <= '0;
          req_kind <= kind; req_layer <= layer; req_index <= index;
          state_q <= W_REQ;
        end
        W_REQ: if (req_ready) state_q <= W_DATA;
        W_DATA: if (rvalid) begin
          if (int'(word_q) == int'(WPV) - 1) begin
            word_q <= '0;
            vec_q  <= vec_q + 1'b1;
            if (vec_q == nvec - 1'b1) state_q <= W_IDLE;
          end else begin
            word_q <= word_q + 1'b1;
          end
        end
        default: state_q <= W_IDLE;
      endcase
    end
  end

  assign busy      = (state_q != W_IDLE);
  assign req_valid = (state_q == W_REQ);

  always_comb begin
    logic to_pri;
    to_pri  = (kind_q == WK_QKV) || ((kind_q == WK_MLP) && (vec_q < 3'd3));
    pri_we  = '0;
    sec_we  = 1'b0;
    pri_row = half_q;
    sec_row = half_q ? 3'd3 + (vec_q % 3'd3) : (vec_q % 3'd3);
    wr_col  = DA'(int'(word_q) * int'(WB));
    if (state_q == W_DATA && rvalid) begin
      if (to_pri) pri_we[2'(vec_q % 3'd3)] = 1'b1;
      else        sec_we = 1'b1;
    end
    for (int b = 0; b < int'(WB); b++) wr_data[b] = rdata[8*b +: 8];
  end

endmodule

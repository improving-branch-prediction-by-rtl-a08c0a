// cnn_predict: Layer-2 ternary inner product and threshold compare.
//
// When the H2P is fetched, the helper multiplies every Layer-1 response in
// the FIFO window by the Layer-2 weight of the same slot and filter and
// sums the products. With ternary codes {sign, value} this needs no
// multiplier:
//   s = S1 ^ S2,  v = V1 & V2,
//   P = popcount(~s & v) - popcount(s & v),
// and the branch is predicted taken when P > t, t being the trained
// normalization folded into one integer. That computation follows the
// paper (its sign combination is read as exclusive-or, the sign of a
// product).
//
// Timing (this design's choice): P and the compare are combinational; the
// prediction and the score are registered, so pred_valid rises exactly one
// cycle after req.
module cnn_predict #(
  parameter int unsigned NUM_FILTERS = cnn_pkg::NUM_FILTERS_DEF,
  parameter int unsigned HIST_LEN    = cnn_pkg::HIST_LEN_DEF,
  parameter int unsigned THRESH_W    = cnn_pkg::THRESH_W_DEF,
  localparam int unsigned NB         = HIST_LEN * NUM_FILTERS,
  localparam int unsigned CW         = $clog2(NB + 1),
  localparam int unsigned SW         = CW + 1
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        req,
  input  logic [2*NB-1:0]             l1_window,
  input  logic [2*NB-1:0]             l2_weights,
  input  logic signed [THRESH_W-1:0]  thresh,
  output logic                        pred_valid,
  output logic                        pred_taken,
  output logic signed [SW-1:0]        score
);

  localparam int unsigned XW = (THRESH_W > SW) ? THRESH_W : SW;

  logic [NB-1:0] l1_s, l1_v, l2_s, l2_v;
  logic [NB-1:0] s_bits, v_bits, pos_bits, neg_bits;
  logic [CW-1:0] pos_cnt, neg_cnt;
  logic signed [SW-1:0] p_val;

  // Split the interleaved {sign, value} codes into sign and value vectors.
  for (genvar k = 0; k < NB; k++) begin : g_split
    assign l1_v[k] = l1_window[2*k];
    assign l1_s[k] = l1_window[2*k+1];
    assign l2_v[k] = l2_weights[2*k];
    assign l2_s[k] = l2_weights[2*k+1];
  end

  always_comb begin
    s_bits   = l1_s ^ l2_s;
    v_bits   = l1_v & l2_v;
    pos_bits = ~s_bits & v_bits;
    neg_bits =  s_bits & v_bits;
  end

  popcount #(.N(NB)) u_pos (.in_bits(pos_bits), .count(pos_cnt));
  popcount #(.N(NB)) u_neg (.in_bits(neg_bits), .count(neg_cnt));

  always_comb begin
    p_val = $signed({1'b0, pos_cnt}) - $signed({1'b0, neg_cnt});
  end

  // The compare is done on sign-extended XW-bit values.
  logic signed [XW-1:0] p_ext, t_ext;
  assign p_ext = XW'(p_val);
  assign t_ext = XW'(thresh);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      pred_valid <= 1'b0;
      pred_taken <= 1'b0;
      score      <= '0;
    end else begin
      pred_valid <= req;
      if (req) begin
        pred_taken <= p_ext > t_ext;
        score      <= p_val;
      end
    end
  end

endmodule

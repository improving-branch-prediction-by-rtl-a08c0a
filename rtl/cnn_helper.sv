// cnn_helper: ternary CNN helper predictor for one hard-to-predict branch.
//
// A helper sits next to the baseline branch predictor and takes over the
// prediction of one static branch (its H2P). It models the global history
// with a two-layer ternary CNN reduced to table lookups and bit logic:
//   1. every fetched conditional branch (br_valid) is hashed to a row of
//      cnn_l1_table, and that row of Layer-1 codes is pushed into
//      cnn_l1_fifo;
//   2. after a misprediction, rb_count wrong-path entries are shifted back
//      off the FIFO;
//   3. when the fetched branch (fetch_valid) is the H2P, cnn_predict forms
//      the ternary inner product of the FIFO window with the Layer-2
//      weights of cnn_l2_store and compares it with the threshold.
// Steps 1-3 follow the paper. The rest is this design's own: the H2P is
// recognised by comparing fetch_ip with an uploaded IP register; for any
// other branch, or before an H2P IP is uploaded, the baseline prediction
// base_pred passes through; helper contents are written through the cfg_*
// upload port (see cnn_pkg::cfg_target_e); reset clears everything except
// the L1 table.
//
// Timing: pred_valid, pred_taken, pred_from_cnn and cnn_score follow
// fetch_valid by one cycle. A push, a rollback and an upload take effect at
// the next edge, so a prediction in the same cycle as a push sees the
// history without that branch.
module cnn_helper #(
  parameter int unsigned P_BITS       = cnn_pkg::P_BITS_DEF,
  parameter int unsigned NUM_FILTERS  = cnn_pkg::NUM_FILTERS_DEF,
  parameter int unsigned HIST_LEN     = cnn_pkg::HIST_LEN_DEF,
  parameter int unsigned IP_W         = cnn_pkg::IP_W_DEF,
  parameter int unsigned THRESH_W     = cnn_pkg::THRESH_W_DEF,
  parameter int unsigned MAX_ROLLBACK = cnn_pkg::MAX_ROLLBACK_DEF,
  localparam int unsigned ENTRY_W     = 2 * NUM_FILTERS,
  localparam int unsigned CFG_W0      = (ENTRY_W > THRESH_W) ? ENTRY_W : THRESH_W,
  localparam int unsigned CFG_W       = (CFG_W0 > IP_W) ? CFG_W0 : IP_W,
  localparam int unsigned RB_W        = $clog2(MAX_ROLLBACK + 1),
  localparam int unsigned SW          = $clog2(HIST_LEN * NUM_FILTERS + 1) + 1
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // Algorithm 1: history update
  input  logic                        br_valid,
  input  logic [IP_W-1:0]             br_ip,
  input  logic                        br_dir,
  // misprediction recovery
  input  logic [RB_W-1:0]             rb_count,
  // prediction request
  input  logic                        fetch_valid,
  input  logic [IP_W-1:0]             fetch_ip,
  input  logic                        base_pred,
  // helper upload
  input  logic                        cfg_valid,
  input  cnn_pkg::cfg_target_e        cfg_target,
  input  logic [15:0]                 cfg_addr,
  input  logic [CFG_W-1:0]            cfg_data,
  // prediction
  output logic                        pred_valid,
  output logic                        pred_taken,
  output logic                        pred_from_cnn,
  output logic signed [SW-1:0]        cnn_score
);

  import cnn_pkg::*;

  localparam int unsigned SLOT_W = (HIST_LEN > 1) ? $clog2(HIST_LEN) : 1;

  // ---- upload decode -------------------------------------------------
  logic tbl_we, l2_we, t_we;
  always_comb begin
    tbl_we = cfg_valid && (cfg_target == CFG_L1_ROW);
    l2_we  = cfg_valid && (cfg_target == CFG_L2_SLOT);
    t_we   = cfg_valid && (cfg_target == CFG_THRESHOLD);
  end

  logic [IP_W-1:0] h2p_ip_q;
  logic            h2p_en_q;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      h2p_ip_q <= '0;
      h2p_en_q <= 1'b0;
    end else if (cfg_valid && (cfg_target == CFG_H2P_IP)) begin
      h2p_ip_q <= cfg_data[IP_W-1:0];
      h2p_en_q <= 1'b1;
    end
  end

  // ---- Layer 1: index, table, FIFO --------------------------------------
  logic [ENTRY_W-1:0]          row;
  logic [HIST_LEN*ENTRY_W-1:0] l1_window;

  cnn_l1_table #(.P_BITS(P_BITS), .NUM_FILTERS(NUM_FILTERS), .IP_W(IP_W)) u_table (
    .clk(clk), .wr_en(tbl_we), .wr_idx(cfg_addr[P_BITS-1:0]),
    .wr_data(cfg_data[ENTRY_W-1:0]), .rd_ip(br_ip), .rd_dir(br_dir),
    .rd_data(row)
  );

  cnn_l1_fifo #(.NUM_FILTERS(NUM_FILTERS), .HIST_LEN(HIST_LEN),
                .MAX_ROLLBACK(MAX_ROLLBACK)) u_fifo (
    .clk(clk), .rst_n(rst_n), .push(br_valid), .push_entry(row),
    .rb_count(rb_count), .window(l1_window)
  );

  // ---- Layer 2: weights, threshold, inner product -----------------------
  logic [HIST_LEN*ENTRY_W-1:0] l2_weights;
  logic signed [THRESH_W-1:0]  thresh;

  cnn_l2_store #(.NUM_FILTERS(NUM_FILTERS), .HIST_LEN(HIST_LEN),
                 .THRESH_W(THRESH_W)) u_l2 (
    .clk(clk), .rst_n(rst_n),
    .w_wr_en(l2_we), .w_wr_slot(cfg_addr[SLOT_W-1:0]), .w_wr_data(cfg_data[ENTRY_W-1:0]),
    .t_wr_en(t_we), .t_wr_data(cfg_data[THRESH_W-1:0]),
    .weights(l2_weights), .thresh(thresh)
  );

  logic is_h2p;
  assign is_h2p = h2p_en_q && (fetch_ip == h2p_ip_q);

  logic cnn_valid, cnn_taken;
  cnn_predict #(.NUM_FILTERS(NUM_FILTERS), .HIST_LEN(HIST_LEN),
                .THRESH_W(THRESH_W)) u_predict (
    .clk(clk), .rst_n(rst_n), .req(fetch_valid && is_h2p),
    .l1_window(l1_window), .l2_weights(l2_weights), .thresh(thresh),
    .pred_valid(cnn_valid), .pred_taken(cnn_taken), .score(cnn_score)
  );

  // ---- helper / baseline selection --------------------------------------
  logic base_q, valid_q;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      valid_q <= 1'b0;
      base_q  <= 1'b0;
    end else begin
      valid_q <= fetch_valid;
      base_q  <= base_pred;
    end
  end

  always_comb begin
    pred_valid    = valid_q;
    pred_from_cnn = cnn_valid;
    pred_taken    = cnn_valid ? cnn_taken : base_q;
  end

  // An H2P IP entry must not be half-uploaded: address ranges of the upload
  // port are checked here.
  a_l2_slot: assert property (@(posedge clk) disable iff (!rst_n)
                              l2_we |-> (cfg_addr < 16'(HIST_LEN)));
  a_tbl_row: assert property (@(posedge clk) disable iff (!rst_n)
                              tbl_we |-> (cfg_addr < 16'(1 << P_BITS)));

endmodule

// cnn_l2_store: Layer-2 weight buffer and threshold register of the helper.
//
// Layer 2 is a single linear filter over all HIST_LEN x m Layer-1 outputs.
// Its ternary weights are held here in the same layout as the FIFO window
// (slot 0 = newest history position, filter j in bits [2j+1:2j] of a
// slot), next to the integer threshold t into which the final
// normalization is folded offline. Both are storage items the paper lists
// for a helper.
//
// This design's own choices: weights are written one slot (2m bits) per
// cycle and the threshold in one cycle through the upload port; the
// threshold is a signed THRESH_W-bit register, 64 bits by default, which is
// the size the paper's 336-byte storage figure leaves for it; reset clears
// weights and threshold. Outputs are registers.
module cnn_l2_store #(
  parameter int unsigned NUM_FILTERS = cnn_pkg::NUM_FILTERS_DEF,
  parameter int unsigned HIST_LEN    = cnn_pkg::HIST_LEN_DEF,
  parameter int unsigned THRESH_W    = cnn_pkg::THRESH_W_DEF,
  localparam int unsigned ENTRY_W    = 2 * NUM_FILTERS,
  localparam int unsigned SLOT_W     = (HIST_LEN > 1) ? $clog2(HIST_LEN) : 1
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        w_wr_en,
  input  logic [SLOT_W-1:0]           w_wr_slot,
  input  logic [ENTRY_W-1:0]          w_wr_data,
  input  logic                        t_wr_en,
  input  logic signed [THRESH_W-1:0]  t_wr_data,
  output logic [HIST_LEN*ENTRY_W-1:0] weights,
  output logic signed [THRESH_W-1:0]  thresh
);

  logic [ENTRY_W-1:0] slot_q [HIST_LEN];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int s = 0; s < HIST_LEN; s++) slot_q[s] <= '0;
      thresh <= '0;
    end else begin
      if (w_wr_en && (w_wr_slot < SLOT_W'(HIST_LEN))) slot_q[w_wr_slot] <= w_wr_data;
      if (t_wr_en) thresh <= t_wr_data;
    end
  end

  for (genvar s = 0; s < HIST_LEN; s++) begin : g_out
    assign weights[s*ENTRY_W +: ENTRY_W] = slot_q[s];
  end

endmodule

// cnn_l1_fifo: FIFO buffer of Layer-1 responses.
//
// With 1-wide convolutions the Layer-1 response of a history position does
// not depend on its neighbours, so it is looked up as soon as the branch is
// fetched and shifted into this buffer: L1 <- (L1 << 2m) | T[idx]. The
// newest entry sits in slot 0 (the least significant 2m bits), slot
// HIST_LEN-1 is the oldest one the predictor sees. When the fetch unit
// rolls back after a misprediction, the wrong-path entries are shifted back
// off. Both operations follow the paper.
//
// This design's own choices: the buffer keeps MAX_ROLLBACK entries beyond
// the visible window, so a rollback of k <= MAX_ROLLBACK entries brings the
// k older entries back into the window exactly; a rollback happens in one
// cycle; rollback is applied before a push in the same cycle; entries that
// were never written read as ternary zero (reset clears the buffer).
//
// Timing: push and rb_count take effect at the next rising clock edge;
// window is a register output.
module cnn_l1_fifo #(
  parameter int unsigned NUM_FILTERS  = cnn_pkg::NUM_FILTERS_DEF,
  parameter int unsigned HIST_LEN     = cnn_pkg::HIST_LEN_DEF,
  parameter int unsigned MAX_ROLLBACK = cnn_pkg::MAX_ROLLBACK_DEF,
  localparam int unsigned ENTRY_W     = 2 * NUM_FILTERS,
  localparam int unsigned RB_W        = $clog2(MAX_ROLLBACK + 1)
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         push,
  input  logic [ENTRY_W-1:0]           push_entry,
  input  logic [RB_W-1:0]              rb_count,
  output logic [HIST_LEN*ENTRY_W-1:0]  window
);

  localparam int unsigned DEPTH = HIST_LEN + MAX_ROLLBACK;

  logic [DEPTH*ENTRY_W-1:0] buf_q, buf_rb, buf_d;

  always_comb begin
    buf_rb = buf_q >> (ENTRY_W * rb_count);
    buf_d  = buf_rb;
    if (push) buf_d = {buf_rb[(DEPTH-1)*ENTRY_W-1:0], push_entry};
  end

  always_ff @(posedge clk) begin
    if (!rst_n) buf_q <= '0;
    else        buf_q <= buf_d;
  end

  assign window = buf_q[HIST_LEN*ENTRY_W-1:0];

  // A rollback may not exceed the retained depth.
  a_rb_range: assert property (@(posedge clk) disable iff (!rst_n)
                               rb_count <= RB_W'(MAX_ROLLBACK));

endmodule

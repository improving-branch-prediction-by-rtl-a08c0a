// tb_cnn_l1_fifo: drives random pushes and rollbacks (including rollbacks
// in the same cycle as a push, rollbacks right after the window has
// overflowed, and the maximum rollback) into the Layer-1 FIFO at its
// default size and compares every slot of the window after each cycle with
// a reference queue of HIST_LEN + MAX_ROLLBACK entries, newest first,
// padded with zeros.
module tb_cnn_l1_fifo;
  localparam int unsigned M = 32, W = 2 * M, HL = 200, MR = 32, DEPTH = HL + MR;
  localparam int unsigned RB_W = $clog2(MR + 1);
  logic clk = 0, rst_n = 0;
  logic push = 0;
  logic [W-1:0] push_entry = '0;
  logic [RB_W-1:0] rb_count = '0;
  logic [HL*W-1:0] window;
  logic [W-1:0] model [DEPTH];
  int checks = 0, failures = 0;
  int n_push = 0, n_rb = 0, n_both = 0, n_rb_max = 0;

  always #5 clk = ~clk;

  cnn_l1_fifo dut (.clk, .rst_n, .push, .push_entry, .rb_count, .window);

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare();
    int bad = 0;
    for (int s = 0; s < HL; s++)
      if (window[s*W +: W] != model[s]) bad++;
    checks++;
    if (bad != 0) begin
      failures++;
      $display("FAIL at %0t: %0d slots differ", $time, bad);
    end
  endtask

  task automatic step(input logic p, input logic [W-1:0] e, input int k);
    @(negedge clk);
    push = p; push_entry = e; rb_count = RB_W'(k);
    @(negedge clk);
    push = 0; rb_count = '0;
    // reference: rollback first, then push
    for (int r = 0; r < k; r++) begin
      for (int s = 0; s < DEPTH - 1; s++) model[s] = model[s+1];
      model[DEPTH-1] = '0;
    end
    if (p) begin
      for (int s = DEPTH - 1; s > 0; s--) model[s] = model[s-1];
      model[0] = e;
    end
    if (p) n_push++;
    if (k > 0) n_rb++;
    if (p && k > 0) n_both++;
    if (k == MR) n_rb_max++;
    compare();
  endtask

  initial begin
    for (int s = 0; s < DEPTH; s++) model[s] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    #1 compare();
    // fill past the window and the retained depth
    for (int n = 0; n < 300; n++) step(1, {$urandom, $urandom}, 0);
    // rollback to bring evicted entries back
    step(0, '0, MR);
    step(0, '0, 5);
    // random mix
    for (int n = 0; n < 1500; n++) begin
      int k;
      k = ($urandom_range(9) == 0) ? $urandom_range(MR) : 0;
      step($urandom_range(3) != 0, {$urandom, $urandom}, k);
    end
    // roll back more than was pushed since reset-level zeros
    repeat (10) step(0, '0, MR);
    if (n_push == 0 || n_rb == 0 || n_both == 0 || n_rb_max == 0) begin
      failures++;
      $display("FAIL coverage push=%0d rb=%0d both=%0d rbmax=%0d", n_push, n_rb, n_both, n_rb_max);
    end
    $display("pushes=%0d rollbacks=%0d push+rollback=%0d max_rollbacks=%0d", n_push, n_rb, n_both, n_rb_max);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

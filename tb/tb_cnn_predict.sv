// tb_cnn_predict: feeds random ternary Layer-1 windows, Layer-2 weights and
// thresholds to the predictor at its default size and checks, one cycle
// after each request, the score P = sum of code products (computed here
// with signed integers, not with the sign/value bit trick) and the
// prediction P > t. Also checks that pred_valid follows req by exactly one
// cycle, and covers the P == t boundary, negative thresholds, all-zero
// windows and every sign combination.
module tb_cnn_predict;
  import cnn_pkg::*;
  localparam int unsigned M = 32, HL = 200, NB = HL * M, TW = 64;
  localparam int unsigned SW = $clog2(NB + 1) + 1;
  logic clk = 0, rst_n = 0, req = 0;
  logic [2*NB-1:0] l1, l2;
  logic signed [TW-1:0] thresh;
  logic pred_valid, pred_taken;
  logic signed [SW-1:0] score;
  int checks = 0, failures = 0;
  int n_taken = 0, n_not = 0, n_equal = 0;

  always #5 clk = ~clk;

  cnn_predict dut (.clk, .rst_n, .req, .l1_window(l1), .l2_weights(l2), .thresh,
                   .pred_valid, .pred_taken, .score);

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [1:0] rand_code(int zero_pct);
    if ($urandom_range(99) < zero_pct) return ($urandom_range(1) == 0) ? 2'b00 : 2'b10;
    return ($urandom_range(1) == 0) ? 2'b01 : 2'b11;
  endfunction

  function automatic int model_score();
    int p = 0;
    for (int k = 0; k < NB; k++) p += tern_value(l1[2*k +: 2]) * tern_value(l2[2*k +: 2]);
    return p;
  endfunction

  task automatic run(input int t_offset, input bit use_offset, input longint t_abs);
    int p;
    longint t;
    @(negedge clk);
    p = model_score();
    t = use_offset ? longint'(p) + longint'(t_offset) : t_abs;
    thresh = t;
    req = 1;
    @(negedge clk);
    req = 0;
    checks++;
    if (!pred_valid) begin failures++; $display("FAIL pred_valid not one cycle after req"); end
    checks++;
    if (int'(score) != p) begin failures++; $display("FAIL score %0d exp %0d", score, p); end
    checks++;
    if (pred_taken != (longint'(p) > t)) begin
      failures++; $display("FAIL pred %0d for P=%0d t=%0d", pred_taken, p, t);
    end
    if (longint'(p) > t) n_taken++; else n_not++;
    if (longint'(p) == t) n_equal++;
    @(negedge clk);
    checks++;
    if (pred_valid) begin failures++; $display("FAIL pred_valid held without req"); end
  endtask

  initial begin
    l1 = '0; l2 = '0; thresh = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // all zero: P = 0
    run(0, 1'b0, 0);
    run(0, 1'b0, -1);
    // exhaustive single-position sign combinations
    for (int a = 0; a < 4; a++)
      for (int b = 0; b < 4; b++) begin
        l1 = '0; l2 = '0;
        l1[1:0] = 2'(a); l2[1:0] = 2'(b);
        run(0, 1'b0, 0);
      end
    // random windows, threshold just below, equal to and above P
    for (int n = 0; n < 60; n++) begin
      int zp;
      zp = $urandom_range(95);
      for (int k = 0; k < NB; k++) begin
        l1[2*k +: 2] = rand_code(zp);
        l2[2*k +: 2] = rand_code(zp);
      end
      run(-1, 1'b1, 0);
      run(0, 1'b1, 0);
      run(1, 1'b1, 0);
      run(0, 1'b0, -longint'($urandom_range(1000)));
    end
    // all products +1 and all products -1 (extremes of P)
    for (int k = 0; k < NB; k++) begin l1[2*k +: 2] = 2'b11; l2[2*k +: 2] = 2'b11; end
    run(-1, 1'b1, 0);
    for (int k = 0; k < NB; k++) l2[2*k +: 2] = 2'b01;
    run(0, 1'b0, -64'sd6400);
    run(0, 1'b0, -64'sd6401);
    if (n_taken == 0 || n_not == 0 || n_equal == 0) begin
      failures++; $display("FAIL coverage");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

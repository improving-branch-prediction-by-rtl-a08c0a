// tb_h2p1_two_filter: the two-filter helper of the illustrative example
// (m = 2, 200 history positions, p = 8: 336 bytes of helper state) on the
// example program, with the loop trip count drawn from 0..14 so that stale
// copies of the correlated branch from earlier calls also reach the 30
// most recent positions.
//
// The program: branch 0x400587 (taken one time in three) decides the H2P
// 0x400634; between them a loop branch 0x40062a (taken = iterate) wraps a
// data-dependent branch 0x4005cd. The helper is hand-built: filter 0 = +1
// on <0x400587, not taken> (row 14), filter 1 = +1 on <0x400587, taken>
// (row 15); Layer-2 weights -1 (filter 0) and +1 (filter 1) over the 30
// most recent positions; t = 0. Every prediction is checked against a
// signed-integer reference of the helper; the fraction of predictions that
// match the correlated branch is reported, not checked, since it depends on
// the weights.
module tb_h2p1_two_filter;
  import cnn_pkg::*;
  localparam int unsigned M = 2, W = 2 * M, HL = 200, MR = 32, DEPTH = HL + MR;
  localparam int unsigned SW = $clog2(HL * M + 1) + 1;
  localparam int unsigned CFG_W = 64;
  localparam logic [63:0] IP_A = 64'h400587, IP_FOR = 64'h40062a,
                          IP_IN = 64'h4005cd, IP_H2P = 64'h400634;

  logic clk = 0, rst_n = 0;
  logic br_valid = 0, br_dir = 0, fetch_valid = 0, base_pred = 0, cfg_valid = 0;
  logic [63:0] br_ip = '0, fetch_ip = '0;
  logic [5:0] rb_count = '0;
  cfg_target_e cfg_target = CFG_L1_ROW;
  logic [15:0] cfg_addr = '0;
  logic [CFG_W-1:0] cfg_data = '0;
  logic pred_valid, pred_taken, pred_from_cnn;
  logic signed [SW-1:0] cnn_score;

  logic [W-1:0] tbl_m [256];
  logic [W-1:0] l2_m [HL];
  logic [W-1:0] fifo_m [DEPTH];
  int checks = 0, failures = 0, correct = 0, preds = 0;

  always #5 clk = ~clk;

  cnn_helper #(.NUM_FILTERS(M)) dut (
    .clk, .rst_n, .br_valid, .br_ip, .br_dir, .rb_count,
    .fetch_valid, .fetch_ip, .base_pred,
    .cfg_valid, .cfg_target, .cfg_addr, .cfg_data,
    .pred_valid, .pred_taken, .pred_from_cnn, .cnn_score
  );

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cfg(input cfg_target_e tg, input int addr, input logic [CFG_W-1:0] d);
    @(negedge clk);
    cfg_valid = 1; cfg_target = tg; cfg_addr = 16'(addr); cfg_data = d;
    @(negedge clk);
    cfg_valid = 0;
  endtask

  task automatic branch(input logic [63:0] ip, input bit dir);
    @(negedge clk);
    br_valid = 1; br_ip = ip; br_dir = dir;
    @(negedge clk);
    br_valid = 0;
    for (int s = DEPTH - 1; s > 0; s--) fifo_m[s] = fifo_m[s-1];
    fifo_m[0] = tbl_m[{ip[6:0], dir}];
  endtask

  initial begin
    for (int s = 0; s < DEPTH; s++) fifo_m[s] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 256; i++) begin
      tbl_m[i] = (i == 14) ? 4'b0011 : (i == 15) ? 4'b1100 : 4'b0000;
      cfg(CFG_L1_ROW, i, CFG_W'(tbl_m[i]));
    end
    for (int s = 0; s < HL; s++) begin
      l2_m[s] = (s < 30) ? 4'b1101 : 4'b0000;
      cfg(CFG_L2_SLOT, s, CFG_W'(l2_m[s]));
    end
    cfg(CFG_THRESHOLD, 0, '0);
    cfg(CFG_H2P_IP, 0, IP_H2P);
    for (int call = 0; call < 400; call++) begin
      bit a_dir, exp_taken;
      int iters, p;
      a_dir = ($urandom_range(2) == 0);
      branch(IP_A, a_dir);
      iters = $urandom_range(14);
      for (int it = 0; it < iters; it++) begin
        branch(IP_FOR, 1);
        branch(IP_IN, 1'($urandom));
      end
      branch(IP_FOR, 0);
      p = 0;
      for (int s = 0; s < HL; s++)
        for (int j = 0; j < M; j++)
          p += tern_value(fifo_m[s][2*j +: 2]) * tern_value(l2_m[s][2*j +: 2]);
      exp_taken = (p > 0);
      @(negedge clk);
      fetch_valid = 1; fetch_ip = IP_H2P; base_pred = 0;
      @(negedge clk);
      fetch_valid = 0;
      checks++;
      if (!pred_valid || !pred_from_cnn || pred_taken != exp_taken || int'(cnn_score) != p) begin
        failures++;
        $display("FAIL call %0d: taken %0d exp %0d score %0d exp %0d", call, pred_taken, exp_taken, cnn_score, p);
      end
      preds++;
      if (pred_taken == a_dir) correct++;
      branch(IP_H2P, a_dir);
    end
    $display("H2P predictions matching the correlated branch: %0d of %0d", correct, preds);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

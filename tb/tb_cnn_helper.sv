// tb_cnn_helper: end-to-end test of one CNN helper at its default size
// (8-bit index, 32 filters, 200 history positions).
//
// Phase 0 checks that, before an H2P IP is uploaded, every prediction is
// the baseline one. The helper is then uploaded through the cfg port.
//
// Phase 1 replays the example program of a hard-to-predict branch H2P-1
// (IP 0x400634) that is exactly correlated with an earlier branch at
// 0x400587, separated by a loop of 10 to 14 iterations (0x40062a, 0x4005cd).
// The uploaded helper is the hand-made ternary equivalent of the trained
// network: filter 0 fires on <0x400587, not taken> (row 14), filter 1 on
// <0x400587, taken> (row 15); Layer-2 weights are -1 on filter 0 and +1 on
// filter 1 over the 30 most recent positions; t = 0. Every H2P prediction
// must equal the direction of the correlated branch. Random codes in the
// other 30 filters, which have zero Layer-2 weights, must not matter.
//
// Phase 2 uploads random tables, weights and thresholds and runs a random
// branch stream with rollbacks after "mispredictions", fetches of the H2P
// and of other branches, and pushes in the same cycle as a fetch.
//
// In both phases every output is compared with a reference model: a copy
// of the uploaded contents and a queue of HIST_LEN + MAX_ROLLBACK entries,
// with the score computed as a signed sum of code products. Each mechanism
// (push, window overflow, rollback, rollback that restores evicted entries,
// rollback with push, helper override, baseline pass-through, taken and
// not-taken CNN predictions, fetch with push, each upload target) is
// counted and must occur at least once.
module tb_cnn_helper;
  import cnn_pkg::*;
  localparam int unsigned P = 8, M = 32, HL = 200, IPW = 64, TW = 64, MR = 32;
  localparam int unsigned W = 2 * M, DEPTH = HL + MR, ROWS = 1 << P;
  localparam int unsigned RB_W = $clog2(MR + 1);
  localparam int unsigned CFG_W = 64;
  localparam int unsigned SW = $clog2(HL * M + 1) + 1;
  localparam logic [63:0] IP_A   = 64'h400587;  // correlated branch
  localparam logic [63:0] IP_FOR = 64'h40062a;  // loop branch
  localparam logic [63:0] IP_IN  = 64'h4005cd;  // branch inside the loop
  localparam logic [63:0] IP_H2P = 64'h400634;  // the H2P

  logic clk = 0, rst_n = 0;
  logic br_valid = 0, br_dir = 0, fetch_valid = 0, base_pred = 0, cfg_valid = 0;
  logic [IPW-1:0] br_ip = '0, fetch_ip = '0;
  logic [RB_W-1:0] rb_count = '0;
  cfg_target_e cfg_target = CFG_L1_ROW;
  logic [15:0] cfg_addr = '0;
  logic [CFG_W-1:0] cfg_data = '0;
  logic pred_valid, pred_taken, pred_from_cnn;
  logic signed [SW-1:0] cnn_score;

  // reference model
  logic [W-1:0] tbl_m [ROWS];
  logic [W-1:0] l2_m [HL];
  logic [W-1:0] fifo_m [DEPTH];
  longint thr_m;
  logic [IPW-1:0] h2p_m;
  bit h2p_en_m;
  int pushes_total;

  int checks = 0, failures = 0;
  // mechanism counters
  int c_push, c_overflow, c_rb, c_rb_restore, c_rb_push, c_override, c_base,
      c_taken, c_not, c_fetch_push, c_cfg_tbl, c_cfg_l2, c_cfg_thr, c_cfg_ip,
      c_disabled;
  int ex_preds = 0, ex_correct = 0;

  always #5 clk = ~clk;

  cnn_helper dut (
    .clk, .rst_n, .br_valid, .br_ip, .br_dir, .rb_count,
    .fetch_valid, .fetch_ip, .base_pred,
    .cfg_valid, .cfg_target, .cfg_addr, .cfg_data,
    .pred_valid, .pred_taken, .pred_from_cnn, .cnn_score
  );

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int model_score();
    int p = 0;
    for (int s = 0; s < HL; s++)
      for (int j = 0; j < M; j++)
        p += tern_value(fifo_m[s][2*j +: 2]) * tern_value(l2_m[s][2*j +: 2]);
    return p;
  endfunction

  function automatic logic [W-1:0] rand_row(int zero_pct);
    logic [W-1:0] r;
    for (int j = 0; j < M; j++) begin
      if ($urandom_range(99) < zero_pct) r[2*j +: 2] = 2'b00;
      else r[2*j +: 2] = ($urandom_range(1) == 0) ? 2'b01 : 2'b11;
    end
    return r;
  endfunction

  task automatic cfg(input cfg_target_e tg, input int addr, input logic [CFG_W-1:0] d);
    @(negedge clk);
    cfg_valid = 1; cfg_target = tg; cfg_addr = 16'(addr); cfg_data = d;
    @(negedge clk);
    cfg_valid = 0;
    case (tg)
      CFG_L1_ROW:    begin tbl_m[addr] = d[W-1:0]; c_cfg_tbl++; end
      CFG_L2_SLOT:   begin l2_m[addr] = d[W-1:0]; c_cfg_l2++; end
      CFG_THRESHOLD: begin thr_m = longint'(d); c_cfg_thr++; end
      default:       begin h2p_m = d; h2p_en_m = 1; c_cfg_ip++; end
    endcase
  endtask

  // One cycle of traffic. Expected outputs are computed from the model
  // state before the cycle's own push and rollback.
  task automatic cycle(input bit push, input logic [63:0] ip, input bit dir, input int rb,
                       input bit fetch, input logic [63:0] fip, input bit base,
                       output bit cnn_used, output bit cnn_dir);
    int p;
    bit hit, exp_taken;
    @(negedge clk);
    br_valid = push; br_ip = ip; br_dir = dir; rb_count = RB_W'(rb);
    fetch_valid = fetch; fetch_ip = fip; base_pred = base;
    hit = fetch && h2p_en_m && (fip == h2p_m);
    p = hit ? model_score() : 0;
    exp_taken = hit ? (longint'(p) > thr_m) : base;
    // model update: rollback, then push
    for (int r = 0; r < rb; r++) begin
      for (int s = 0; s < DEPTH - 1; s++) fifo_m[s] = fifo_m[s+1];
      fifo_m[DEPTH-1] = '0;
    end
    if (rb > 0) begin
      c_rb++;
      if (pushes_total > HL) c_rb_restore++;
      pushes_total -= rb;
      if (pushes_total < 0) pushes_total = 0;
      if (push) c_rb_push++;
    end
    if (push) begin
      for (int s = DEPTH - 1; s > 0; s--) fifo_m[s] = fifo_m[s-1];
      fifo_m[0] = tbl_m[{ip[P-2:0], dir}];
      c_push++;
      pushes_total++;
      if (pushes_total > HL) c_overflow++;
      if (fetch) c_fetch_push++;
    end
    @(negedge clk);
    br_valid = 0; fetch_valid = 0; rb_count = '0;
    cnn_used = hit; cnn_dir = exp_taken;
    if (fetch) begin
      checks++;
      if (!pred_valid || pred_from_cnn != hit || pred_taken != exp_taken ||
          (hit && int'(cnn_score) != p)) begin
        failures++;
        $display("FAIL t=%0t fip=%h valid=%0d from_cnn=%0d/%0d taken=%0d/%0d score=%0d/%0d",
                 $time, fip, pred_valid, pred_from_cnn, hit, pred_taken, exp_taken, cnn_score, p);
      end
      if (hit) begin
        c_override++;
        if (exp_taken) c_taken++; else c_not++;
      end else begin
        c_base++;
        if (!h2p_en_m) c_disabled++;
      end
    end else begin
      checks++;
      if (pred_valid) begin failures++; $display("FAIL pred_valid without fetch"); end
    end
  endtask

  task automatic branch(input logic [63:0] ip, input bit dir);
    bit u, d;
    cycle(1, ip, dir, 0, 0, '0, 0, u, d);
  endtask

  initial begin
    bit used, cdir;
    {c_push, c_overflow, c_rb, c_rb_restore, c_rb_push, c_override, c_base,
     c_taken, c_not, c_fetch_push, c_cfg_tbl, c_cfg_l2, c_cfg_thr, c_cfg_ip, c_disabled} = '0;
    for (int s = 0; s < DEPTH; s++) fifo_m[s] = '0;
    for (int s = 0; s < HL; s++) l2_m[s] = '0;
    thr_m = 0; h2p_m = '0; h2p_en_m = 0; pushes_total = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---------------- phase 0: helper not installed ----------------
    for (int n = 0; n < 20; n++)
      cycle(0, '0, 0, 0, 1, IP_H2P, 1'($urandom), used, cdir);

    // ---------------- phase 1: example program ----------------
    for (int i = 0; i < ROWS; i++) begin
      logic [W-1:0] r;
      r = rand_row(50);
      r[3:0] = 4'b0000;
      if (i == 14) r[1:0] = 2'b11;   // filter 0: <0x400587, not taken>
      if (i == 15) r[3:2] = 2'b11;   // filter 1: <0x400587, taken>
      cfg(CFG_L1_ROW, i, CFG_W'(r));
    end
    for (int s = 0; s < HL; s++) begin
      logic [W-1:0] r;
      r = '0;
      if (s < 30) begin r[1:0] = 2'b01; r[3:2] = 2'b11; end
      cfg(CFG_L2_SLOT, s, CFG_W'(r));
    end
    cfg(CFG_THRESHOLD, 0, '0);
    cfg(CFG_H2P_IP, 0, IP_H2P);
    for (int call = 0; call < 150; call++) begin
      bit a_dir;
      int iters;
      a_dir = ($urandom_range(2) == 0);   // taken 1/3 of the time
      branch(IP_A, a_dir);
      iters = $urandom_range(14, 10);
      for (int it = 0; it < iters; it++) begin
        branch(IP_FOR, 1);
        branch(IP_IN, 1'($urandom));
      end
      branch(IP_FOR, 0);
      cycle(0, '0, 0, 0, 1, IP_H2P, 1'($urandom), used, cdir);
      ex_preds++;
      if (used && cdir == a_dir) ex_correct++;
      branch(IP_H2P, a_dir);  // the H2P itself enters the history
    end
    $display("example program: %0d of %0d H2P predictions follow the correlated branch",
             ex_correct, ex_preds);
    checks++;
    if (ex_correct != ex_preds) failures++;

    // ---------------- phase 2: random helper, random traffic -----------
    for (int i = 0; i < ROWS; i++) cfg(CFG_L1_ROW, i, CFG_W'(rand_row(40)));
    for (int s = 0; s < HL; s++) cfg(CFG_L2_SLOT, s, CFG_W'(rand_row(60)));
    cfg(CFG_THRESHOLD, 0, CFG_W'(-64'sd2));
    cfg(CFG_H2P_IP, 0, 64'h7f00_1234);
    for (int n = 0; n < 3000; n++) begin
      bit push, fetch;
      int rb;
      logic [63:0] ip, fip;
      push  = ($urandom_range(3) != 0);
      rb    = ($urandom_range(15) == 0) ? $urandom_range(MR, 1) : 0;
      fetch = ($urandom_range(3) == 0);
      ip    = {32'h0, $urandom};
      fip   = ($urandom_range(1) == 0) ? 64'h7f00_1234 : {32'h0, $urandom};
      if (n % 500 == 499) cfg(CFG_THRESHOLD, 0, CFG_W'(longint'($urandom_range(20)) - 10));
      cycle(push, ip, 1'($urandom), rb, fetch, fip, 1'($urandom), used, cdir);
    end

    $display("push=%0d overflow=%0d rollback=%0d rollback_restore=%0d rollback_with_push=%0d",
             c_push, c_overflow, c_rb, c_rb_restore, c_rb_push);
    $display("override=%0d baseline=%0d (not installed %0d) cnn_taken=%0d cnn_not_taken=%0d fetch_with_push=%0d",
             c_override, c_base, c_disabled, c_taken, c_not, c_fetch_push);
    $display("uploads: table=%0d l2=%0d threshold=%0d h2p_ip=%0d", c_cfg_tbl, c_cfg_l2, c_cfg_thr, c_cfg_ip);
    if (c_push == 0) begin failures++; $display("FAIL no push"); end
    if (c_overflow == 0) begin failures++; $display("FAIL no overflow"); end
    if (c_rb == 0) begin failures++; $display("FAIL no rollback"); end
    if (c_rb_restore == 0) begin failures++; $display("FAIL no restoring rollback"); end
    if (c_rb_push == 0) begin failures++; $display("FAIL no rollback with push"); end
    if (c_override == 0) begin failures++; $display("FAIL no override"); end
    if (c_base == 0) begin failures++; $display("FAIL no baseline"); end
    if (c_disabled == 0) begin failures++; $display("FAIL no uninstalled prediction"); end
    if (c_taken == 0 || c_not == 0) begin failures++; $display("FAIL one CNN direction missing"); end
    if (c_fetch_push == 0) begin failures++; $display("FAIL no fetch with push"); end
    if (c_cfg_tbl == 0 || c_cfg_l2 == 0 || c_cfg_thr == 0 || c_cfg_ip == 0) begin
      failures++; $display("FAIL upload target missing");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

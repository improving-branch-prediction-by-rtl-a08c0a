// tb_cnn_l2_store: checks that reset clears the Layer-2 weights and the
// threshold, that each slot write lands in its own slot of the weight
// vector (slot 0 in the least significant bits), that out-of-range slot
// writes change nothing and that the signed threshold is stored.
module tb_cnn_l2_store;
  localparam int unsigned M = 32, W = 2 * M, HL = 200, TW = 64;
  logic clk = 0, rst_n = 0;
  logic w_wr_en = 0, t_wr_en = 0;
  logic [7:0] w_wr_slot = '0;
  logic [W-1:0] w_wr_data = '0;
  logic signed [TW-1:0] t_wr_data = '0, thresh;
  logic [HL*W-1:0] weights;
  logic [W-1:0] shadow [HL];
  logic signed [TW-1:0] t_exp;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  cnn_l2_store dut (.clk, .rst_n, .w_wr_en, .w_wr_slot, .w_wr_data,
                    .t_wr_en, .t_wr_data, .weights, .thresh);

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare();
    for (int s = 0; s < HL; s++) begin
      checks++;
      if (weights[s*W +: W] != shadow[s]) begin
        failures++;
        $display("FAIL slot %0d: %h exp %h", s, weights[s*W +: W], shadow[s]);
      end
    end
    checks++;
    if (thresh != t_exp) begin
      failures++;
      $display("FAIL thresh %0d exp %0d", thresh, t_exp);
    end
  endtask

  initial begin
    for (int s = 0; s < HL; s++) shadow[s] = '0;
    t_exp = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    compare();
    for (int s = 0; s < HL; s++) begin
      @(negedge clk);
      w_wr_en = 1; w_wr_slot = 8'(s); w_wr_data = {$urandom, $urandom};
      shadow[s] = w_wr_data;
    end
    @(negedge clk);
    w_wr_en = 0;
    compare();
    // out of range slots are ignored
    @(negedge clk);
    w_wr_en = 1; w_wr_slot = 8'(HL); w_wr_data = '1;
    @(negedge clk);
    w_wr_slot = 8'd255;
    @(negedge clk);
    w_wr_en = 0;
    // negative threshold
    t_wr_en = 1; t_wr_data = -64'sd37; t_exp = -64'sd37;
    @(negedge clk);
    t_wr_en = 0;
    compare();
    // random rewrites
    for (int n = 0; n < 50; n++) begin
      int s;
      s = $urandom_range(HL - 1);
      @(negedge clk);
      w_wr_en = 1; w_wr_slot = 8'(s); w_wr_data = {$urandom, $urandom};
      shadow[s] = w_wr_data;
    end
    @(negedge clk);
    w_wr_en = 0;
    compare();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_cnn_l1_table: uploads random rows of ternary codes into every row of
// the Layer-1 table and reads them back through the <IP, direction> read
// port. Expected rows are found with ((ip << 1) + dir) mod 256 computed in
// 64-bit arithmetic on random IPs, and with the index values printed for
// the example program (0x400587 -> 14/15, 0x40062a -> 84/85,
// 0x4005cd -> 154/155, 0x400634 -> 104/105 for not taken/taken). A random
// subset of rows is then rewritten and everything read again.
module tb_cnn_l1_table;
  localparam int unsigned P_BITS = 8, M = 32, W = 2 * M, ROWS = 1 << P_BITS;
  logic clk = 0;
  logic wr_en = 0;
  logic [P_BITS-1:0] wr_idx = '0;
  logic [63:0] rd_ip = '0;
  logic rd_dir = 0;
  logic [W-1:0] wr_data = '0, rd_data;
  logic [W-1:0] shadow [ROWS];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  cnn_l1_table dut (.clk, .wr_en, .wr_idx, .wr_data, .rd_ip, .rd_dir, .rd_data);

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [W-1:0] rand_row();
    logic [W-1:0] r;
    for (int j = 0; j < M; j++) begin
      case ($urandom_range(2))
        0: r[2*j +: 2] = 2'b00;
        1: r[2*j +: 2] = 2'b01;
        default: r[2*j +: 2] = 2'b11;
      endcase
    end
    return r;
  endfunction

  task automatic write_row(input int i, input logic [W-1:0] d);
    @(negedge clk);
    wr_en = 1; wr_idx = P_BITS'(i); wr_data = d;
    @(negedge clk);
    wr_en = 0;
    shadow[i] = d;
  endtask

  task automatic read_tuple(input logic [63:0] ip, input logic dir, input int exp_row);
    rd_ip = ip; rd_dir = dir; #1;
    checks++;
    if (rd_data != shadow[exp_row]) begin
      failures++;
      $display("FAIL ip=%h dir=%0d: %h exp row %0d = %h", ip, dir, rd_data, exp_row, shadow[exp_row]);
    end
  endtask

  task automatic read_all();
    for (int n = 0; n < 1000; n++) begin
      logic [63:0] ip;
      logic d;
      longint unsigned e;
      ip = {$urandom, $urandom};
      d = 1'($urandom);
      e = ((longint'(ip) << 1) + longint'(d)) & ((64'd1 << P_BITS) - 1);
      read_tuple(ip, d, int'(e));
    end
    read_tuple(64'h400587, 0, 14);  read_tuple(64'h400587, 1, 15);
    read_tuple(64'h40062a, 0, 84);  read_tuple(64'h40062a, 1, 85);
    read_tuple(64'h4005cd, 0, 154); read_tuple(64'h4005cd, 1, 155);
    read_tuple(64'h400634, 0, 104); read_tuple(64'h400634, 1, 105);
  endtask

  initial begin
    for (int i = 0; i < ROWS; i++) write_row(i, rand_row());
    read_all();
    for (int n = 0; n < 100; n++) write_row($urandom_range(ROWS - 1), rand_row());
    read_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_popcount: compares the adder-tree popcount with a bit-by-bit count
// for all-zero, all-one, single-bit and random vectors of 6400 bits (the
// default size, 200 positions x 32 filters) and of 13 bits (an odd size
// that exercises uneven splits).
module tb_popcount;
  localparam int unsigned N1 = 6400, N2 = 13;
  logic [N1-1:0] a;
  logic [$clog2(N1+1)-1:0] ca;
  logic [N2-1:0] b;
  logic [$clog2(N2+1)-1:0] cb;
  int checks = 0, failures = 0;

  popcount #(.N(N1)) dut_a (.in_bits(a), .count(ca));
  popcount #(.N(N2)) dut_b (.in_bits(b), .count(cb));

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_a();
    int e = 0;
    #1;
    for (int i = 0; i < N1; i++) e += int'(a[i]);
    checks++;
    if (int'(ca) != e) begin
      failures++;
      $display("FAIL N=%0d count %0d exp %0d", N1, ca, e);
    end
  endtask

  task automatic check_b();
    int e = 0;
    #1;
    for (int i = 0; i < N2; i++) e += int'(b[i]);
    checks++;
    if (int'(cb) != e) begin
      failures++;
      $display("FAIL N=%0d count %0d exp %0d", N2, cb, e);
    end
  endtask

  initial begin
    a = '0; check_a();
    a = '1; check_a();
    for (int i = 0; i < N1; i += 397) begin a = '0; a[i] = 1'b1; check_a(); end
    for (int n = 0; n < 200; n++) begin
      int density;
      density = $urandom_range(100);
      for (int i = 0; i < N1; i++) a[i] = ($urandom_range(99) < density);
      check_a();
    end
    for (int v = 0; v < (1 << N2); v++) begin b = N2'(v); check_b(); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

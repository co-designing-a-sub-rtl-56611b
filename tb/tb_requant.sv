// tb_requant: checks the dyadic requantizer against integer arithmetic.
//
// Random accumulators, scales, shifts and ReLU settings plus the corner
// cases (zero shift, saturation both ways, exact halves for rounding) are
// applied; the result is compared with the reference (acc*S + 2^(n-1)) >> n,
// clamped to int8.
module tb_requant;
  import see_ref_pkg::*;

  logic signed [31:0] acc;
  logic [15:0]        scale;
  logic [4:0]         shift;
  logic               relu;
  logic signed [7:0]  q;
  int checks = 0, failures = 0;

  requant dut (.acc, .scale, .shift, .relu, .q);

  task automatic apply(int a, int s, int n, bit r);
    int exp;
    acc = a; scale = 16'(s); shift = 5'(n); relu = r;
    #1;
    exp = rq(longint'(a), s, n, r);
    checks++;
    if (int'(q) != exp) begin
      failures++;
      $display("FAIL acc=%0d scale=%0d shift=%0d relu=%0d: got %0d expected %0d", a, s, n, r, q, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    apply(100, 1, 0, 0);        // plain
    apply(300, 1, 0, 0);        // saturate high
    apply(-300, 1, 0, 0);       // saturate low
    apply(-300, 1, 0, 1);       // relu
    apply(3, 1, 1, 0);          // 1.5 rounds to 2
    apply(-3, 1, 1, 0);         // -1.5 rounds to -1
    apply(5, 3, 2, 0);          // 15/4 = 3.75 -> 4
    apply(1000, 200, 12, 0);    // 48.8 -> 49
    apply(-1000, 200, 12, 1);
    apply(32'h7fffffff, 65535, 31, 0);
    for (int i = 0; i < 2000; i++) begin
      automatic int a = $urandom_range(0, 2000000) - 1000000;
      apply(a, $urandom_range(1, 65535), $urandom_range(0, 31), 1'($urandom_range(0, 1)));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_recint_mul: self-checking test of the truncated multiplier recint_mul at
// its default size (512 x 512 -> low 512 bits, over 64-bit limbs). Random
// operands and extreme ones (all ones, zero, one, single bits) are compared
// with one wide multiplication computed here. Combinational; a time-based
// watchdog ends a run that hangs.
module tb_recint_mul;
  localparam int unsigned K = recint_pkg::K_DEFAULT;
  localparam int unsigned W = 2**K;

  logic [W-1:0]   b, c;
  logic [W-1:0]   p;
  int checks = 0, failures = 0;

  recint_mul #(.K(K)) dut (.b(b), .c(c), .a(p));

  function automatic logic [W-1:0] rand_wide();
    logic [W-1:0] v;
    for (int i = 0; i < W / 32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  task automatic check_one(input logic [W-1:0] tb_b, input logic [W-1:0] tb_c);
    logic [W-1:0] expected;
    b = tb_b; c = tb_c;
    #1;
    expected = tb_b * tb_c;  // native product, low 2^K bits
    checks++;
    if (p !== expected) begin
      failures++;
      $display("FAIL mul b=%h c=%h got %h expected %h", tb_b, tb_c, p, expected);
    end
  endtask

  initial begin
    check_one('1, '1);
    check_one('1, '0);
    check_one(W'(1), '1);
    check_one(W'(1) << (W - 1), W'(1) << (W - 1));
    check_one({(W/2){2'b10}}, '1);
    for (int i = 0; i < 300; i++) check_one(rand_wide(), rand_wide());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

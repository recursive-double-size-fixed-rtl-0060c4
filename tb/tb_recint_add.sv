// tb_recint_add: self-checking test of recint_add at its default size
// (512-bit operands over 64-bit limbs). Random operands and carry-ins, plus
// carry-propagation corner cases (all ones plus one, carry across every limb
// boundary), are compared with a single wide addition computed here.
// Combinational; a time-based watchdog ends a run that hangs.
module tb_recint_add;
  localparam int unsigned K = recint_pkg::K_DEFAULT;
  localparam int unsigned W = 2**K;

  logic [W-1:0] b, c, a;
  logic         cin, cout;
  int checks = 0, failures = 0;

  recint_add #(.K(K)) dut (.b(b), .c(c), .cin(cin), .a(a), .cout(cout));

  function automatic logic [W-1:0] rand_wide();
    logic [W-1:0] v;
    for (int i = 0; i < W / 32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  task automatic check_one(input logic [W-1:0] tb_b, input logic [W-1:0] tb_c, input logic tb_cin);
    logic [W:0] expected;
    b = tb_b; c = tb_c; cin = tb_cin;
    #1;
    expected = {1'b0, tb_b} + {1'b0, tb_c} + {{W{1'b0}}, tb_cin};
    checks++;
    if ({cout, a} !== expected) begin
      failures++;
      $display("FAIL add b=%h c=%h cin=%b got %h expected %h", tb_b, tb_c, tb_cin, {cout, a}, expected);
    end
  endtask

  initial begin
    check_one('1, '0, 1'b1);                 // carry ripples through every limb
    check_one('1, '1, 1'b1);
    check_one('0, '0, 1'b0);
    for (int i = 0; i < W / 64; i++)         // carry out of limb i only
      check_one({{(W-64){1'b0}}, 64'hffff_ffff_ffff_ffff} << (64 * i), W'(1) << (64 * i), 1'b0);
    for (int i = 0; i < 500; i++) check_one(rand_wide(), rand_wide(), 1'($urandom));
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

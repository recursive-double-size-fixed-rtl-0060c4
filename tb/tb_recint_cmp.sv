// tb_recint_cmp: self-checking test of recint_cmp at its default size. Random
// pairs, equal pairs and pairs that differ only in one limb (so that the
// lower halves must decide) are compared with the native wide comparison.
// Combinational; a time-based watchdog ends a run that hangs.
module tb_recint_cmp;
  import recint_pkg::*;
  localparam int unsigned K = recint_pkg::K_DEFAULT;
  localparam int unsigned W = 2**K;

  logic [W-1:0] a, b;
  cmp_e         res;
  int checks = 0, failures = 0;
  int seen_lt = 0, seen_eq = 0, seen_gt = 0;

  recint_cmp #(.K(K)) dut (.a(a), .b(b), .res(res));

  function automatic logic [W-1:0] rand_wide();
    logic [W-1:0] v;
    for (int i = 0; i < W / 32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  task automatic check_one(input logic [W-1:0] ta, input logic [W-1:0] tb_);
    cmp_e expected;
    a = ta; b = tb_;
    #1;
    expected = (ta > tb_) ? CMP_GT : (ta == tb_) ? CMP_EQ : CMP_LT;
    case (expected)
      CMP_LT: seen_lt++;
      CMP_EQ: seen_eq++;
      default: seen_gt++;
    endcase
    checks++;
    if (res !== expected) begin
      failures++;
      $display("FAIL cmp a=%h b=%h got %s expected %s", ta, tb_, res.name(), expected.name());
    end
  endtask

  initial begin
    logic [W-1:0] x, y;
    for (int i = 0; i < 200; i++) begin
      x = rand_wide();
      check_one(x, x);
      check_one(x, rand_wide());
      y = x;
      y[($urandom % (W / 64)) * 64 +: 64] = {$urandom, $urandom};
      check_one(x, y);
      check_one(y, x);
    end
    checks++;
    if (seen_lt == 0 || seen_eq == 0 || seen_gt == 0) begin
      failures++;
      $display("FAIL not every outcome exercised");
    end
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

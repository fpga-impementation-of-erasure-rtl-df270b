// tb_gf_pe: checks each structure of one processing unit against
// reference arithmetic: Horner evaluation (syndrome/Forney form), the
// locator update x_i + X*x_(i-1) on a stream, the multiply-accumulate of
// the evaluator, the 2M-3 step square-and-multiply inversion, and HOLD /
// MULH. Operations are applied at the rising edge; inputs change at the
// falling edge.
module tb_gf_pe;
  import rs_ref_pkg::*;
  import rs_pkg::*;

  logic clk = 0, rst_n = 0;
  pe_op_e op = PE_NOP;
  logic en = 0, first = 0, cf = 0, cf_q;
  logic [31:0] a_in = 0, chain_in = 0, acc_q, chain_q;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  gf_pe dut (.clk, .rst_n, .op, .en, .first, .a_in, .chain_in, .chain_first_in(cf),
             .acc_q, .chain_q, .chain_first_q(cf_q));

  task automatic step(pe_op_e o, logic f, logic [31:0] a, logic [31:0] ch, logic c0 = 0);
    op = o; en = 1; first = f; a_in = a; chain_in = ch; cf = c0;
    @(negedge clk);
  endtask

  task automatic check(logic [31:0] got, logic [31:0] want, string what);
    checks++;
    if (got !== want) begin
      failures++;
      $display("FAIL: %s got %h want %h", what, got, want);
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 20; rep++) begin
      logic [31:0] x, coefs [], ref_acc, prev, beta, hold;
      coefs = new[8 + rep];
      foreach (coefs[i]) coefs[i] = $urandom;
      x = $urandom;
      // Horner: acc = sum c_i x^(L-1-i)
      step(PE_LOADC, 0, x, 0);
      ref_acc = 0;
      foreach (coefs[i]) begin
        step(PE_HORNER, i == 0, coefs[i], 0);
        ref_acc = gmul(ref_acc, x) ^ coefs[i];
      end
      check(acc_q, ref_acc, "horner");
      // HOLD then reuse acc for inversion of beta
      step(PE_HOLD, 0, 0, 0);
      hold = ref_acc;
      beta = $urandom | 32'h10;
      step(PE_HORNER, 1, beta, 0);
      step(PE_INVLD, 0, 0, 0);
      for (int k = 0; k <= 2 * 32 - 4; k++)
        step((k % 2 == 1 && k != 2 * 32 - 4) ? PE_MULC : PE_SQR, 0, 0, 0);
      check(acc_q, ginv(beta), "inverse");
      step(PE_MULH, 0, 0, 0);
      check(acc_q, gmul(ginv(beta), hold), "mulh");
      // Locator stream: y_i = x_i + X*x_(i-1)
      step(PE_LOADC, 0, x, 0);
      prev = 0;
      foreach (coefs[i]) begin
        step(PE_LAM, 0, 0, coefs[i], i == 0);
        check(chain_q, coefs[i] ^ gmul(x, prev), "lambda stream");
        checks++;
        if (cf_q !== (i == 0)) begin failures++; $display("FAIL: first mark"); end
        prev = coefs[i];
      end
      // Multiply-accumulate
      ref_acc = 0;
      foreach (coefs[i]) begin
        logic [31:0] s;
        s = $urandom;
        step(PE_MAC, i == 0, coefs[i], s);
        ref_acc = ref_acc ^ gmul(coefs[i], s);
        check(chain_q, s, "mac shift");
      end
      check(acc_q, ref_acc, "mac");
      step(PE_SHIFT, 0, 0, 32'h1234_5678);
      check(chain_q, 32'h1234_5678, "shift");
      // Disabled unit keeps acc
      en = 0; op = PE_HORNER; first = 1; a_in = 32'hFFFF; @(negedge clk);
      check(acc_q, ref_acc, "enable");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

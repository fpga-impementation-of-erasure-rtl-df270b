// tb_rs_fig4: the single-unit decoder on the corners of the code family
// whose decoding speed the paper plots: k = 70 and 256 data symbols,
// n-k = 32 and 128 parity symbols, one processing unit, e = n-k erasures.
// Each word must decode correctly and take the cycle count of the
// paper's complexity table (Table 2 summed with P = 1, m = 32) within 15 %:
//   n + 2e + n(n-k) + e^2/2 + e(n-k)/2 + e^2 + (n-k)e + 2me.
module tb_rs_fig4;
  logic clk = 0, go = 0;
  always #5 clk = ~clk;

  function automatic int table2(int n, int k);
    int e;
    e = n - k;
    return n + 2 * e + n * (n - k) + e * e / 2 + e * (n - k) / 2 + e * e + (n - k) * e + 64 * e;
  endfunction

  logic fin [4];
  int   chk [4], fl [4], cyc [4];
  int   checks = 0, failures = 0;

  rs_word_runner #(.N(102), .K(70))  u0 (.clk, .go, .e(32), .exp_cycles(table2(102, 70)), .tol_pct(15),
    .fin(fin[0]), .checks(chk[0]), .failures(fl[0]), .cycles(cyc[0]));
  rs_word_runner #(.N(288), .K(256)) u1 (.clk, .go, .e(32), .exp_cycles(table2(288, 256)), .tol_pct(15),
    .fin(fin[1]), .checks(chk[1]), .failures(fl[1]), .cycles(cyc[1]));
  rs_word_runner #(.N(198), .K(70))  u2 (.clk, .go, .e(128), .exp_cycles(table2(198, 70)), .tol_pct(15),
    .fin(fin[2]), .checks(chk[2]), .failures(fl[2]), .cycles(cyc[2]));
  rs_word_runner #(.N(384), .K(256)) u3 (.clk, .go, .e(128), .exp_cycles(table2(384, 256)), .tol_pct(15),
    .fin(fin[3]), .checks(chk[3]), .failures(fl[3]), .cycles(cyc[3]));

  initial begin
    repeat (4) @(negedge clk);
    go = 1;
    wait (fin[0] && fin[1] && fin[2] && fin[3]);
    foreach (chk[i]) begin
      checks += chk[i];
      failures += fl[i];
    end
    // speed rises with k and falls with n-k (throughput = 32k / cycles)
    checks++;
    if (!(256 * cyc[0] > 70 * cyc[1] && 256 * cyc[2] > 70 * cyc[3] && cyc[2] > cyc[0])) begin
      failures++;
      $display("FAIL: speed trend");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

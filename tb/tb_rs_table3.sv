// tb_rs_table3: the RS(200,136), 64-erasure decoder with 2, 4 and 8
// processing units (the 1-unit case is tb_rs_full). Each size decodes one
// worst-case word (e = 64); the decode must be correct and its cycle count
// within 15 % of what the reported throughput implies at 100 MHz:
// 29.1, 57.1 and 101 Mbit/s for 4352 data bits -> 14,955, 7,622 and
// 4,309 cycles.
module tb_rs_table3;
  logic clk = 0, go = 0;
  always #5 clk = ~clk;

  logic fin [3];
  int   chk [3], fl [3], cyc [3];
  int   checks = 0, failures = 0;

  rs_word_runner #(.NP(2)) u_p2 (.clk, .go, .e(64), .exp_cycles(14955), .tol_pct(15),
                                 .fin(fin[0]), .checks(chk[0]), .failures(fl[0]), .cycles(cyc[0]));
  rs_word_runner #(.NP(4)) u_p4 (.clk, .go, .e(64), .exp_cycles(7622), .tol_pct(15),
                                 .fin(fin[1]), .checks(chk[1]), .failures(fl[1]), .cycles(cyc[1]));
  rs_word_runner #(.NP(8)) u_p8 (.clk, .go, .e(64), .exp_cycles(4309), .tol_pct(15),
                                 .fin(fin[2]), .checks(chk[2]), .failures(fl[2]), .cycles(cyc[2]));

  initial begin
    repeat (4) @(negedge clk);
    go = 1;
    wait (fin[0] && fin[1] && fin[2]);
    for (int i = 0; i < 3; i++) begin
      checks += chk[i];
      failures += fl[i];
    end
    checks++;
    if (!(cyc[0] > cyc[1] && cyc[1] > cyc[2])) begin
      failures++;
      $display("FAIL: decode time does not fall with more units");
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

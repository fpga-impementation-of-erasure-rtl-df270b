// tb_gf_mult: checks the Z-matrix GF(2^32) multiplier against a
// shift-and-add reference (rs_ref_pkg::gmul): fixed corner cases, 20,000
// random operand pairs, and a * a^-1 = 1 for random a. Combinational, so
// each vector is applied and checked after a small delay.
module tb_gf_mult;
  import rs_ref_pkg::*;
  logic [31:0] a, b, c;
  int checks = 0, failures = 0;

  gf_mult dut (.a, .b, .c);

  task automatic try(logic [31:0] x, logic [31:0] y, logic [31:0] want);
    a = x; b = y; #1;
    checks++;
    if (c !== want) begin
      failures++;
      if (failures < 10) $display("FAIL: %h * %h = %h, want %h", x, y, c, want);
    end
  endtask

  initial begin
    try(32'd0, 32'hDEAD_BEEF, 32'd0);
    try(32'd1, 32'hDEAD_BEEF, 32'hDEAD_BEEF);
    try(32'h8000_0000, 32'd2, 32'h8000_000B);          // x^32 = x^31 + x^3 + x + 1
    try(32'h8000_0000, 32'h8000_0000, gmul(32'h8000_0000, 32'h8000_0000));
    try(32'hFFFF_FFFF, 32'hFFFF_FFFF, gmul(32'hFFFF_FFFF, 32'hFFFF_FFFF));
    for (int i = 0; i < 20000; i++) begin
      logic [31:0] x, y;
      x = $urandom; y = $urandom;
      try(x, y, gmul(x, y));
    end
    for (int i = 0; i < 20; i++) begin
      logic [31:0] x;
      x = $urandom | 32'd1;
      try(x, ginv(x), 32'd1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

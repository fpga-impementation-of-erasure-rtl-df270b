// tb_rs_full: one complete decode with the decoder at its default size,
// RS(200,136) over GF(2^32) with one processing unit, in the worst case of
// e = n-k = 64 erasures. Checks all 200 symbols after decoding and the
// decode time: 14.7 Mbit/s at 100 MHz for 136 x 32 data bits is about
// 29,600 cycles; a 10 % tolerance is allowed.
module tb_rs_full;
  import rs_ref_pkg::*;
  import rs_pkg::*;

  localparam int N = 200, K = 136, NK = N - K;
  localparam int AW = $clog2(mem_depth(N, K));
  localparam int RB = base_r(N, K);
  localparam int EXP_CYCLES = (K * 32 * 1000) / 147;  // 14.7 Mbit/s @ 100 MHz

  logic clk = 0, rst_n = 0, start = 0, busy, done, retx_req, host_we = 0, y_valid;
  logic [AW-1:0] host_addr = '0;
  logic [31:0] host_wdata = '0, host_rdata, y_val;
  logic [15:0] y_pos;
  int checks = 0, failures = 0, cycles = 0, ny = 0;

  always #5 clk = ~clk;

  rs_erasure_decoder dut (.*);

  logic [31:0] cw [];
  logic [31:0] rx [];
  bit          erased [N];

  task automatic host_write(int addr, logic [31:0] d);
    @(negedge clk);
    host_we = 1; host_addr = AW'(addr); host_wdata = d;
    @(negedge clk);
    host_we = 0;
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    make_codeword(N, K, cw);
    rx = new[N];
    foreach (rx[i]) rx[i] = cw[i];
    foreach (erased[i]) erased[i] = 0;
    for (int i = 0; i < NK; i++) begin
      int p;
      do p = $urandom_range(N - 1); while (erased[p]);
      erased[p] = 1;
      rx[p] = $urandom;
    end
    host_write(0, NK);
    begin
      int j;
      j = 0;
      for (int i = 0; i < N; i++) if (erased[i]) begin host_write(1 + j, i); j++; end
    end
    for (int i = 0; i < N; i++) host_write(RB + i, rx[i]);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    cycles = 1;
    while (!done) begin
      @(posedge clk); #1;
      if (y_valid) begin
        ny++;
        checks++;
        if (!erased[y_pos] || y_val != (rx[y_pos] ^ cw[y_pos])) begin
          failures++;
          $display("FAIL: y at %0d", y_pos);
        end
      end
      cycles++;
    end
    @(negedge clk);
    checks++;
    if (retx_req || ny != NK) begin failures++; $display("FAIL: %0d outputs, retx %0d", ny, retx_req); end
    for (int i = 0; i < N; i++) begin
      @(negedge clk); host_addr = AW'(RB + i);
      @(negedge clk);
      checks++;
      if (host_rdata != cw[i]) begin
        failures++;
        $display("FAIL: symbol %0d got %h want %h", i, host_rdata, cw[i]);
      end
    end
    checks++;
    if (cycles * 10 > EXP_CYCLES * 11 || cycles * 10 < EXP_CYCLES * 9) begin
      failures++;
      $display("FAIL: %0d cycles, expected about %0d", cycles, EXP_CYCLES);
    end
    $display("RS(200,136) P=1 e=64: %0d cycles (paper: about %0d), %0d kbit/s at 100 MHz",
             cycles, EXP_CYCLES, (K * 32 * 100000) / cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

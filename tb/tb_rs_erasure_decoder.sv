// tb_rs_erasure_decoder: end-to-end test of the decoder on small codes.
//
// Builds random codewords, erases e symbols at random positions (their
// received values replaced by random data), loads the memory through the
// host port, runs a decode and compares every symbol of R after decoding
// with the codeword, and every y_* output with the true error value.
// Runs a sequence of words on RS(40,24) with three processing units, so
// that it sees: e = 0, e = n-k (worst case), e > n-k (retransmission
// request), groups where only some units are used, several Lambda passes,
// the host reading back, and a start right after a finished decode.
// The cycle count of each decode is checked against the budget of the
// schedule (n + 2e + groups*(n+2P) + ...), recomputed here.
module tb_rs_erasure_decoder;
  import rs_ref_pkg::*;
  import rs_pkg::*;

  localparam int N  = 40;
  localparam int K  = 24;
  localparam int NP = 3;
  localparam int NK = N - K;
  localparam int AW = $clog2(mem_depth(N, K));
  localparam int RB = base_r(N, K);

  logic clk = 0, rst_n = 0, start = 0;
  logic busy, done, retx_req, host_we, y_valid;
  logic [AW-1:0] host_addr;
  logic [31:0] host_wdata, host_rdata, y_val;
  logic [15:0] y_pos;

  int checks = 0, failures = 0;
  int n_zero = 0, n_full = 0, n_retx = 0, n_partial_grp = 0, n_multi_pass = 0, n_y = 0;

  always #5 clk = ~clk;

  rs_erasure_decoder #(.N(N), .K(K), .NUM_PE(NP)) dut (.*);

  logic [31:0] cw [];
  logic [31:0] rx [];
  int          pos [$];
  bit          erased [N];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic host_write(int addr, logic [31:0] d);
    @(negedge clk);
    host_we = 1; host_addr = AW'(addr); host_wdata = d;
    @(negedge clk);
    host_we = 0;
  endtask

  task automatic host_read(int addr, output logic [31:0] d);
    @(negedge clk);
    host_addr = AW'(addr);
    @(negedge clk);
    d = host_rdata;
  endtask

  // One decode with e erasures (e may exceed n-k).
  task automatic run_word(int e);
    int cyc;
    int ny;
    logic [31:0] d;
    make_codeword(N, K, cw);
    rx = new[N];
    foreach (rx[i]) rx[i] = cw[i];
    pos.delete();
    foreach (erased[i]) erased[i] = 0;
    while (pos.size() < e) begin
      int p;
      p = $urandom_range(N - 1);
      if (!erased[p]) begin erased[p] = 1; pos.push_back(p); end
    end
    pos.sort();
    foreach (pos[i]) rx[pos[i]] = $urandom;
    host_write(0, e);
    foreach (pos[i]) host_write(1 + i, pos[i]);
    for (int i = 0; i < N; i++) host_write(RB + i, rx[i]);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    cyc = 1; ny = 0;
    while (!done) begin
      @(posedge clk); #1;
      if (y_valid) begin
        ny++;
        check(erased[y_pos] && (y_val == (rx[y_pos] ^ cw[y_pos])),
              $sformatf("y at pos %0d", y_pos));
      end
      cyc++;
    end
    @(negedge clk);
    if (e > NK) begin
      n_retx++;
      check(retx_req == 1, "retx_req for e > n-k");
      check(ny == 0, "no output when uncorrectable");
      for (int i = 0; i < N; i++) begin
        host_read(RB + i, d);
        check(d == rx[i], $sformatf("R untouched %0d", i));
      end
    end else begin
      int budget;
      check(retx_req == 0, "no retx_req");
      check(ny == e, $sformatf("y count %0d of %0d", ny, e));
      n_y += ny;
      if (e == 0) n_zero++;
      if (e == NK) n_full++;
      if (e % NP != 0) n_partial_grp++;
      if (e > NP) n_multi_pass++;
      for (int i = 0; i < N; i++) begin
        host_read(RB + i, d);
        check(d == cw[i], $sformatf("e=%0d symbol %0d got %h want %h", e, i, d, cw[i]));
      end
      // Cycle budget of the schedule (upper bound) for nonzero e.
      if (e > 0) begin
        int g, sy, lam, om, fo;
        g   = (NK + NP - 1) / NP;
        sy  = g * (NP + N + NP);
        lam = ((e + NP - 1) / NP) * (NP + e + 1 + NP + 1);
        om  = ((e + NP - 1) / NP) * (NP + e + 1 + NP + 1);
        fo  = ((e + NP - 1) / NP) * (NP + 2 * (e + 1) + 2 * 32 + 3 * NP);
        budget = N + 3 * e + 4 + sy + lam + om + fo;
        check(cyc <= budget, $sformatf("cycles %0d within budget %0d", cyc, budget));
        check(cyc >= N + g * N, $sformatf("cycles %0d at least n + syndrome work", cyc));
        $display("e=%0d decode cycles=%0d", e, cyc);
      end
    end
  endtask

  initial begin
    host_we = 0; host_addr = '0; host_wdata = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_word(NK);
    run_word(0);
    run_word(1);
    run_word(5);
    run_word(NK + 1);
    run_word(NK - 1);
    for (int w = 0; w < 6; w++) run_word($urandom_range(NK));
    check(n_zero > 0, "e = 0 seen");
    check(n_full > 0, "e = n-k seen");
    check(n_retx > 0, "retransmission request seen");
    check(n_partial_grp > 0, "partly used unit group seen");
    check(n_multi_pass > 0, "multi-pass Lambda seen");
    $display("mechanisms: e0=%0d full=%0d retx=%0d partial=%0d multipass=%0d y=%0d",
             n_zero, n_full, n_retx, n_partial_grp, n_multi_pass, n_y);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

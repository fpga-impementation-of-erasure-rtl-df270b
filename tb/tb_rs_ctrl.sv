// tb_rs_ctrl: checks the controller's schedule through the intermediate
// results it leaves in memory. The controller is wired to a dual-port RAM
// and a row of two processing units, as in the decoder, for RS(24,12).
// After each decode the test compares, word by word with values computed
// here: a_j = alpha^j, X_j = alpha^(i_j), S_j = R(alpha^j), the
// coefficients of Lambda(z) = prod(1 + X_j z), Omega(z) = Lambda S mod
// z^(n-k) (terms 0..e-1) and the corrected R region. It also checks busy
// and that done is a single-cycle pulse.
module tb_rs_ctrl;
  import rs_ref_pkg::*;
  import rs_pkg::*;

  localparam int N = 24, K = 12, NP = 2, NK = N - K, M = 32;
  localparam int DEPTH = mem_depth(N, K);
  localparam int AW = $clog2(DEPTH);

  logic clk = 0, rst_n = 0, start = 0;
  logic busy, done, retx_req, y_valid;
  logic [15:0] y_pos;
  logic [M-1:0] y_val;
  logic a_we, b_we, a_we_m;
  logic [AW-1:0] a_addr, b_addr, a_addr_m;
  logic [M-1:0] a_wdata, b_wdata, a_rdata, b_rdata, a_wdata_m;
  pe_op_e pe_op;
  logic [NP-1:0] pe_en;
  logic pe_first;
  logic [M-1:0] pe_a, pe_chain0;
  logic [M-1:0] pe_acc [NP];
  logic [M-1:0] pe_chain [NP];
  logic pe_cf [NP];
  int checks = 0, failures = 0, done_cycles = 0;

  // Testbench loads memory through port A while the controller is idle.
  logic tb_we = 0;
  logic [AW-1:0] tb_addr = '0;
  logic [M-1:0] tb_wdata = '0;

  always #5 clk = ~clk;

  rs_ctrl #(.N(N), .K(K), .NUM_PE(NP)) dut (.*);

  assign a_we_m    = busy ? a_we    : tb_we;
  assign a_addr_m  = busy ? a_addr  : tb_addr;
  assign a_wdata_m = busy ? a_wdata : tb_wdata;

  dp_ram #(.WIDTH(M), .DEPTH(DEPTH)) u_mem (.clk, .a_we(a_we_m), .a_addr(a_addr_m),
    .a_wdata(a_wdata_m), .a_rdata, .b_we, .b_addr, .b_wdata, .b_rdata);

  gf_pe u_pe0 (.clk, .rst_n, .op(pe_op), .en(pe_en[0]), .first(pe_first), .a_in(pe_a),
               .chain_in(pe_chain0), .chain_first_in(pe_first),
               .acc_q(pe_acc[0]), .chain_q(pe_chain[0]), .chain_first_q(pe_cf[0]));
  gf_pe u_pe1 (.clk, .rst_n, .op(pe_op), .en(pe_en[1]), .first(pe_first), .a_in(pe_a),
               .chain_in(pe_chain[0]), .chain_first_in(pe_cf[0]),
               .acc_q(pe_acc[1]), .chain_q(pe_chain[1]), .chain_first_q(pe_cf[1]));

  always @(posedge clk) if (done) done_cycles++;

  task automatic check(logic [31:0] got, logic [31:0] want, string what);
    checks++;
    if (got !== want) begin
      failures++;
      $display("FAIL: %s got %h want %h", what, got, want);
    end
  endtask

  task automatic wr(int addr, logic [31:0] d);
    @(negedge clk); tb_we = 1; tb_addr = AW'(addr); tb_wdata = d;
    @(negedge clk); tb_we = 0;
  endtask

  task automatic run(int e);
    logic [31:0] cw [], rx [], lam [], s [], om [];
    int pos [$];
    bit er [N];
    make_codeword(N, K, cw);
    rx = new[N];
    foreach (rx[i]) rx[i] = cw[i];
    foreach (er[i]) er[i] = 0;
    while (pos.size() < e) begin
      int p;
      p = $urandom_range(N - 1);
      if (!er[p]) begin er[p] = 1; pos.push_back(p); end
    end
    pos.sort();
    foreach (pos[i]) rx[pos[i]] = $urandom;
    wr(0, e);
    foreach (pos[i]) wr(1 + i, pos[i]);
    for (int i = 0; i < N; i++) wr(base_r(N, K) + i, rx[i]);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    checks++;
    if (!busy) begin failures++; $display("FAIL: busy"); end
    done_cycles = 0;
    wait (done); @(negedge clk); @(negedge clk);
    checks++;
    if (busy || done_cycles != 1) begin failures++; $display("FAIL: done pulse"); end
    // reference polynomials
    s = new[NK];
    foreach (s[i]) s[i] = geval(rx, gpow(32'd2, i));
    lam = new[e + 1];
    foreach (lam[i]) lam[i] = 0;
    lam[0] = 1;
    for (int j = 0; j < e; j++) begin
      logic [31:0] xj;
      xj = gpow(32'd2, pos[j]);
      for (int t = j + 1; t >= 1; t--) lam[t] = lam[t] ^ gmul(xj, lam[t-1]);
    end
    om = new[e];
    foreach (om[i]) begin
      om[i] = 0;
      for (int t = 0; t <= i; t++) om[i] = om[i] ^ gmul(lam[t], s[i - t]);
    end
    for (int j = 0; j < NK; j++) check(u_mem.mem[base_a(N, K) + j], gpow(32'd2, j), "a_j");
    for (int j = 0; j < e; j++) check(u_mem.mem[base_x(N, K) + j], gpow(32'd2, pos[j]), "X_j");
    for (int j = 0; j < NK; j++) check(u_mem.mem[base_s(N, K) + j], s[j], $sformatf("S_%0d", j));
    for (int j = 0; j <= e; j++) check(u_mem.mem[base_lam(N, K) + j], lam[j], $sformatf("lambda_%0d", j));
    for (int j = 0; j < e; j++) check(u_mem.mem[base_omg(N, K) + j], om[j], $sformatf("omega_%0d", j));
    for (int i = 0; i < N; i++) check(u_mem.mem[base_r(N, K) + i], cw[i], $sformatf("R_%0d", i));
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(NK);
    run(3);
    run(1);
    run(7);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

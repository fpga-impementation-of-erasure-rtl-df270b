// rs_word_runner: drives one decoder instance (RS(n,k), NP units) through
// one decode of a random codeword with e erasures and checks it.
//
// On a go pulse it builds a codeword (rs_ref_pkg), overwrites the e erased
// symbols with random data, loads memory with hierarchical writes through
// the host port, starts the decoder, counts cycles from start to done and
// compares all n symbols after decoding. fin rises when finished; checks,
// failures and cycles report the result. The expected cycle count (from
// the throughput the paper reports for the configuration) is compared
// with a relative tolerance tol_pct.
module rs_word_runner #(
  parameter int N  = 200,
  parameter int K  = 136,
  parameter int NP = 1
) (
  input  logic clk,
  input  logic go,
  input  int   e,
  input  int   exp_cycles,
  input  int   tol_pct,
  output logic fin,
  output int   checks,
  output int   failures,
  output int   cycles
);
  import rs_ref_pkg::*;
  import rs_pkg::*;

  localparam int AW = $clog2(mem_depth(N, K));
  localparam int RB = base_r(N, K);

  logic rst_n = 0, start = 0, busy, done, retx_req, host_we = 0, y_valid;
  logic [AW-1:0] host_addr = '0;
  logic [31:0] host_wdata = '0, host_rdata, y_val;
  logic [15:0] y_pos;

  rs_erasure_decoder #(.N(N), .K(K), .NUM_PE(NP)) dut (.*);

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
    fin = 0; checks = 0; failures = 0; cycles = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    wait (go);
    make_codeword(N, K, cw);
    rx = new[N];
    foreach (rx[i]) rx[i] = cw[i];
    foreach (erased[i]) erased[i] = 0;
    for (int i = 0; i < e; i++) begin
      int p;
      do p = $urandom_range(N - 1); while (erased[p]);
      erased[p] = 1;
      rx[p] = $urandom;
    end
    host_write(0, e);
    begin
      int j;
      j = 0;
      for (int i = 0; i < N; i++) if (erased[i]) begin host_write(1 + j, i); j++; end
    end
    for (int i = 0; i < N; i++) host_write(RB + i, rx[i]);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    cycles = 1;
    while (!done) begin @(posedge clk); #1; cycles++; end
    @(negedge clk);
    for (int i = 0; i < N; i++) begin
      @(negedge clk); host_addr = AW'(RB + i);
      @(negedge clk);
      checks++;
      if (host_rdata != cw[i]) begin
        failures++;
        $display("FAIL: NP=%0d symbol %0d got %h want %h", NP, i, host_rdata, cw[i]);
      end
    end
    checks++;
    if (cycles * 100 > exp_cycles * (100 + tol_pct) ||
        cycles * 100 < exp_cycles * (100 - tol_pct)) begin
      failures++;
      $display("FAIL: NP=%0d cycles %0d, expected %0d +-%0d%%", NP, cycles, exp_cycles, tol_pct);
    end
    $display("RS(%0d,%0d) P=%0d e=%0d: %0d cycles, %0d kbit/s at 100 MHz (paper-derived %0d cycles)",
             N, K, NP, e, cycles, (K * 32 * 100000) / cycles, exp_cycles);
    fin = 1;
  end
endmodule

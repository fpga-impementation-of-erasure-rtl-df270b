// tb_dp_ram: random traffic on both ports of the dual-port RAM, compared
// with an array model. Each port writes or reads a random address every
// cycle (never both writing one address); read data is checked one cycle
// after the address, including reads of words the other port just wrote.
module tb_dp_ram;
  localparam int W = 32, D = 64;
  logic clk = 0;
  logic a_we = 0, b_we = 0;
  logic [5:0] a_addr = 0, b_addr = 0;
  logic [W-1:0] a_wdata = 0, b_wdata = 0, a_rdata, b_rdata;
  logic [W-1:0] model [D];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  dp_ram #(.WIDTH(W), .DEPTH(D)) dut (.*);

  initial begin
    // initialise memory through both ports
    for (int i = 0; i < D; i += 2) begin
      @(negedge clk);
      a_we = 1; a_addr = 6'(i);     a_wdata = $urandom; model[i] = a_wdata;
      b_we = 1; b_addr = 6'(i + 1); b_wdata = $urandom; model[i + 1] = b_wdata;
    end
    for (int n = 0; n < 5000; n++) begin
      logic [W-1:0] ea, eb;
      logic ra, rb;
      @(negedge clk);
      a_addr = 6'($urandom); b_addr = 6'($urandom);
      a_we = $urandom_range(1); b_we = $urandom_range(1);
      if (a_addr == b_addr) b_we = 0;
      a_wdata = $urandom; b_wdata = $urandom;
      ra = !a_we; rb = !b_we;
      ea = model[a_addr]; eb = model[b_addr];
      @(posedge clk); #1;
      if (a_we) model[a_addr] = a_wdata;
      if (b_we) model[b_addr] = b_wdata;
      if (ra) begin
        checks++;
        if (a_rdata !== ea) begin failures++; $display("FAIL: A[%0d]", a_addr); end
      end
      if (rb) begin
        checks++;
        if (b_rdata !== eb) begin failures++; $display("FAIL: B[%0d]", b_addr); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

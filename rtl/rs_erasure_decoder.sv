// rs_erasure_decoder: erasure-only Reed-Solomon decoder over GF(2^32).
//
// An RS(n,k) word whose erased symbol positions are known is corrected
// without error location (no Chien search): the erasure values Y_j follow
// from the syndromes, the erasure locator Lambda(z), the evaluator Omega(z)
// and the Forney formula. The datapath is a row of NUM_PE identical
// processing units (gf_pe), each one single-cycle GF(2^32) multiplier with
// an XOR adder and registers; all decoding steps are time-shared on them.
// The units, one dual-port RAM (dp_ram) holding every polynomial, and the
// controller (rs_ctrl) form the architecture of the paper: memory port A
// and port B are broadcast to all units, unit p feeds unit p+1, and the
// controller addresses the memory.
// Usage: while busy is low the host owns memory port A (host_*): it writes
// word 0 = e, words 1..e = erased positions (increasing), and the received
// symbols r_0..r_(n-1) at word base_r(N,K)+i (rs_pkg). A start pulse runs
// one decode; the corrected symbols are written back into the R region
// and also shown one per y_valid pulse (position y_pos, error value y_val).
// done pulses at the end; retx_req set with it means e > n-k and nothing
// was corrected. Host reads return data one cycle after the address.
// host_we and start must stay low while busy (checked by an assertion).
// Decoding takes about n+2e + n(n-k)/P + e^2/P + 2e(e+2M)/P cycles
// (about 30,000 for RS(200,136), e = 64, one unit).
// Defaults are the paper's example: RS(200,136), m0 = 0, one unit.
module rs_erasure_decoder
  import rs_pkg::*;
#(
  parameter int unsigned N      = 200,
  parameter int unsigned K      = 136,
  parameter int unsigned NUM_PE = 1,
  localparam int unsigned M     = GF_M,
  localparam int unsigned DEPTH = mem_depth(N, K),
  localparam int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  output logic          busy,
  output logic          done,
  output logic          retx_req,
  input  logic          host_we,
  input  logic [AW-1:0] host_addr,
  input  logic [M-1:0]  host_wdata,
  output logic [M-1:0]  host_rdata,
  output logic          y_valid,
  output logic [15:0]   y_pos,
  output logic [M-1:0]  y_val
);

  logic          c_a_we, c_b_we, m_a_we;
  logic [AW-1:0] c_a_addr, c_b_addr, m_a_addr;
  logic [M-1:0]  c_a_wdata, c_b_wdata, m_a_wdata, a_rdata, b_rdata;

  pe_op_e            pe_op;
  logic [NUM_PE-1:0] pe_en;
  logic              pe_first;
  logic [M-1:0]      pe_a, pe_chain0;
  logic [M-1:0]      pe_acc   [NUM_PE];
  logic [M-1:0]      pe_chain [NUM_PE];
  logic              pe_cfirst [NUM_PE];

  rs_ctrl #(.N(N), .K(K), .NUM_PE(NUM_PE)) u_ctrl (
    .clk, .rst_n, .start, .busy, .done, .retx_req,
    .a_we(c_a_we), .a_addr(c_a_addr), .a_wdata(c_a_wdata), .a_rdata,
    .b_we(c_b_we), .b_addr(c_b_addr), .b_wdata(c_b_wdata), .b_rdata,
    .pe_op, .pe_en, .pe_first, .pe_a, .pe_chain0, .pe_acc, .pe_chain,
    .y_valid, .y_pos, .y_val
  );

  // Port A belongs to the host while the decoder is idle.
  assign m_a_we    = busy ? c_a_we    : host_we;
  assign m_a_addr  = busy ? c_a_addr  : host_addr;
  assign m_a_wdata = busy ? c_a_wdata : host_wdata;
  assign host_rdata = a_rdata;

  dp_ram #(.WIDTH(M), .DEPTH(DEPTH)) u_mem (
    .clk,
    .a_we(m_a_we), .a_addr(m_a_addr), .a_wdata(m_a_wdata), .a_rdata,
    .b_we(c_b_we), .b_addr(c_b_addr), .b_wdata(c_b_wdata), .b_rdata
  );

  for (genvar p = 0; p < int'(NUM_PE); p++) begin : g_pe
    gf_pe u_pe (
      .clk, .rst_n,
      .op(pe_op), .en(pe_en[p]), .first(pe_first),
      .a_in(pe_a),
      .chain_in((p == 0) ? pe_chain0 : pe_chain[(p == 0) ? 0 : p - 1]),
      .chain_first_in((p == 0) ? pe_first : pe_cfirst[(p == 0) ? 0 : p - 1]),
      .acc_q(pe_acc[p]), .chain_q(pe_chain[p]), .chain_first_q(pe_cfirst[p])
    );
  end

  // Host rules: memory writes and start only while the decoder is idle.
  a_host_idle: assert property (@(posedge clk) disable iff (!rst_n)
    busy |-> !host_we && !start);

endmodule

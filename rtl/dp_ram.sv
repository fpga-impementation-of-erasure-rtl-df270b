// dp_ram: true dual-port synchronous RAM, the shared memory of the decoder.
//
// Two independent ports (A and B), each with one read or write per cycle.
// A read returns the addressed word one clock after the address is
// presented (registered output, read-before-write on the same port). The
// paper places every polynomial of the decoder in one block RAM (one
// RAMB36 for RS(200,136), 1024 x 32); this model keeps that organisation.
// Simultaneous writes of both ports to one address are not allowed: the
// controller never issues them, and an assertion flags them.
module dp_ram #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 1024,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             a_we,
  input  logic [AW-1:0]    a_addr,
  input  logic [WIDTH-1:0] a_wdata,
  output logic [WIDTH-1:0] a_rdata,
  input  logic             b_we,
  input  logic [AW-1:0]    b_addr,
  input  logic [WIDTH-1:0] b_wdata,
  output logic [WIDTH-1:0] b_rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (a_we) mem[a_addr] <= a_wdata;
    if (b_we) mem[b_addr] <= b_wdata;
    a_rdata <= mem[a_addr];
    b_rdata <= mem[b_addr];
  end

  a_no_write_collision: assert property (@(posedge clk)
    !(a_we && b_we && a_addr == b_addr));

endmodule

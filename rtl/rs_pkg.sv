// rs_pkg: shared types and constants of the erasure-only Reed-Solomon decoder.
//
// Holds the field definition (GF(2^32) generated by the pentanomial
// P(x) = 1 + x + x^3 + x^31 + x^32, the lowest-cost primitive polynomial of
// the five compared for this field), the operation codes the controller
// sends to the processing units, and the memory map of the shared dual-port
// RAM. The polynomial choice follows the paper; the opcode set and the
// memory layout are this design's own.
package rs_pkg;

  // Field size and primitive polynomial (x^32 term implied).
  localparam int unsigned GF_M    = 32;
  localparam logic [31:0] GF_POLY = 32'h8000_000B; // x^31 + x^3 + x + 1

  // Operations of one processing unit (applied one cycle after issue).
  typedef enum logic [3:0] {
    PE_NOP,     // hold all registers
    PE_LOADC,   // coef <= a_in
    PE_HORNER,  // acc  <= acc*coef + a_in        (acc taken as 0 when first)
    PE_HOLD,    // aux  <= acc
    PE_LAM,     // chain <= chain_in + coef*aux; aux <= chain_in (aux as 0 when first)
    PE_SHIFT,   // chain <= chain_in
    PE_MAC,     // acc  <= acc + a_in*chain_in; chain <= chain_in (acc as 0 when first)
    PE_INVLD,   // coef <= acc                     (beta of the inversion)
    PE_SQR,     // acc  <= acc*acc
    PE_MULC,    // acc  <= acc*coef
    PE_MULH     // acc  <= acc*aux
  } pe_op_e;

  // Source of the broadcast operand taken from memory port A/B.
  typedef enum logic [1:0] {SRC_MEM, SRC_ZERO, SRC_ONE} src_e;

  // Memory map: control word (erasure count), erasure positions, R(z),
  // S(z), Lambda(z), Omega(z), X_j and a_j = alpha^j, one symbol per word.
  localparam int unsigned BASE_POS = 1;
  function automatic int unsigned base_r(int unsigned n, int unsigned k);
    return 1 + (n - k);
  endfunction
  function automatic int unsigned base_s(int unsigned n, int unsigned k);
    return base_r(n, k) + n;
  endfunction
  function automatic int unsigned base_lam(int unsigned n, int unsigned k);
    return base_s(n, k) + (n - k);
  endfunction
  function automatic int unsigned base_omg(int unsigned n, int unsigned k);
    return base_lam(n, k) + (n - k) + 1;
  endfunction
  function automatic int unsigned base_x(int unsigned n, int unsigned k);
    return base_omg(n, k) + (n - k);
  endfunction
  function automatic int unsigned base_a(int unsigned n, int unsigned k);
    return base_x(n, k) + (n - k);
  endfunction
  function automatic int unsigned mem_words(int unsigned n, int unsigned k);
    return base_a(n, k) + (n - k);
  endfunction
  // Power-of-two depth that holds the map (1024 words for RS(200,136)).
  function automatic int unsigned mem_depth(int unsigned n, int unsigned k);
    int unsigned d;
    d = 1;
    while (d < mem_words(n, k)) d = d * 2;
    return d;
  endfunction

endpackage

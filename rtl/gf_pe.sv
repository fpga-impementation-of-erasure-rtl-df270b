// gf_pe: one processing unit of the decoder, built around a single
// single-cycle GF(2^M) multiplier, an XOR adder and delay registers.
//
// The same hardware is switched between the four structures of the paper:
//   syndrome     S_j = R(alpha_j)      Horner: acc <= acc*alpha_j + r_i
//   locator      Lambda(z) = prod(1 + X_j z): a streamed coefficient x_i
//                becomes x_i + X_j*x_(i-1); the z^-1 register is aux
//   evaluator    Omega(z) = Lambda(z)S(z) mod z^(n-k): acc <= acc + l_t*s
//   inversion    beta^-1 = beta^(2^M-2) by alternating squaring (SQR) and
//                multiplication with the held beta (MULC), 2M-3 products
// plus the Forney Horner evaluation, which reuses the syndrome form.
// Registers: acc (accumulator), coef (held multiplier operand: alpha_j,
// X_j or beta), aux (z^-1 of the locator structure, or the held Forney
// numerator) and chain (output towards the next unit; in the evaluator
// step it carries syndromes down the row of units).
// Interface: op/first are common to all units; en selects the unit for
// unit-specific ops (LOADC, HORNER, ...). a_in is the broadcast memory
// word, chain_in the chain output of the previous unit (or memory for
// unit 0); chain_first_in marks the first coefficient of a locator stream
// (first itself for unit 0, the previous unit's chain_first_q otherwise). Every op takes effect at the clock edge; acc_q and chain_q are
// the registered results. The mapping of Fig. 2 onto one unit with these
// registers, and the opcode set, are this design's choices.
module gf_pe
  import rs_pkg::*;
#(
  parameter int unsigned M    = GF_M,
  parameter logic [M-1:0] POLY = M'(GF_POLY)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  pe_op_e       op,
  input  logic         en,
  input  logic         first,
  input  logic [M-1:0] a_in,
  input  logic [M-1:0] chain_in,
  input  logic         chain_first_in,
  output logic [M-1:0] acc_q,
  output logic [M-1:0] chain_q,
  output logic         chain_first_q
);

  logic [M-1:0] coef_q, aux_q;
  logic [M-1:0] acc_eff, aux_eff;
  logic [M-1:0] mul_a, mul_b, prod;

  assign acc_eff = first ? '0 : acc_q;
  // In the locator stream the start-of-polynomial mark travels with the
  // data, one unit per cycle, so each unit clears its z^-1 term in time.
  assign aux_eff = chain_first_in ? '0 : aux_q;

  // Operand switch in front of the one multiplier.
  always_comb begin
    mul_a = acc_eff;
    mul_b = coef_q;
    unique case (op)
      PE_LAM:  begin mul_a = aux_eff; mul_b = coef_q;   end
      PE_MAC:  begin mul_a = a_in;    mul_b = chain_in; end
      PE_SQR:  begin mul_a = acc_q;   mul_b = acc_q;    end
      PE_MULC: begin mul_a = acc_q;   mul_b = coef_q;   end
      PE_MULH: begin mul_a = acc_q;   mul_b = aux_q;    end
      default: begin mul_a = acc_eff; mul_b = coef_q;   end
    endcase
  end

  gf_mult #(.M(M), .POLY(POLY)) u_mult (.a(mul_a), .b(mul_b), .c(prod));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_q   <= '0;
      coef_q  <= '0;
      aux_q   <= '0;
      chain_q <= '0;
      chain_first_q <= 1'b0;
    end else begin
      chain_first_q <= (op == PE_LAM) && chain_first_in;
      // Chain ops run in every unit of the row at once.
      unique case (op)
        PE_LAM: begin
          chain_q <= chain_in ^ prod;
          aux_q   <= chain_in;
        end
        PE_SHIFT: chain_q <= chain_in;
        PE_MAC: begin
          chain_q <= chain_in;
          if (en) acc_q <= acc_eff ^ prod;
        end
        default: ;
      endcase
      if (en) begin
        unique case (op)
          PE_LOADC:  coef_q <= a_in;
          PE_HORNER: acc_q  <= prod ^ a_in;
          PE_HOLD:   aux_q  <= acc_q;
          PE_INVLD:  coef_q <= acc_q;
          PE_SQR,
          PE_MULC,
          PE_MULH:   acc_q  <= prod;
          default: ;
        endcase
      end
    end
  end

endmodule

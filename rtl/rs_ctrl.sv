// rs_ctrl: controller of the erasure-only Reed-Solomon decoder.
//
// Walks one received word through the decoding steps, in this order:
//   1. erasure locators: steps alpha^p for p = 0..n-1 with a
//      multiply-by-alpha register, writes a_p = alpha^p (p < n-k) and, at
//      each erased position i_j, X_j = alpha^(i_j)           ~ n + 2e cycles
//   2. syndromes S_j = R(alpha^j), j = 0..n-k-1, P at a time, Horner over
//      r_(n-1)..r_0 broadcast on port A                      ~ n(n-k)/P
//   3. Lambda(z) = prod (1 + X_j z): Lambda is streamed from memory
//      through the row of P units, each applying one factor; results are
//      written back P cycles later on port B                  ~ e^2/2P
//   4. Omega(z) = Lambda(z)S(z) mod z^(n-k), coefficients 0..e-1, P at a
//      time: lambda_t broadcast on port A, syndromes shifted down the row
//      of units from port B                                   ~ e^2/2P
//   5. Forney, P erasures at a time: numerator X^e*Omega(1/X) and
//      denominator X^e*(z Lambda'(z) at 1/X) by Horner at z = X_j (no field
//      inversion of X_j), then denominator^-1 by 2M-3 square/multiply
//      steps, then Y_j = numerator * denominator^-1; the corrected symbol
//      R[i_j] + Y_j is written back into R and shown on y_*.
// Memory map (rs_pkg): word 0 = e, words 1..e = erasure positions in
// increasing order, then R, S, Lambda, Omega, X and a regions.
// Timing: the memory answers a read one cycle late, so every unit
// operation (uop) is generated with its read address and applied one
// cycle later together with the read data. start is a one-cycle pulse;
// busy is high while decoding; done pulses once at the end. If e > n-k the
// word cannot be corrected: done comes with retx_req high (a retransmission
// request of the hybrid-ARQ scheme) and memory is left untouched.
// Step order, cycle counts and the Forney rewriting follow the paper; the
// memory map, the schedule of ports and the stall cycles are this design's.
module rs_ctrl
  import rs_pkg::*;
#(
  parameter int unsigned N      = 200,
  parameter int unsigned K      = 136,
  parameter int unsigned NUM_PE = 1,
  parameter int unsigned M      = GF_M,
  parameter logic [M-1:0] POLY  = M'(GF_POLY),
  localparam int unsigned DEPTH = mem_depth(N, K),
  localparam int unsigned AW    = $clog2(DEPTH),
  localparam int unsigned PW    = (NUM_PE > 1) ? $clog2(NUM_PE) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  output logic              busy,
  output logic              done,
  output logic              retx_req,
  // memory port A
  output logic              a_we,
  output logic [AW-1:0]     a_addr,
  output logic [M-1:0]      a_wdata,
  input  logic [M-1:0]      a_rdata,
  // memory port B
  output logic              b_we,
  output logic [AW-1:0]     b_addr,
  output logic [M-1:0]      b_wdata,
  input  logic [M-1:0]      b_rdata,
  // processing units
  output pe_op_e            pe_op,
  output logic [NUM_PE-1:0] pe_en,
  output logic              pe_first,
  output logic [M-1:0]      pe_a,
  output logic [M-1:0]      pe_chain0,
  input  logic [M-1:0]      pe_acc   [NUM_PE],
  input  logic [M-1:0]      pe_chain [NUM_PE],
  // corrected symbols
  output logic              y_valid,
  output logic [15:0]       y_pos,
  output logic [M-1:0]      y_val
);

  localparam int unsigned NK   = N - K;
  localparam int unsigned P    = NUM_PE;
  localparam logic [15:0] POSB = 16'(BASE_POS);
  localparam logic [15:0] RB   = 16'(base_r(N, K));
  localparam logic [15:0] SB   = 16'(base_s(N, K));
  localparam logic [15:0] LB   = 16'(base_lam(N, K));
  localparam logic [15:0] OB   = 16'(base_omg(N, K));
  localparam logic [15:0] XB   = 16'(base_x(N, K));
  localparam logic [15:0] ABS  = 16'(base_a(N, K));

  typedef enum logic [4:0] {
    S_IDLE, S_RD_E, S_WT_E,
    X_RDPOS, X_WTPOS, X_STEP,
    SY_LOAD, SY_RUN, SY_WR,
    LA_LOAD, LA_RUN, LA_DRAIN,
    OM_PRE, OM_RUN, OM_WR, OM_GAP,
    FO_LOAD, FO_NUM, FO_HOLD, FO_DEN, FO_INVLD, FO_INV, FO_MULH,
    FO_RDPOS, FO_RDR, FO_WR,
    S_DONE
  } state_e;

  // Unit operation, applied one cycle after it is generated.
  typedef struct packed {
    pe_op_e            op;
    logic [NUM_PE-1:0] en;
    logic              first;
    src_e              asel;    // operand from port A
    src_e              bsel;    // operand from port B
    logic              chain_b; // unit 0 chain input: 1 = port B, 0 = port A
    logic              wr;      // write pe_acc[wpe] to waddr on port B
    logic              lam_wr;  // write last unit's chain output P cycles later
    logic [AW-1:0]     waddr;
    logic [PW-1:0]     wpe;
  } uop_t;

  localparam uop_t UOP_NOP = '{op: PE_NOP, asel: SRC_MEM, bsel: SRC_MEM, default: '0};

  state_e      state_q, state_d;
  logic [15:0] e_q, e_d;         // number of erasures
  logic [15:0] j_q, j_d;         // erasure index (step 1)
  logic [15:0] p_q, p_d;         // position counter (step 1)
  logic [15:0] pos_q, pos_d;     // current erasure position
  logic [15:0] grp_q, grp_d;     // first index handled by unit 0 in this group
  logic [15:0] cnt_q, cnt_d;     // inner loop counter
  logic [15:0] sub_q, sub_d;     // unit index within a group
  logic [M-1:0] alpha_q, alpha_d;
  logic        fail_q, fail_d;
  uop_t        uop0, uop1;

  // Stage-0 memory requests.
  logic          a_we0, b_we0;
  logic [15:0]   a_addr0, b_addr0;
  logic [M-1:0]  a_wdata0, b_wdata0;

  function automatic logic [M-1:0] mul_alpha(logic [M-1:0] v);
    return v[M-1] ? ((v << 1) ^ POLY) : (v << 1);
  endfunction

  function automatic logic [NUM_PE-1:0] onehot(logic [PW-1:0] i);
    logic [NUM_PE-1:0] v;
    v = '0;
    v[i] = 1'b1;
    return v;
  endfunction

  function automatic logic [15:0] min16(logic [15:0] x, logic [15:0] y);
    return (x < y) ? x : y;
  endfunction

  localparam logic [15:0] P16    = 16'(P);
  localparam logic [15:0] NK16   = 16'(NK);
  localparam logic [15:0] N16    = 16'(N);
  localparam logic [15:0] INV_LAST = 16'(2 * M - 4);

  // Scratch terms of the step-1 and step-4 decisions.
  logic        hit, fin;
  logic [15:0] si;
  assign hit = (j_q < e_q) && (p_q == pos_q);
  assign si  = grp_q + P16 - 16'd1 - sub_q;

  always_comb begin
    fin      = 1'b0;
    state_d  = state_q;
    e_d      = e_q;
    j_d      = j_q;
    p_d      = p_q;
    pos_d    = pos_q;
    grp_d    = grp_q;
    cnt_d    = cnt_q;
    sub_d    = sub_q;
    alpha_d  = alpha_q;
    fail_d   = fail_q;
    uop0     = UOP_NOP;
    a_we0    = 1'b0;
    a_addr0  = '0;
    a_wdata0 = '0;
    b_we0    = 1'b0;
    b_addr0  = '0;
    b_wdata0 = '0;
    y_valid  = 1'b0;
    y_pos    = pos_q;
    y_val    = pe_acc[sub_q[PW-1:0]];
    done     = 1'b0;

    unique case (state_q)
      S_IDLE: if (start) begin
        fail_d  = 1'b0;
        state_d = S_RD_E;
      end
      S_RD_E: begin
        b_addr0 = '0;
        state_d = S_WT_E;
      end
      S_WT_E: begin
        e_d     = b_rdata[15:0];
        j_d     = '0;
        p_d     = '0;
        alpha_d = M'(1);
        if (b_rdata > M'(NK)) begin
          fail_d  = 1'b1;
          state_d = S_DONE;
        end else if (b_rdata == '0) state_d = S_DONE;
        else                        state_d = X_RDPOS;
      end

      // ---- 1. erasure locators X_j and evaluation points a_j ----
      X_RDPOS: begin
        b_addr0 = POSB + j_q;
        state_d = X_WTPOS;
      end
      X_WTPOS: begin
        pos_d   = b_rdata[15:0];
        state_d = X_STEP;
      end
      X_STEP: begin
        if (p_q < NK16) begin
          a_we0    = 1'b1;
          a_addr0  = ABS + p_q;
          a_wdata0 = alpha_q;
        end
        if (hit) begin
          b_we0    = 1'b1;
          b_addr0  = XB + j_q;
          b_wdata0 = alpha_q;
          j_d      = j_q + 16'd1;
        end
        p_d     = p_q + 16'd1;
        alpha_d = mul_alpha(alpha_q);
        fin     = ((p_q + 16'd1 >= NK16) && (j_d == e_q)) || (p_q + 16'd1 >= N16);
        if (fin) begin
          grp_d   = '0;
          sub_d   = '0;
          state_d = SY_LOAD;
        end else if (hit && j_d < e_q) state_d = X_RDPOS;
      end

      // ---- 2. syndromes ----
      SY_LOAD: begin
        a_addr0   = ABS + grp_q + sub_q;
        uop0.op   = PE_LOADC;
        uop0.en   = onehot(sub_q[PW-1:0]);
        uop0.asel = (grp_q + sub_q < NK16) ? SRC_MEM : SRC_ZERO;
        sub_d     = sub_q + 16'd1;
        if (sub_q == P16 - 16'd1) begin
          cnt_d   = N16 - 16'd1;
          state_d = SY_RUN;
        end
      end
      SY_RUN: begin
        a_addr0    = RB + cnt_q;
        uop0.op    = PE_HORNER;
        uop0.en    = '1;
        uop0.first = (cnt_q == N16 - 16'd1);
        cnt_d      = cnt_q - 16'd1;
        if (cnt_q == '0) begin
          sub_d   = '0;
          state_d = SY_WR;
        end
      end
      SY_WR: begin
        uop0.wr    = (grp_q + sub_q < NK16);
        uop0.waddr = AW'(SB + grp_q + sub_q);
        uop0.wpe   = sub_q[PW-1:0];
        sub_d      = sub_q + 16'd1;
        if (sub_q == P16 - 16'd1) begin
          sub_d = '0;
          if (grp_q + P16 >= NK16) begin
            grp_d   = '0;
            state_d = LA_LOAD;
          end else begin
            grp_d   = grp_q + P16;
            state_d = SY_LOAD;
          end
        end
      end

      // ---- 3. erasure locator polynomial Lambda(z) ----
      LA_LOAD: begin
        a_addr0   = XB + grp_q + sub_q;
        uop0.op   = PE_LOADC;
        uop0.en   = onehot(sub_q[PW-1:0]);
        uop0.asel = (grp_q + sub_q < e_q) ? SRC_MEM : SRC_ZERO;
        sub_d     = sub_q + 16'd1;
        if (sub_q == P16 - 16'd1) begin
          sub_d   = '0;
          cnt_d   = '0;
          state_d = LA_RUN;
        end
      end
      LA_RUN: begin
        a_addr0     = LB + cnt_q;
        uop0.op     = PE_LAM;
        uop0.en     = '1;
        uop0.first  = (cnt_q == '0);
        uop0.asel   = (cnt_q == '0 && grp_q == '0) ? SRC_ONE :
                      (cnt_q > grp_q)               ? SRC_ZERO : SRC_MEM;
        uop0.lam_wr = 1'b1;
        uop0.waddr  = AW'(LB + cnt_q);
        cnt_d       = cnt_q + 16'd1;
        if (cnt_q == min16(grp_q + P16, e_q)) begin
          cnt_d   = '0;
          state_d = LA_DRAIN;
        end
      end
      LA_DRAIN: begin  // keep the row shifting until the last write is out
        uop0.op   = PE_LAM;
        uop0.en   = '1;
        uop0.asel = SRC_ZERO;
        cnt_d     = cnt_q + 16'd1;
        if (cnt_q == P16) begin
          cnt_d = '0;
          sub_d = '0;
          if (grp_q + P16 >= e_q) begin
            grp_d   = '0;
            state_d = (P > 1) ? OM_PRE : OM_RUN;
          end else begin
            grp_d   = grp_q + P16;
            state_d = LA_LOAD;
          end
        end
      end

      // ---- 4. erasure evaluator polynomial Omega(z) ----
      OM_PRE: begin
        b_addr0      = SB + si;
        uop0.op      = PE_SHIFT;
        uop0.en      = '1;
        uop0.chain_b = 1'b1;
        uop0.bsel    = (si < NK16) ? SRC_MEM : SRC_ZERO;
        sub_d        = sub_q + 16'd1;
        if (sub_q == P16 - 16'd2) begin
          cnt_d   = '0;
          state_d = OM_RUN;
        end
      end
      OM_RUN: begin
        a_addr0      = LB + cnt_q;
        b_addr0      = SB + grp_q - cnt_q;
        uop0.op      = PE_MAC;
        uop0.en      = '1;
        uop0.first   = (cnt_q == '0);
        uop0.chain_b = 1'b1;
        uop0.bsel    = (grp_q >= cnt_q) ? SRC_MEM : SRC_ZERO;
        cnt_d        = cnt_q + 16'd1;
        if (cnt_q == min16(e_q, grp_q + P16 - 16'd1)) begin
          sub_d   = '0;
          state_d = OM_WR;
        end
      end
      OM_WR: begin
        uop0.wr    = (grp_q + sub_q < e_q);
        uop0.waddr = AW'(OB + grp_q + sub_q);
        uop0.wpe   = sub_q[PW-1:0];
        sub_d      = sub_q + 16'd1;
        if (sub_q == P16 - 16'd1) state_d = OM_GAP;
      end
      OM_GAP: begin
        sub_d = '0;
        cnt_d = '0;
        if (grp_q + P16 >= e_q) begin
          grp_d   = '0;
          state_d = FO_LOAD;
        end else begin
          grp_d   = grp_q + P16;
          state_d = (P > 1) ? OM_PRE : OM_RUN;
        end
      end

      // ---- 5. Forney: Y_j = Omega / (z Lambda') at z = 1/X_j ----
      FO_LOAD: begin
        a_addr0   = XB + grp_q + sub_q;
        uop0.op   = PE_LOADC;
        uop0.en   = onehot(sub_q[PW-1:0]);
        uop0.asel = (grp_q + sub_q < e_q) ? SRC_MEM : SRC_ZERO;
        sub_d     = sub_q + 16'd1;
        if (sub_q == P16 - 16'd1) begin
          cnt_d   = '0;
          state_d = FO_NUM;
        end
      end
      FO_NUM: begin  // Horner over omega_0..omega_(e-1), 0
        a_addr0    = OB + cnt_q;
        uop0.op    = PE_HORNER;
        uop0.en    = '1;
        uop0.first = (cnt_q == '0);
        uop0.asel  = (cnt_q < e_q) ? SRC_MEM : SRC_ZERO;
        cnt_d      = cnt_q + 16'd1;
        if (cnt_q == e_q) state_d = FO_HOLD;
      end
      FO_HOLD: begin
        uop0.op = PE_HOLD;
        uop0.en = '1;
        cnt_d   = '0;
        state_d = FO_DEN;
      end
      FO_DEN: begin  // Horner over lambda_0..lambda_e, even terms dropped
        a_addr0    = LB + cnt_q;
        uop0.op    = PE_HORNER;
        uop0.en    = '1;
        uop0.first = (cnt_q == '0);
        uop0.asel  = cnt_q[0] ? SRC_MEM : SRC_ZERO;
        cnt_d      = cnt_q + 16'd1;
        if (cnt_q == e_q) state_d = FO_INVLD;
      end
      FO_INVLD: begin
        uop0.op = PE_INVLD;
        uop0.en = '1;
        cnt_d   = '0;
        state_d = FO_INV;
      end
      FO_INV: begin  // beta^(2^M-2): (SQR, MULC) x (M-2), then SQR
        uop0.op = (cnt_q[0] && cnt_q != INV_LAST) ? PE_MULC : PE_SQR;
        uop0.en = '1;
        cnt_d   = cnt_q + 16'd1;
        if (cnt_q == INV_LAST) state_d = FO_MULH;
      end
      FO_MULH: begin
        uop0.op = PE_MULH;
        uop0.en = '1;
        sub_d   = '0;
        state_d = FO_RDPOS;
      end
      FO_RDPOS: begin
        a_addr0 = POSB + grp_q + sub_q;
        state_d = FO_RDR;
      end
      FO_RDR: begin
        pos_d   = a_rdata[15:0];
        a_addr0 = RB + a_rdata[15:0];
        state_d = FO_WR;
      end
      FO_WR: begin
        b_we0    = 1'b1;
        b_addr0  = RB + pos_q;
        b_wdata0 = a_rdata ^ pe_acc[sub_q[PW-1:0]];
        y_valid  = 1'b1;
        sub_d    = sub_q + 16'd1;
        if (sub_q == P16 - 16'd1 || grp_q + sub_q + 16'd1 >= e_q) begin
          sub_d = '0;
          if (grp_q + P16 >= e_q) state_d = S_DONE;
          else begin
            grp_d   = grp_q + P16;
            state_d = FO_LOAD;
          end
        end else state_d = FO_RDPOS;
      end

      S_DONE: begin
        done    = 1'b1;
        state_d = S_IDLE;
      end
      default: state_d = S_IDLE;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      e_q     <= '0;
      j_q     <= '0;
      p_q     <= '0;
      pos_q   <= '0;
      grp_q   <= '0;
      cnt_q   <= '0;
      sub_q   <= '0;
      alpha_q <= '0;
      fail_q  <= 1'b0;
      uop1    <= UOP_NOP;
    end else begin
      state_q <= state_d;
      e_q     <= e_d;
      j_q     <= j_d;
      p_q     <= p_d;
      pos_q   <= pos_d;
      grp_q   <= grp_d;
      cnt_q   <= cnt_d;
      sub_q   <= sub_d;
      alpha_q <= alpha_d;
      fail_q  <= fail_d;
      uop1    <= uop0;
    end
  end

  assign busy     = (state_q != S_IDLE);
  assign retx_req = fail_q;

  // ---- stage 1: operands for the units ----
  logic [M-1:0] a_eff, b_eff;
  always_comb begin
    unique case (uop1.asel)
      SRC_ZERO: a_eff = '0;
      SRC_ONE:  a_eff = M'(1);
      default:  a_eff = a_rdata;
    endcase
    unique case (uop1.bsel)
      SRC_ZERO: b_eff = '0;
      SRC_ONE:  b_eff = M'(1);
      default:  b_eff = b_rdata;
    endcase
  end

  assign pe_op     = uop1.op;
  assign pe_en     = uop1.en;
  assign pe_first  = uop1.first;
  assign pe_a      = a_eff;
  assign pe_chain0 = uop1.chain_b ? b_eff : a_eff;

  // Lambda write-back waits for the coefficient to cross the P units.
  logic          lam_v [P];
  logic [AW-1:0] lam_a [P];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(P); i++) begin
        lam_v[i] <= 1'b0;
        lam_a[i] <= '0;
      end
    end else begin
      lam_v[0] <= uop1.lam_wr;
      lam_a[0] <= uop1.waddr;
      for (int i = 1; i < int'(P); i++) begin
        lam_v[i] <= lam_v[i-1];
        lam_a[i] <= lam_a[i-1];
      end
    end
  end

  // ---- memory ports ----
  assign a_we    = a_we0;
  assign a_addr  = AW'(a_addr0);
  assign a_wdata = a_wdata0;

  always_comb begin
    b_we    = b_we0;
    b_addr  = AW'(b_addr0);
    b_wdata = b_wdata0;
    if (lam_v[P-1]) begin
      b_we    = 1'b1;
      b_addr  = lam_a[P-1];
      b_wdata = pe_chain[P-1];
    end else if (uop1.wr) begin
      b_we    = 1'b1;
      b_addr  = uop1.waddr;
      b_wdata = pe_acc[uop1.wpe];
    end
  end

  // Port B is shared by stage-0 accesses, stage-1 writes and the delayed
  // Lambda writes; the schedule never lets two of them meet.
  a_port_b_single_user: assert property (@(posedge clk) disable iff (!rst_n)
    !(lam_v[P-1] && uop1.wr) &&
    !((lam_v[P-1] || uop1.wr) && (b_we0 || uop0.chain_b && uop0.bsel == SRC_MEM
                                  || state_q == S_RD_E || state_q == X_RDPOS)));

endmodule

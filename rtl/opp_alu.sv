// opp_alu: one ALU of the Update Logic Block.
//
// Executes one 32-bit instruction: [31:24] opcode, operand codes A [23:20],
// B [19:16], C [15:12], D [11:8] (0-3 R, 4-7 G, 8-15 H), immediate [15:0].
//   NOT           A <- ~B
//   XOR AND OR    A <- B op C
//   ADD SUB MUL   A <- B op C          (32-bit, low word of the product)
//   DIV           A <- B[15:0] / C[15:0]
//   ADDI SUBI MULI DIVI  A <- B op IMM (IMM zero-extended; DIVI on 16 bits)
//   LSL LSR ROR   A <- B shifted or rotated by IMM[4:0]
//   AVG  A=IO1 B=IO2 C=IN1:        IO1 <- IO1+1; IO2 <- IO2 + (IN1-IO2)/(IO1+1)
//   VAR  A=IO1 B=IO2 C=IO3 D=IN1:  as AVG, and IO3 <- IO3 + ((IN1-IO2)^2-IO3)/(IO1+1)
//   EWMA A=IO1 B=IO2 C=IN1 D=IN2:  IO1 <- IN1; IO2 <- (IO2 >> (IN1-IO1)) + IN2
// All right-hand sides use the register values before the instruction (the
// table lines are evaluated in parallel). Divisions take a 16-bit dividend and
// divisor: the signed differences of AVG/VAR are divided by magnitude, with the
// magnitude saturated to 16 bits, and the divisor IO1+1 saturated to 16 bits. A
// zero divisor gives an all-ones 16-bit quotient. A write whose target is a
// header field is discarded by the update block.
// Timing: two cycles. Operands are selected, differences and squares formed and
// registered in cycle 1; divisions and final sums are combinational from those
// registers in cycle 2, ready to be written at the end of it.
// The instruction set, the 8-bit opcode, the 16-bit immediate, the 16-bit
// division and the two-cycle latency follow the architecture; the bit layout,
// the opcode values and the saturation rules are this design's choices.
module opp_alu
  import opp_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic [INSTR_W-1:0] instr,
  input  regs_t             r,
  input  gregs_t            g,
  input  fields_t           h,
  // cycle-2 results (combinational from the stage-1 registers)
  output logic [2:0]        wr_en,
  output logic [OPND_W-1:0] wr_sel [3],
  output reg_t              wr_val [3]
);
  // ---------------------------------------------------------------- stage 1
  opcode_e           op_q;
  logic [OPND_W-1:0] sa_q, sb_q, sc_q;
  reg_t              a_q, b_q, c_q, d_q;
  logic [15:0]       imm_q;
  logic              v_q;
  logic              dneg_q;      // IN1-IO2 < 0
  logic [15:0]       dmag_q;      // |IN1-IO2| saturated
  logic [31:0]       sq_q;        // (IN1-IO2)^2 saturated to 32 bits
  logic [15:0]       div_q;       // IO1+1 saturated

  logic [OPND_W-1:0] sa, sb, sc, sd;
  reg_t              a, b, c, d;
  logic signed [32:0] diff;
  logic [32:0]       dabs;
  logic [65:0]       sq;
  logic [32:0]       n1;
  opcode_e           op;

  assign op = opcode_e'(instr[31:24]);
  assign sa = instr[23:20];
  assign sb = instr[19:16];
  assign sc = instr[15:12];
  assign sd = instr[11:8];
  assign a  = opnd(sa, r, g, h);
  assign b  = opnd(sb, r, g, h);
  assign c  = opnd(sc, r, g, h);
  assign d  = opnd(sd, r, g, h);

  always_comb begin
    // AVG: IN1 is C; VAR: IN1 is D. IO2 is B in both.
    diff = (op == OP_VAR) ? $signed({1'b0, d}) - $signed({1'b0, b})
                          : $signed({1'b0, c}) - $signed({1'b0, b});
    dabs = diff[32] ? 33'(-diff) : 33'(diff);
    sq   = 66'(dabs) * 66'(dabs);
    n1   = {1'b0, a} + 33'd1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_q <= 1'b0; op_q <= OP_NOP; sa_q <= '0; sb_q <= '0; sc_q <= '0;
      a_q <= '0; b_q <= '0; c_q <= '0; d_q <= '0; imm_q <= '0;
      dneg_q <= 1'b0; dmag_q <= '0; sq_q <= '0; div_q <= '0;
    end else begin
      v_q    <= in_valid;
      op_q   <= in_valid ? op : OP_NOP;
      sa_q   <= sa; sb_q <= sb; sc_q <= sc;
      a_q    <= a;  b_q  <= b;  c_q  <= c;  d_q <= d;
      imm_q  <= instr[15:0];
      dneg_q <= diff[32];
      dmag_q <= (dabs > 33'hFFFF) ? 16'hFFFF : dabs[15:0];
      sq_q   <= (sq > 66'hFFFF_FFFF) ? 32'hFFFF_FFFF : sq[31:0];
      div_q  <= (n1 > 33'hFFFF) ? 16'hFFFF : n1[15:0];
    end
  end

  // ---------------------------------------------------------------- stage 2
  function automatic logic [15:0] div16(input logic [15:0] x, input logic [15:0] y);
    return (y == 16'd0) ? 16'hFFFF : x / y;
  endfunction

  // x + sign * (mag / div)
  function automatic reg_t step(input reg_t x, input logic neg, input logic [15:0] mag,
                                input logic [15:0] dv);
    logic [15:0] q;
    q = div16(mag, dv);
    return neg ? x - {16'b0, q} : x + {16'b0, q};
  endfunction

  always_comb begin
    logic signed [32:0] e;
    logic [32:0]        eabs;
    logic [15:0]        emag;
    logic [31:0]        dt;
    wr_en  = '0;
    for (int i = 0; i < 3; i++) begin wr_sel[i] = '0; wr_val[i] = '0; end
    e = $signed({1'b0, sq_q}) - $signed({1'b0, c_q});
    eabs = e[32] ? 33'(-e) : 33'(e);
    emag = (eabs > 33'hFFFF) ? 16'hFFFF : eabs[15:0];
    dt   = '0;
    if (v_q) begin
      wr_sel[0] = sa_q;
      case (op_q)
        OP_NOT:  begin wr_en[0] = 1'b1; wr_val[0] = ~b_q; end
        OP_XOR:  begin wr_en[0] = 1'b1; wr_val[0] = b_q ^ c_q; end
        OP_AND:  begin wr_en[0] = 1'b1; wr_val[0] = b_q & c_q; end
        OP_OR:   begin wr_en[0] = 1'b1; wr_val[0] = b_q | c_q; end
        OP_ADD:  begin wr_en[0] = 1'b1; wr_val[0] = b_q + c_q; end
        OP_SUB:  begin wr_en[0] = 1'b1; wr_val[0] = b_q - c_q; end
        OP_MUL:  begin wr_en[0] = 1'b1; wr_val[0] = b_q * c_q; end
        OP_DIV:  begin wr_en[0] = 1'b1; wr_val[0] = {16'b0, div16(b_q[15:0], c_q[15:0])}; end
        OP_ADDI: begin wr_en[0] = 1'b1; wr_val[0] = b_q + {16'b0, imm_q}; end
        OP_SUBI: begin wr_en[0] = 1'b1; wr_val[0] = b_q - {16'b0, imm_q}; end
        OP_MULI: begin wr_en[0] = 1'b1; wr_val[0] = b_q * {16'b0, imm_q}; end
        OP_DIVI: begin wr_en[0] = 1'b1; wr_val[0] = {16'b0, div16(b_q[15:0], imm_q)}; end
        OP_LSL:  begin wr_en[0] = 1'b1; wr_val[0] = b_q << imm_q[4:0]; end
        OP_LSR:  begin wr_en[0] = 1'b1; wr_val[0] = b_q >> imm_q[4:0]; end
        OP_ROR:  begin wr_en[0] = 1'b1;
                       wr_val[0] = (b_q >> imm_q[4:0]) | (b_q << (6'd32 - {1'b0, imm_q[4:0]})); end
        OP_AVG, OP_VAR: begin
          wr_en[1:0] = 2'b11;
          wr_val[0]  = a_q + 1'b1;
          wr_sel[1]  = sb_q;
          wr_val[1]  = step(b_q, dneg_q, dmag_q, div_q);
          if (op_q == OP_VAR) begin
            wr_en[2]  = 1'b1;
            wr_sel[2] = sc_q;
            wr_val[2] = step(c_q, e[32], emag, div_q);
          end
        end
        OP_EWMA: begin
          dt         = c_q - a_q;
          wr_en[1:0] = 2'b11;
          wr_val[0]  = c_q;
          wr_sel[1]  = sb_q;
          wr_val[1]  = ((dt >= 32'd32) ? 32'd0 : (b_q >> dt[4:0])) + d_q;
        end
        default: ;
      endcase
    end
  end
endmodule

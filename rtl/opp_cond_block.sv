// opp_cond_block: the Condition Logic Block.
//
// NCOND independent comparators. Comparator i has two operand multiplexers that
// pick any of the per-flow registers R0..R3, the global registers G0..G3 and the
// header fields H0..H7 (4-bit operand code: 0-3 R, 4-7 G, 8-15 H), and one of
// the comparisons >, >=, =, <=, < applied to the two 32-bit operands as unsigned
// numbers. The result bits form the condition vector C that the XFSM table
// matches on. A comparator configured OFF outputs 0.
// Configuration: block CFG_COND, entry i, word 0 = {op[10:8], sel_b[7:4], sel_a[3:0]}.
// Timing: C is registered, one cycle after the operands.
// Eight comparators, the operand sources and the five comparisons follow the
// architecture; the codes and unsigned arithmetic are this design's choices.
module opp_cond_block
  import opp_pkg::*;
#(
  parameter int unsigned N = NCOND
) (
  input  logic         clk,
  input  logic         rst_n,
  input  cfg_req_t     cfg,
  input  regs_t        r,
  input  gregs_t       g,
  input  fields_t      h,
  output logic [N-1:0] c
);
  cond_cfg_t cc [N];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) cc[i] <= '{op: CMP_OFF, sel_a: '0, sel_b: '0};
    end else if (cfg.we && cfg.addr[23:20] == CFG_COND && cfg.addr[19:5] < 15'(N) &&
                 cfg.addr[4:0] == 5'd0) begin
      cc[cfg.addr[5 +: $clog2(N)]] <= cond_cfg_t'(cfg.wdata[10:0]);
    end
  end

  logic [N-1:0] c_d;
  always_comb begin
    for (int i = 0; i < N; i++) begin
      reg_t a, b;
      a = opnd(cc[i].sel_a, r, g, h);
      b = opnd(cc[i].sel_b, r, g, h);
      case (cc[i].op)
        CMP_GT:  c_d[i] = a >  b;
        CMP_GE:  c_d[i] = a >= b;
        CMP_EQ:  c_d[i] = a == b;
        CMP_LE:  c_d[i] = a <= b;
        CMP_LT:  c_d[i] = a <  b;
        default: c_d[i] = 1'b0;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) c <= '0;
    else        c <= c_d;
  end
endmodule

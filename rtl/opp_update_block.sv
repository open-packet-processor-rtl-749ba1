// opp_update_block: the Update Logic Block.
//
// NALU ALUs (opp_alu) execute the instructions of the selected XFSM transition in
// parallel on the same inputs: the flow's registers R, the global registers G
// and the header fields H. Their register writes are merged into the new flow
// registers R' (starting from R, so untouched registers keep their value) and
// into per-register write enables and values for G'. If two writes target the
// same register the one from the higher-numbered ALU, and within an ALU the
// later write slot, wins. Writes to header-field codes are dropped.
// Timing: in_valid with instructions and operands in cycle t; out_valid, r_new,
// g_we and g_new are combinational in cycle t+1 (the ALUs' second cycle), to be
// stored at the end of that cycle: two cycles in all.
// Five parallel ALUs fed by the XFSM output follow the architecture; the
// conflict rule is this design's choice.
module opp_update_block
  import opp_pkg::*;
#(
  parameter int unsigned N = NALU
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  logic [INSTR_W-1:0] instr [N],
  input  regs_t              r,
  input  gregs_t             g,
  input  fields_t            h,
  output logic               out_valid,
  output regs_t              r_new,
  output logic [NGLOBAL-1:0] g_we,
  output gregs_t             g_new
);
  logic [2:0]        wr_en  [N];
  logic [OPND_W-1:0] wr_sel [N][3];
  reg_t              wr_val [N][3];

  for (genvar i = 0; i < N; i++) begin : g_alu
    opp_alu u_alu (
      .clk, .rst_n, .in_valid, .instr(instr[i]), .r, .g, .h,
      .wr_en(wr_en[i]), .wr_sel(wr_sel[i]), .wr_val(wr_val[i]));
  end

  regs_t r_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_q       <= '0;
      out_valid <= 1'b0;
    end else begin
      r_q       <= r;
      out_valid <= in_valid;
    end
  end

  always_comb begin
    r_new = r_q;
    g_we  = '0;
    g_new = '0;
    for (int i = 0; i < N; i++) begin
      for (int k = 0; k < 3; k++) begin
        if (wr_en[i][k]) begin
          if (wr_sel[i][k][3:2] == 2'b00) begin
            r_new[wr_sel[i][k][1:0]] = wr_val[i][k];
          end else if (wr_sel[i][k][3:2] == 2'b01) begin
            g_we[wr_sel[i][k][1:0]]  = 1'b1;
            g_new[wr_sel[i][k][1:0]] = wr_val[i][k];
          end
        end
      end
    end
  end
endmodule

// opp_xfsm_table: the XFSM table, the transition step of the extended finite
// state machine.
//
// A TCAM row is one transition. The match key (160 bits) holds
//   [7:0]     condition vector C0..C7
//   [23:8]    current state label
//   [151:24]  header fields H0..H3 (H0 lowest)
//   [159:152] input port
// and every bit can be a don't-care, so a condition can matter in one state and
// be ignored in another. The highest-priority (lowest-numbered) matching row
// selects its companion RAM word (192 bits):
//   [15:0] next state, [31:16] packet action, [32+32i +: 32] ALU instruction i.
// Timing: inputs in cycle t, registered hit/next_state/action/instr at the end of
// cycle t. Rows are written through opp_tcam's configuration words (block CFG_XFSM).
// Sizes (128 rows of 160 bits, 16-bit next state and action, five 32-bit
// instructions) follow the prototype; the key layout is this design's choice.
module opp_xfsm_table
  import opp_pkg::*;
#(
  parameter int unsigned ENTRIES = 128
) (
  input  logic                clk,
  input  logic                rst_n,
  input  cfg_req_t            cfg,
  input  logic [NCOND-1:0]    c,
  input  logic [STATE_W-1:0]  state,
  input  fields_t             h,
  input  logic [PORT_W-1:0]   in_port,
  output logic                hit,
  output logic [STATE_W-1:0]  next_state,
  output logic [ACTION_W-1:0] action,
  output logic [INSTR_W-1:0]  instr [NALU]
);
  logic [XKEY_W-1:0] key;
  logic              t_hit;
  logic [XVAL_W-1:0] t_val;
  logic [$clog2(ENTRIES)-1:0] t_idx;

  assign key = {6'b0, in_port, h[3], h[2], h[1], h[0], state, c};

  opp_tcam #(.ENTRIES(ENTRIES), .KEY_W(XKEY_W), .VAL_W(XVAL_W), .CFG_BLK(CFG_XFSM)) u_tcam (
    .clk, .rst_n, .cfg, .key, .hit(t_hit), .idx(t_idx), .val(t_val));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hit        <= 1'b0;
      next_state <= '0;
      action     <= '0;
      for (int i = 0; i < NALU; i++) instr[i] <= '0;
    end else begin
      hit        <= t_hit;
      next_state <= t_hit ? t_val[15:0]  : state;
      action     <= t_hit ? t_val[31:16] : '0;
      for (int i = 0; i < NALU; i++) instr[i] <= t_hit ? t_val[32 + 32*i +: 32] : '0;
    end
  end
endmodule

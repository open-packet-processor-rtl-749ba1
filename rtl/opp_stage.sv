// opp_stage: one Open Packet Processor stage.
//
// Runs one step of a programmer-defined extended finite state machine per
// packet, one packet per clock, with the flow's context kept in the stage:
//   cycle 0  extractor: header fields H0..H7, lookup key, update key
//   cycle 1  flow context table read (hash ways and wildcard TCAM)
//   cycle 2  context select: state label and registers R0..R3 of the flow
//   cycle 3  condition block: C = comparisons on R, G and H
//   cycle 4  XFSM table: {C, state, H} -> next state, action, 5 instructions
//   cycle 5  update logic, first ALU cycle
//   cycle 6  update logic, second ALU cycle; new state and R' written to the
//            flow context table under the update key, G' to the global registers
// From the flow-table read to the context write is six cycles. A packet of the
// same flow that reaches cycle 1 six or more cycles after an earlier one sees
// that packet's update; closer packets see the older context, so the mixer is
// relied on to space packets of one flow.
// The action leaves in cycle 4 (out_valid/out_action, one per input packet, in
// order) while the packet waits in the switch's delay queue. If no XFSM row
// matches, the packet gets the default action (control entry 0 word 0) and no
// context is written.
// The stage order, the blocks and the six-cycle loop follow the architecture;
// the exact cycle split and the miss behaviour are this design's choices.
module opp_stage
  import opp_pkg::*;
#(
  parameter int unsigned FT_ENTRIES   = 4096,
  parameter int unsigned FT_TCAM      = 32,
  parameter int unsigned XFSM_ENTRIES = 128
) (
  input  logic                clk,
  input  logic                rst_n,
  input  cfg_req_t            cfg,
  input  logic                in_valid,
  input  pkt_desc_t           in_desc,
  output logic                out_valid,
  output logic [ACTION_W-1:0] out_action,
  output gregs_t              g,
  output logic                hk_busy,
  output logic [31:0]         ins_fail,
  output logic [31:0]         n_inserted,
  output logic [31:0]         n_xfsm_miss
);
  // ---------------------------------------------------------------- control register
  logic [ACTION_W-1:0] default_action;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) default_action <= '0;
    else if (cfg.we && cfg.addr[23:20] == CFG_CTRL && cfg.addr[19:5] == '0 && cfg.addr[4:0] == 5'd0)
      default_action <= cfg.wdata[ACTION_W-1:0];
  end

  // ---------------------------------------------------------------- cycle 0: extractor
  logic            e_valid;
  pkt_desc_t       e_desc;
  fields_t         e_h;
  logic [FK_W-1:0] e_lk, e_up;
  opp_extractor u_extract (
    .clk, .rst_n, .cfg, .in_valid, .in_desc,
    .out_valid(e_valid), .out_desc(e_desc), .h(e_h), .lookup_key(e_lk), .update_key(e_up));

  // ---------------------------------------------------------------- cycles 1-2: flow context
  logic            f_valid, f_hash, f_tcam, f_up_hit;
  logic [1:0]      f_up_way;
  ctx_t            f_ctx;
  logic            wb_en;
  logic [FK_W-1:0] wb_key;
  ctx_t            wb_ctx;
  logic            wb_hit;
  logic [1:0]      wb_way;

  opp_flow_table #(.ENTRIES(FT_ENTRIES), .TCAM_ENTRIES(FT_TCAM)) u_flow (
    .clk, .rst_n, .cfg,
    .lk_valid(e_valid), .lk_key(e_lk), .up_key(e_up),
    .ctx_valid(f_valid), .ctx(f_ctx), .ctx_from_hash(f_hash), .ctx_from_tcam(f_tcam),
    .up_hit(f_up_hit), .up_way(f_up_way),
    .wr_en(wb_en), .wr_key(wb_key), .wr_ctx(wb_ctx), .wr_hit(wb_hit), .wr_way(wb_way),
    .hk_busy, .ins_fail, .n_inserted);

  // side band that travels with the packet through the flow table
  fields_t           p1_h, p2_h;
  logic [FK_W-1:0]   p1_up, p2_up;
  logic [PORT_W-1:0] p1_port, p2_port;
  always_ff @(posedge clk) begin
    p1_h <= e_h;    p2_h <= p1_h;
    p1_up <= e_up;  p2_up <= p1_up;
    p1_port <= e_desc.in_port; p2_port <= p1_port;
  end

  // ---------------------------------------------------------------- cycle 3: conditions
  logic [NCOND-1:0] c3;
  opp_cond_block u_cond (.clk, .rst_n, .cfg, .r(f_ctx.r), .g, .h(p2_h), .c(c3));

  logic              v3, uh3;
  logic [1:0]        uw3;
  ctx_t              ctx3;
  fields_t           h3;
  logic [FK_W-1:0]   up3;
  logic [PORT_W-1:0] port3;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v3 <= 1'b0;
    else        v3 <= f_valid;
  end
  always_ff @(posedge clk) begin
    ctx3 <= f_ctx; h3 <= p2_h; up3 <= p2_up; port3 <= p2_port;
    uh3 <= f_up_hit; uw3 <= f_up_way;
  end

  // ---------------------------------------------------------------- cycle 4: XFSM step
  logic                x_hit;
  logic [STATE_W-1:0]  x_next;
  logic [ACTION_W-1:0] x_action;
  logic [INSTR_W-1:0]  x_instr [NALU];
  opp_xfsm_table #(.ENTRIES(XFSM_ENTRIES)) u_xfsm (
    .clk, .rst_n, .cfg, .c(c3), .state(ctx3.state), .h(h3), .in_port(port3),
    .hit(x_hit), .next_state(x_next), .action(x_action), .instr(x_instr));

  logic            v4, uh4;
  logic [1:0]      uw4;
  regs_t           r4;
  fields_t         h4;
  logic [FK_W-1:0] up4;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v4 <= 1'b0;
    else        v4 <= v3;
  end
  always_ff @(posedge clk) begin
    r4 <= ctx3.r; h4 <= h3; up4 <= up3; uh4 <= uh3; uw4 <= uw3;
  end

  assign out_valid  = v4;
  assign out_action = x_hit ? x_action : default_action;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)             n_xfsm_miss <= '0;
    else if (v4 && !x_hit)  n_xfsm_miss <= n_xfsm_miss + 1'b1;
  end

  // ---------------------------------------------------------------- cycles 5-6: update
  logic               u_valid;
  regs_t              u_r;
  logic [NGLOBAL-1:0] u_gwe;
  gregs_t             u_g;
  opp_update_block u_update (
    .clk, .rst_n, .in_valid(v4 && x_hit), .instr(x_instr), .r(r4), .g, .h(h4),
    .out_valid(u_valid), .r_new(u_r), .g_we(u_gwe), .g_new(u_g));

  logic [STATE_W-1:0] ns5;
  logic [FK_W-1:0]    up5;
  logic               uh5;
  logic [1:0]         uw5;
  always_ff @(posedge clk) begin
    ns5 <= x_next; up5 <= up4; uh5 <= uh4; uw5 <= uw4;
  end

  assign wb_en  = u_valid;
  assign wb_key = up5;
  assign wb_ctx = '{flags: FLAG_ACTIVE, r: u_r, state: ns5};
  assign wb_hit = uh5;
  assign wb_way = uw5;

  opp_global_regs u_greg (.clk, .rst_n, .cfg, .upd_we(u_valid ? u_gwe : '0), .upd_val(u_g), .g);
endmodule

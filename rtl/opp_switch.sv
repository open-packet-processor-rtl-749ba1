// opp_switch: a 4x4 switch built around one OPP stage.
//
// Each of the NPORTS ports delivers packets as 64-bit beats; opp_port_rx turns a
// packet into a descriptor (its first 320 bits, length, input port) that waits
// in the port's ingress queue. The mixer takes one descriptor per clock from the
// queues in round-robin order; the metadata block stamps it with the arrival
// time; it then enters the OPP stage and, in parallel, the delay queue. When the
// stage produces the packet's action (in order, a fixed number of cycles later),
// the descriptor leaves the delay queue and the action block copies it into the
// egress queues of the chosen ports, which the outside drains with eg_pop.
// Configuration comes from an external management controller as 32-bit word
// writes on cfg (address map in opp_pkg); status outputs report the global
// registers, the flow table's housekeeping and insertion counters and drops.
// A descriptor arriving at a full ingress or egress queue is dropped and counted.
// The block structure follows the architecture; the controller is outside.
module opp_switch
  import opp_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  cfg_req_t            cfg,
  // receive ports
  input  logic [NPORTS-1:0]   rx_valid,
  input  logic [BEAT_W-1:0]   rx_data [NPORTS],
  input  logic [NPORTS-1:0]   rx_last,
  input  logic [7:0]          rx_keep [NPORTS],
  // egress queues
  input  logic [NPORTS-1:0]   eg_pop,
  output logic [NPORTS-1:0]   eg_valid,
  output pkt_desc_t           eg_desc [NPORTS],
  // status
  output gregs_t              status_g,
  output logic                status_hk_busy,
  output logic [31:0]         status_ins_fail,
  output logic [31:0]         status_n_inserted,
  output logic [31:0]         status_xfsm_miss,
  output logic [31:0]         status_drops,
  output logic [31:0]         status_q_drops
);
  localparam int unsigned QDEPTH = 16;

  // ---------------------------------------------------------------- ingress
  logic [NPORTS-1:0] rxd_valid, iq_full, iq_empty, iq_pop;
  pkt_desc_t         rxd_desc [NPORTS];
  pkt_desc_t         iq_head  [NPORTS];

  for (genvar p = 0; p < NPORTS; p++) begin : g_in
    opp_port_rx #(.PORT_ID(PORT_W'(p))) u_rx (
      .clk, .rst_n, .s_valid(rx_valid[p]), .s_data(rx_data[p]), .s_last(rx_last[p]),
      .s_keep(rx_keep[p]), .m_valid(rxd_valid[p]), .m_desc(rxd_desc[p]));
    opp_fifo #(.T(pkt_desc_t), .DEPTH(QDEPTH)) u_iq (
      .clk, .rst_n, .push(rxd_valid[p] && !iq_full[p]), .din(rxd_desc[p]), .pop(iq_pop[p]),
      .dout(iq_head[p]), .full(iq_full[p]), .empty(iq_empty[p]), .count());
  end

  logic      mx_valid, md_valid;
  pkt_desc_t mx_desc, md_desc;
  logic [TS_W-1:0] now;
  opp_mixer #(.N(NPORTS)) u_mix (
    .clk, .rst_n, .q_valid(~iq_empty), .q_desc(iq_head), .q_pop(iq_pop),
    .m_valid(mx_valid), .m_desc(mx_desc));
  opp_metadata u_meta (
    .clk, .rst_n, .in_valid(mx_valid), .in_desc(mx_desc),
    .out_valid(md_valid), .out_desc(md_desc), .now);

  // ---------------------------------------------------------------- OPP stage + delay queue
  logic                st_valid;
  logic [ACTION_W-1:0] st_action;
  opp_stage u_stage (
    .clk, .rst_n, .cfg, .in_valid(md_valid), .in_desc(md_desc),
    .out_valid(st_valid), .out_action(st_action), .g(status_g),
    .hk_busy(status_hk_busy), .ins_fail(status_ins_fail), .n_inserted(status_n_inserted),
    .n_xfsm_miss(status_xfsm_miss));

  pkt_desc_t dq_head;
  logic      dq_full, dq_empty;
  opp_fifo #(.T(pkt_desc_t), .DEPTH(8)) u_dq (
    .clk, .rst_n, .push(md_valid), .din(md_desc), .pop(st_valid),
    .dout(dq_head), .full(dq_full), .empty(dq_empty), .count());

  // ---------------------------------------------------------------- actions + egress
  logic [NPORTS-1:0] ab_push, eq_full, eq_empty;
  pkt_desc_t         ab_desc;
  opp_action_block #(.N(NPORTS)) u_act (
    .clk, .rst_n, .in_valid(st_valid), .in_desc(dq_head), .in_action(st_action),
    .eg_push(ab_push), .eg_desc(ab_desc), .n_drop(status_drops));

  for (genvar p = 0; p < NPORTS; p++) begin : g_out
    opp_fifo #(.T(pkt_desc_t), .DEPTH(QDEPTH)) u_eq (
      .clk, .rst_n, .push(ab_push[p] && !eq_full[p]), .din(ab_desc), .pop(eg_pop[p] && !eq_empty[p]),
      .dout(eg_desc[p]), .full(eq_full[p]), .empty(eq_empty[p]), .count());
    assign eg_valid[p] = !eq_empty[p];
  end

  // descriptors lost at full ingress or egress queues
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) status_q_drops <= '0;
    else status_q_drops <= status_q_drops + 32'($countones(rxd_valid & iq_full))
                                          + 32'($countones(ab_push & eq_full));
  end

  a_dq_in_order: assert property (@(posedge clk) disable iff (!rst_n) st_valid |-> !dq_empty);
endmodule

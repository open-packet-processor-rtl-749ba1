// tb_opp_switch: end-to-end test of the 4x4 OPP switch at its default sizes.
//
// The stage is programmed as a learning switch, the cross-flow example of the
// architecture: the lookup key is the destination MAC address, the update key
// the source MAC address. A flow's state is 0 (unknown) or 1 + the port its
// MAC address was seen on. XFSM rows, one per (state, input port), flood
// packets to unknown destinations, forward the others to the learned port, and
// record the input port as the new state of the source address. A wildcard
// flow-table TCAM row gives destinations whose first byte is EE the state 6,
// for which no XFSM row exists, so those packets take the default action DROP.
// Every matched transition also copies the packet timestamp into G1.
//
// Eight hosts, two per port, send packets of 48..128 bytes as 64-bit beats on
// all four ports at once. A model observes each packet as it enters the stage
// and predicts its egress copies, taking the pipeline's timing into account: a
// packet sees the learning done by a packet that entered six or more cycles
// before it, not by later ones (the cases where that matters are counted).
// Every egress queue is drained and compared with the prediction in order.
// Between two traffic phases the controller runs two housekeeping scans with
// no traffic; all learned entries must then be gone, so destinations are
// flooded again. Each mechanism (mixing of ports, learning, flood, forward,
// TCAM default + XFSM miss, the feedback-loop window, ageing, global register
// update) is counted and must occur.
module tb_opp_switch;
  import opp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  cfg_req_t cfg;
  logic [3:0] rx_valid, rx_last, eg_pop, eg_valid;
  logic [63:0] rx_data [4];
  logic [7:0]  rx_keep [4];
  pkt_desc_t   eg_desc [4];
  gregs_t      status_g;
  logic        status_hk_busy;
  logic [31:0] status_ins_fail, status_n_inserted, status_xfsm_miss, status_drops, status_q_drops;
  opp_switch dut (.*);

  `include "opp_tb_cfg.svh"

  localparam logic [15:0] FLOOD = 16'h2000, DROPA = 16'h0000;

  // ---------------------------------------------------------------- hosts
  logic [47:0] mac [8];
  function automatic int port_of(input int h); return h / 2; endfunction

  // ---------------------------------------------------------------- model
  int table_m [logic [47:0]];             // MAC -> state
  typedef struct { logic [47:0] k; int st; int t; } wr_t;
  wr_t pend [$];
  pkt_desc_t expq [4][$];
  int cyc = 0;
  int n_flood = 0, n_fwd = 0, n_drop = 0, n_stale = 0, n_mix = 0, n_relearn = 0, phase = 1;
  int last_port = -1;
  logic [31:0] last_hit_ts = 0;
  bit known_before [logic [47:0]];
  always @(posedge clk) cyc <= cyc + 1;

  always @(negedge clk) if (rst_n && dut.md_valid) begin
    pkt_desc_t d;
    logic [47:0] dst, src;
    int st, st_fresh;
    d = dut.md_desc;
    dst = d.hdr[47:0]; src = d.hdr[95:48];
    // fresh view (all earlier writes) for counting the loop window
    st_fresh = table_m.exists(dst) ? table_m[dst] : -1;
    foreach (pend[i]) if (pend[i].k == dst) st_fresh = pend[i].st;
    while (pend.size() > 0 && pend[0].t <= cyc - 6) begin
      table_m[pend[0].k] = pend[0].st;
      void'(pend.pop_front());
    end
    st = table_m.exists(dst) ? table_m[dst] : (dst[47:40] == 8'hEE ? 6 : 0);
    if (st_fresh < 0) st_fresh = (dst[47:40] == 8'hEE) ? 6 : 0;
    if (st != st_fresh) n_stale++;
    if (last_port >= 0 && int'(d.in_port) != last_port) n_mix++;
    last_port = d.in_port;
    if (st == 6) n_drop++;
    else begin
      pend.push_back('{src, int'(d.in_port) + 1, cyc});
      last_hit_ts = d.ts;
      if (st == 0) begin
        n_flood++;
        if (phase == 2 && known_before.exists(dst)) n_relearn++;
        for (int p = 0; p < 4; p++) if (p != d.in_port) expq[p].push_back(d);
      end else begin
        n_fwd++;
        expq[st - 1].push_back(d);
      end
      if (phase == 1) known_before[src] = 1;
    end
  end

  // drain and compare egress queues
  assign eg_pop = eg_valid;
  always @(negedge clk) if (rst_n) begin
    for (int p = 0; p < 4; p++) if (eg_valid[p]) begin
      checks++;
      if (expq[p].size() == 0) begin failures++; $display("port %0d: unexpected packet", p); end
      else begin
        pkt_desc_t e;
        e = expq[p].pop_front();
        if (e != eg_desc[p]) begin failures++; $display("port %0d: packet mismatch", p); end
      end
    end
  end

  // ---------------------------------------------------------------- port drivers
  bit run = 0;
  task automatic port_driver(input int p);
    while (1) begin
      @(negedge clk);
      rx_valid[p] = 0; rx_last[p] = 0;
      if (run && $urandom_range(0, 3) == 0) begin
        int h, len, dh;
        logic [7:0] bytes [128];
        h = 2 * p + $urandom_range(0, 1);
        dh = $urandom_range(0, 8);
        len = $urandom_range(48, 128);
        for (int i = 0; i < len; i++) bytes[i] = 8'($urandom);
        for (int i = 0; i < 6; i++) begin
          logic [47:0] dm;
          dm = (dh == 8) ? {8'hEE, 40'(p * 1000 + 7)} : mac[dh];
          bytes[i] = dm[i*8 +: 8];
          bytes[6 + i] = mac[h][i*8 +: 8];
        end
        for (int b = 0; b < (len + 7) / 8; b++) begin
          rx_valid[p] = 1;
          rx_last[p] = (b == (len + 7) / 8 - 1);
          rx_keep[p] = 0; rx_data[p] = 0;
          for (int k = 0; k < 8; k++) if (b*8 + k < len) begin rx_keep[p][k] = 1; rx_data[p][k*8 +: 8] = bytes[b*8 + k]; end
          @(negedge clk);
        end
        rx_valid[p] = 0; rx_last[p] = 0;
      end
    end
  endtask

  initial begin
    cfg = '0; rx_valid = 0; rx_last = 0;
    for (int p = 0; p < 4; p++) begin rx_data[p] = 0; rx_keep[p] = 0; end
    for (int h = 0; h < 8; h++) mac[h] = {16'h0200, 32'(h * 32'h0101_0101 + 1)};
    repeat (3) @(posedge clk);
    rst_n = 1;
    fork
      port_driver(0); port_driver(1); port_driver(2); port_driver(3);
    join_none
    // ---- learning switch
    set_key(0, 0, 128'hFFFF_FFFF_FFFF);       // lookup: destination MAC
    set_key(1, 48, 128'hFFFF_FFFF_FFFF);      // update: source MAC
    set_field(0, 320, 32'hFFFF_FFFF);         // H0: timestamp
    set_default_action(DROPA);
    for (int wd = 0; wd < 14; wd++) cfg_wr(CFG_FLOWTC, 0, wd, 0);
    cfg_wr(CFG_FLOWTC, 0, 1, 32'h0000_EE00);  // key bits [47:40] = EE
    cfg_wr(CFG_FLOWTC, 0, 5, 32'h0000_FF00);
    cfg_wr(CFG_FLOWTC, 0, 8, 32'h0000_0006);  // state 6
    cfg_wr(CFG_FLOWTC, 0, 13, 1);
    for (int s = 0; s <= 4; s++)
      for (int p = 0; p < 4; p++)
        xfsm_row(s * 4 + p, v_state(s) | (160'(p) << 152), m_state() | (160'hFF << 152), 16'(p + 1),
                 s == 0 ? FLOOD : 16'h1000 | 16'(s - 1), insi(OP_ADDI, 5, 8, 0));
    // ---- phase 1
    run = 1;
    repeat (3000) @(negedge clk);
    run = 0;
    repeat (400) @(negedge clk);
    // ---- housekeeping: two scans with no traffic remove every entry
    checks++;
    if (status_g[1] != last_hit_ts) begin failures++; $display("G1 %0d expected %0d", status_g[1], last_hit_ts); end
    for (int s = 0; s < 2; s++) begin
      cfg_wr(CFG_CTRL, 0, 1, 1);
      while (status_hk_busy) @(negedge clk);
    end
    table_m.delete();
    phase = 2;
    run = 1;
    repeat (1500) @(negedge clk);
    run = 0;
    repeat (400) @(negedge clk);
    for (int p = 0; p < 4; p++) begin
      checks++;
      if (expq[p].size() != 0) begin failures++; $display("port %0d: %0d packets missing", p, expq[p].size()); end
    end
    checks++;
    if (status_q_drops != 0 || status_ins_fail != 0) begin failures++; $display("queue drops %0d insert failures %0d", status_q_drops, status_ins_fail); end
    checks++;
    if (status_xfsm_miss != 32'(n_drop) || status_drops != 32'(n_drop)) begin failures++; $display("drops %0d/%0d/%0d", status_xfsm_miss, status_drops, n_drop); end
    $display("floods %0d, forwards %0d, drops %0d, port changes %0d, loop-window cases %0d, re-learned after ageing %0d, entries inserted %0d",
             n_flood, n_fwd, n_drop, n_mix, n_stale, n_relearn, status_n_inserted);
    checks++;
    if (n_flood == 0 || n_fwd == 0 || n_drop == 0 || n_mix == 0 || n_stale == 0 || n_relearn == 0) begin
      failures++; $display("a mechanism did not occur");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

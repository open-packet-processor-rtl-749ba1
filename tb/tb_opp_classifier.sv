// tb_opp_classifier: the decision-tree traffic classifier run on one OPP stage
// at its default sizes, as far as the stage can hold it.
//
// Per flow (IPv4 source address) the stage measures the packet-size mean and
// variance with the VAR instruction (R0 = count, R1 = mean, R2 = variance) and
// the byte count (R3 += pkt.len), and at the decision time classifies the flow
// with the decision tree's conditions C1: R2 > G2, C2: R3 > G3, C3: R1 <= G1
// (G1 = 306, G2 = 1575, G3 = 203). The eight XFSM rows are those of the
// published classifier table, with two departures forced by the stage:
//  - the table keeps a per-flow decision time in a fifth register (R4 = now +
//    G0, C0: now > R4); the context has four registers, so here the decision
//    time is global: C0: now > G0;
//  - the class is marked by DSCP rewriting in the table; the action block has
//    no header rewrite, so the classes are told apart by output port instead
//    (unclassified port 0, WEB port 2, P2P port 3).
// H0 is the packet timestamp, H1 the packet length. Flows of eight different
// size distributions send packets at random, at least six cycles apart per
// flow. A model written from the rows and the documented VAR arithmetic
// (16-bit divisions of saturated magnitudes) predicts every action, five
// cycles after its packet; both classes must be reached.
module tb_opp_classifier;
  import opp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  cfg_req_t cfg;
  logic in_valid, out_valid, hk_busy;
  pkt_desc_t in_desc;
  logic [15:0] out_action;
  gregs_t g;
  logic [31:0] ins_fail, n_inserted, n_xfsm_miss;
  opp_stage dut (.*);

  `include "opp_tb_cfg.svh"

  localparam logic [15:0] UNCL = 16'h1000, WEB = 16'h1002, P2P = 16'h1003;
  localparam logic [31:0] G1 = 306, G2 = 1575, G3 = 203;
  localparam int NF = 8;
  localparam int TDEC = 6000;   // decision time (cycles, in timestamp units)

  // ---------------------------------------------------------------- model
  int          st [NF];
  logic [31:0] r [NF][4];
  int          n_class [4];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  typedef struct { logic [15:0] act; int t_in; } exp_t;
  exp_t expq [$];

  function automatic logic [31:0] sat16(input longint v);
    return (v > 65535) ? 32'hFFFF : 32'(v);
  endfunction

  function automatic logic [15:0] model(input int f, input logic [31:0] now, input logic [31:0] len);
    bit c0, c1, c2, c3;
    c0 = now > TDEC;
    c1 = r[f][2] > G2; c2 = r[f][3] > G3; c3 = r[f][1] <= G1;
    if (st[f] == 0 || (st[f] == 1 && !c0)) begin
      longint n, m, v, d, sq, e;
      logic [31:0] dv, q;
      n = r[f][0]; m = r[f][1]; v = r[f][2];
      dv = sat16(n + 1);
      d  = longint'(len) - m;
      q  = sat16(d < 0 ? -d : d) / dv;
      r[f][1] = d < 0 ? 32'(m - q) : 32'(m + q);
      sq = d * d;
      if (sq > 64'hFFFF_FFFF) sq = 64'hFFFF_FFFF;
      e  = sq - v;
      q  = sat16(e < 0 ? -e : e) / dv;
      r[f][2] = e < 0 ? 32'(v - q) : 32'(v + q);
      r[f][0] = r[f][0] + 1;
      r[f][3] = r[f][3] + len;
      st[f] = 1;
      return UNCL;
    end
    if (st[f] == 1) begin
      if (c1 ? c3 : c2) begin st[f] = 3; n_class[3]++; return P2P; end
      st[f] = 2; n_class[2]++; return WEB;
    end
    return st[f] == 2 ? WEB : P2P;
  endfunction

  always @(negedge clk) if (rst_n && out_valid) begin
    exp_t e;
    checks++;
    if (expq.size() == 0) begin failures++; $display("unexpected output"); end
    else begin
      e = expq.pop_front();
      if (out_action != e.act || cyc - e.t_in != 5) begin
        failures++; $display("cyc %0d action %h exp %h latency %0d", cyc, out_action, e.act, cyc - e.t_in);
      end
    end
  end

  // ---------------------------------------------------------------- stimulus
  int last_t [NF];
  int base [NF], spread [NF];
  initial begin
    cfg = '0; in_valid = 0; in_desc = '0;
    for (int f = 0; f < NF; f++) begin
      st[f] = 0; last_t[f] = -100;
      for (int i = 0; i < 4; i++) r[f][i] = 0;
      base[f] = (f % 2) ? 40 + 30 * f : 600 + 100 * f;
      spread[f] = (f < 4) ? 20 : 700;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    set_key(0, 208, 128'hFFFF_FFFF);
    set_key(1, 208, 128'hFFFF_FFFF);
    set_field(0, 320, 32'hFFFF_FFFF);         // H0: pkt.ts
    set_field(1, 352, 32'hFFFF);              // H1: pkt.len
    set_cond(0, CMP_GT, 8, 4);                // C0: now > G0
    set_cond(1, CMP_GT, 2, 6);                // C1: R2 > G2
    set_cond(2, CMP_GT, 3, 7);                // C2: R3 > G3
    set_cond(3, CMP_LE, 1, 5);                // C3: R1 <= G1
    set_global(0, TDEC); set_global(1, G1); set_global(2, G2); set_global(3, G3);
    set_default_action(16'h0000);
    xfsm_row(0, v_state(0), m_state(), 1, UNCL, ins3(OP_VAR, 0, 1, 2, 9), ins3(OP_ADD, 3, 3, 9));
    xfsm_row(1, v_state(1) | v_cond(0, 0), m_state() | m_cond(0), 1, UNCL,
             ins3(OP_VAR, 0, 1, 2, 9), ins3(OP_ADD, 3, 3, 9));
    xfsm_row(2, v_state(1) | v_cond(0, 1) | v_cond(1, 1) | v_cond(3, 1),
             m_state() | m_cond(0) | m_cond(1) | m_cond(3), 3, P2P, 0);
    xfsm_row(3, v_state(1) | v_cond(0, 1) | v_cond(1, 1) | v_cond(3, 0),
             m_state() | m_cond(0) | m_cond(1) | m_cond(3), 2, WEB, 0);
    xfsm_row(4, v_state(1) | v_cond(0, 1) | v_cond(1, 0) | v_cond(2, 0),
             m_state() | m_cond(0) | m_cond(1) | m_cond(2), 2, WEB, 0);
    xfsm_row(5, v_state(1) | v_cond(0, 1) | v_cond(1, 0) | v_cond(2, 1),
             m_state() | m_cond(0) | m_cond(1) | m_cond(2), 3, P2P, 0);
    xfsm_row(6, v_state(2), m_state(), 2, WEB, 0);
    xfsm_row(7, v_state(3), m_state(), 3, P2P, 0);
    for (int t = 0; t < 9000; t++) begin
      int f;
      @(negedge clk);
      in_valid = 0;
      f = $urandom_range(0, NF - 1);
      if (cyc - last_t[f] >= 6 && $urandom_range(0, 2) == 0) begin
        logic [31:0] now, len;
        now = 32'(cyc);
        len = 32'(base[f] + $urandom_range(0, spread[f]));
        in_valid = 1;
        in_desc = '0;
        for (int k = 0; k < 10; k++) in_desc.hdr[k*32 +: 32] = $urandom;
        in_desc.hdr[239:208] = 32'h0A00_0000 + 32'(f);
        in_desc.ts = now;
        in_desc.len = 16'(len);
        last_t[f] = cyc;
        expq.push_back('{model(f, now, len), cyc});
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (20) @(negedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("%0d actions missing", expq.size()); end
    $display("flows classified WEB %0d, P2P %0d", n_class[2], n_class[3]);
    for (int f = 0; f < NF; f++)
      $display("flow %0d: %0d packets, mean %0d, variance %0d, bytes %0d, state %0d", f, r[f][0], r[f][1], r[f][2], r[f][3], st[f]);
    checks++;
    if (n_class[2] == 0 || n_class[3] == 0) begin failures++; $display("a class was never chosen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_opp_token_bucket: the single-rate token-bucket policer run on one OPP
// stage at its default sizes.
//
// Each flow (keyed by IPv4 source address, header bytes 26..29) keeps a token
// window [Tmin, Tmax] in R0 and R1; G0 = B*Q and G1 = Q hold the bucket size
// times the token interval and the token interval. H0 is the packet timestamp
// and H1 the EtherType (bytes 12..13). Conditions: C0: now >= R0, C1: now <= R1.
// The four XFSM rows are those of the published transition table:
//   state 0, IP             -> 1, OUT,  R0 = now - G0, R1 = now + G1
//   state 1, C0=1 C1=1, IP  -> 1, OUT,  R0 = R0 + G1,  R1 = R1 + G1
//   state 1, C0=1 C1=0, IP  -> 1, OUT,  R0 = now - G0, R1 = now + G1
//   state 1, C0=0 C1=1, IP  -> 1, DROP
// The table prints R1 = R0 + G1 for the second row while the prose says the
// window shifts right by Q; the shift (R1 = R1 + G1) is what is programmed.
// Eight flows with different mean rates send packets at random, with at least
// six cycles between packets of one flow (the stage's feedback window); a
// model written from the rows above predicts every action, which must appear
// five cycles after the packet. Each of the three cases must occur, and every
// flow's forwarded packets must stay within B + 2 + elapsed/Q: with G0 = B*Q as
// given for the table, a reset window [now - B*Q, now + Q] holds B + 1 tokens
// counting the packet that resets it, one more than the prose's (B-1)*Q form.
module tb_opp_token_bucket;
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

  localparam logic [15:0] OUT = 16'h1001, DROPA = 16'h0000;
  localparam int B = 4, Q = 40;
  localparam int NF = 8;

  // ---------------------------------------------------------------- model
  int          st   [NF];
  logic [31:0] tmin [NF], tmax [NF];
  int          n_case [4];
  int          n_out [NF];
  int          t_first [NF];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  typedef struct { logic [15:0] act; int t_in; } exp_t;
  exp_t expq [$];

  function automatic logic [15:0] model(input int f, input logic [31:0] now);
    if (st[f] == 0) begin
      st[f] = 1; tmin[f] = now - B*Q; tmax[f] = now + Q; n_case[0]++;
      t_first[f] = now;
      return OUT;
    end
    if (now >= tmin[f] && now <= tmax[f]) begin
      tmin[f] += Q; tmax[f] += Q; n_case[1]++;
      return OUT;
    end
    if (now >= tmin[f]) begin
      tmin[f] = now - B*Q; tmax[f] = now + Q; n_case[2]++;
      return OUT;
    end
    n_case[3]++;
    return DROPA;
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
  int rate [NF];       // 1-in-rate chance per cycle
  initial begin
    cfg = '0; in_valid = 0; in_desc = '0;
    for (int f = 0; f < NF; f++) begin st[f] = 0; last_t[f] = -100; n_out[f] = 0; rate[f] = f + 1; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    set_key(0, 208, 128'hFFFF_FFFF);
    set_key(1, 208, 128'hFFFF_FFFF);
    set_field(0, 320, 32'hFFFF_FFFF);         // H0: pkt.ts
    set_field(1, 96, 32'hFFFF);               // H1: EtherType
    set_cond(0, CMP_GE, 8, 0);                // C0: now >= R0
    set_cond(1, CMP_LE, 8, 1);                // C1: now <= R1
    set_global(0, B * Q); set_global(1, Q);
    set_default_action(DROPA);
    xfsm_row(0, v_state(0) | v_h(1, 32'h0008), m_state() | m_h(1, 32'hFFFF), 1, OUT,
             ins3(OP_SUB, 0, 8, 4), ins3(OP_ADD, 1, 8, 5));
    xfsm_row(1, v_state(1) | v_h(1, 32'h0008) | v_cond(0, 1) | v_cond(1, 1),
             m_state() | m_h(1, 32'hFFFF) | m_cond(0) | m_cond(1), 1, OUT,
             ins3(OP_ADD, 0, 0, 5), ins3(OP_ADD, 1, 1, 5));
    xfsm_row(2, v_state(1) | v_h(1, 32'h0008) | v_cond(0, 1) | v_cond(1, 0),
             m_state() | m_h(1, 32'hFFFF) | m_cond(0) | m_cond(1), 1, OUT,
             ins3(OP_SUB, 0, 8, 4), ins3(OP_ADD, 1, 8, 5));
    xfsm_row(3, v_state(1) | v_h(1, 32'h0008) | v_cond(0, 0) | v_cond(1, 1),
             m_state() | m_h(1, 32'hFFFF) | m_cond(0) | m_cond(1), 1, DROPA, 0);
    // timestamps start well above B*Q so that now - G0 does not wrap
    repeat (20) @(negedge clk);
    for (int t = 0; t < 20000; t++) begin
      int f;
      @(negedge clk);
      in_valid = 0;
      f = $urandom_range(0, NF - 1);
      if (cyc - last_t[f] >= 6 && $urandom_range(1, rate[f]) == 1) begin
        logic [31:0] now;
        logic [15:0] a;
        now = 32'(cyc + 1000);
        in_valid = 1;
        in_desc = '0;
        for (int k = 0; k < 10; k++) in_desc.hdr[k*32 +: 32] = $urandom;
        in_desc.hdr[111:96] = 16'h0008;          // EtherType 0x0800
        in_desc.hdr[239:208] = 32'hC0A8_0000 + 32'(f);
        in_desc.ts = now;
        in_desc.len = 64;
        last_t[f] = cyc;
        a = model(f, now);
        if (a == OUT) n_out[f]++;
        expq.push_back('{a, cyc});
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (20) @(negedge clk);
    for (int f = 0; f < NF; f++) begin
      checks++;
      if (st[f] != 0 && n_out[f] > B + 2 + (cyc + 1000 - t_first[f]) / Q) begin
        failures++; $display("flow %0d forwarded %0d, above the bucket bound", f, n_out[f]);
      end
    end
    checks++;
    if (expq.size() != 0) begin failures++; $display("%0d actions missing", expq.size()); end
    $display("first packet %0d, in window %0d, after window (bucket full) %0d, before window (dropped) %0d",
             n_case[0], n_case[1], n_case[2], n_case[3]);
    checks++;
    if (n_case[0] == 0 || n_case[1] == 0 || n_case[2] == 0 || n_case[3] == 0) begin
      failures++; $display("a case did not occur");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

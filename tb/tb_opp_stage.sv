// tb_opp_stage: end-to-end test of one OPP stage at its default sizes
// (4K-entry flow table, 128-row XFSM table), programmed through the
// configuration bus.
//
// Phase 1 runs the port-scan detection application: flows keyed by IP source;
// states DEFAULT=0, MONITOR=1, DROP=2; R0 = SYN rate (ewma), R1 = end of the
// drop period, R2 = time of the last SYN; G0 = rate threshold, G1 = drop
// duration, G2 = ewma sample weight; C0: R0 >= G0, C1: R1 > pkt.ts. The five
// transitions are those of the published table; packets that match no row
// (non-SYN packets of DEFAULT and MONITOR flows) get the default action and
// leave the context unchanged. Twelve sources, two of them scanners, send
// packets with at least six cycles between packets of one source. A model of
// the application, written here from the transition table, predicts every
// action; the test also checks that the action appears five cycles after the
// packet enters and that the context write happens in the sixth cycle after
// the flow-table read, and counts each transition.
//
// Phase 2 checks the six-cycle feedback loop directly: a counter application
// (R3 += 1 per packet, C2: R3 >= G3 with G3 = 1 selects port 3 instead of
// port 2) receives two packets of a new flow d cycles apart; the second sees
// the first one's update only when d >= 6.
module tb_opp_stage;
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

  localparam logic [15:0] OUT = 16'h1002, DROP = 16'h0000, PORT3 = 16'h1003;
  localparam int TSU = 4;   // pkt.ts field counts 16-cycle units

  // ---------------------------------------------------------------- reference model
  typedef struct { int state; logic [31:0] r [4]; } mctx_t;
  mctx_t flows [logic [31:0]];
  logic [31:0] G0 = 150, G1 = 20, G2 = 64;
  int n_trans [5];
  int n_miss = 0;

  function automatic logic [15:0] model(input logic [31:0] ip, input bit syn, input logic [31:0] tsu,
                                        output bit wr);
    mctx_t c;
    bit c0, c1;
    int row;
    if (flows.exists(ip)) c = flows[ip];
    else begin c.state = 0; for (int i = 0; i < 4; i++) c.r[i] = 0; end
    c0 = c.r[0] >= G0;
    c1 = c.r[1] > tsu;
    row = -1;
    if (c.state == 0 && syn) row = 0;
    else if (c.state == 1 && syn && !c0) row = 1;
    else if (c.state == 1 && syn && c0) row = 2;
    else if (c.state == 2 && c1) row = 3;
    else if (c.state == 2 && !c1) row = 4;
    wr = row >= 0;
    if (row < 0) begin n_miss++; return OUT; end
    n_trans[row]++;
    case (row)
      0, 4: begin c.state = 1; c.r[0] = 0; c.r[2] = tsu; end
      1: begin
        logic [31:0] dt;
        dt = tsu - c.r[2];
        c.r[0] = (dt >= 32 ? 0 : (c.r[0] >> dt)) + G2;
        c.r[2] = tsu;
      end
      2: begin c.state = 2; c.r[1] = tsu + G1; end
      default: ;
    endcase
    flows[ip] = c;
    return (row == 2 || row == 3) ? DROP : OUT;
  endfunction

  // ---------------------------------------------------------------- expected outputs
  typedef struct { logic [15:0] act; int t_in; bit wr; } exp_t;
  exp_t expq [$];
  int cyc = 0;
  int wr_due [$];
  always @(posedge clk) cyc <= cyc + 1;

  always @(negedge clk) if (rst_n) begin
    if (out_valid) begin
      exp_t e;
      checks++;
      if (expq.size() == 0) begin failures++; $display("unexpected output"); end
      else begin
        e = expq.pop_front();
        if (out_action != e.act || cyc - e.t_in != 5) begin
          failures++; $display("cyc %0d action %h exp %h latency %0d", cyc, out_action, e.act, cyc - e.t_in);
        end
        if (e.wr) wr_due.push_back(e.t_in + 6);
      end
    end
    if (dut.wb_en) begin
      checks++;
      if (wr_due.size() == 0 || wr_due.pop_front() != cyc) begin failures++; $display("cyc %0d write-back timing", cyc); end
    end
  end

  task automatic send(input logic [31:0] ip, input bit syn);
    logic [15:0] a;
    bit wr;
    in_valid = 1;
    in_desc = '0;
    for (int k = 0; k < 10; k++) in_desc.hdr[k*32 +: 32] = $urandom;
    in_desc.hdr[239:208] = ip;
    in_desc.hdr[313] = syn;
    in_desc.ts = cyc;
    in_desc.len = 64;
    a = model(ip, syn, 32'(cyc) >> TSU, wr);
    expq.push_back('{a, cyc, wr});
  endtask

  initial begin
    int last [12];
    cfg = '0; in_valid = 0; in_desc = '0;
    for (int i = 0; i < 5; i++) n_trans[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // ---- port scan application
    set_key(0, 208, 128'hFFFF_FFFF);
    set_key(1, 208, 128'hFFFF_FFFF);
    set_field(0, 313, 32'h1);                 // H0: TCP SYN flag
    set_field(1, 320 + TSU, 32'h0FFF_FFFF);   // H1: pkt.ts in 16-cycle units
    set_cond(0, CMP_GE, 0, 4);                // C0: R0 >= G0
    set_cond(1, CMP_GT, 1, 9);                // C1: R1 > pkt.ts
    set_global(0, G0); set_global(1, G1); set_global(2, G2);
    set_default_action(OUT);
    xfsm_row(0, v_state(0) | v_h(0, 1), m_state() | m_h(0, 1), 1, OUT,
             ins3(OP_XOR, 0, 0, 0), insi(OP_ADDI, 2, 9, 0));
    xfsm_row(1, v_state(1) | v_h(0, 1) | v_cond(0, 0), m_state() | m_h(0, 1) | m_cond(0), 1, OUT,
             ins3(OP_EWMA, 2, 0, 9, 6), insi(OP_ADDI, 2, 9, 0));
    xfsm_row(2, v_state(1) | v_h(0, 1) | v_cond(0, 1), m_state() | m_h(0, 1) | m_cond(0), 2, DROP,
             ins3(OP_ADD, 1, 9, 5));
    xfsm_row(3, v_state(2) | v_cond(1, 1), m_state() | m_cond(1), 2, DROP, 0);
    xfsm_row(4, v_state(2) | v_cond(1, 0), m_state() | m_cond(1), 1, OUT,
             ins3(OP_XOR, 0, 0, 0), insi(OP_ADDI, 2, 9, 0));
    for (int i = 0; i < 12; i++) last[i] = -100;
    for (int n = 0; n < 6000; n++) begin
      int ip;
      @(negedge clk);
      in_valid = 0;
      ip = $urandom_range(0, 11);
      if (cyc - last[ip] >= 6 && $urandom_range(0, 3) != 0) begin
        bit syn;
        // sources 0 and 1 scan (mostly SYNs, in bursts); the others rarely open connections
        syn = (ip < 2) ? (((n / 1000) % 2 == 0) ? 1'b1 : $urandom_range(0, 9) == 0)
                       : $urandom_range(0, 19) == 0;
        send(32'hC0A8_0000 + 32'(ip), syn);
        last[ip] = cyc;
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (12) @(negedge clk);
    $display("transitions DEFAULT->MONITOR %0d, MONITOR self %0d, MONITOR->DROP %0d, DROP self %0d, DROP->MONITOR %0d, no match %0d",
             n_trans[0], n_trans[1], n_trans[2], n_trans[3], n_trans[4], n_miss);
    for (int i = 0; i < 5; i++) begin
      checks++;
      if (n_trans[i] == 0) begin failures++; $display("transition %0d never taken", i); end
    end
    checks += 2;
    if (n_miss == 0 || n_xfsm_miss != 32'(n_miss)) begin failures++; $display("miss count %0d/%0d", n_xfsm_miss, n_miss); end
    if (n_inserted != 32'(flows.size())) begin failures++; $display("flows %0d/%0d", n_inserted, flows.size()); end

    // ---- phase 2: the feedback loop
    set_global(3, 1);
    set_cond(2, CMP_GE, 3, 7);                // C2: R3 >= G3
    xfsm_row(5, v_state(0) | v_cond(2, 0), m_state() | m_cond(2), 0, OUT, insi(OP_ADDI, 3, 3, 1));
    xfsm_row(6, v_state(0) | v_cond(2, 1), m_state() | m_cond(2), 0, PORT3, insi(OP_ADDI, 3, 3, 1));
    for (int d = 1; d <= 8; d++) begin
      logic [31:0] ip;
      int t0;
      ip = 32'h0A00_0000 + 32'(d);
      @(negedge clk);
      in_valid = 1; in_desc = '0; in_desc.hdr[239:208] = ip; in_desc.ts = cyc;
      expq.push_back('{OUT, cyc, 1'b1});
      t0 = cyc;
      @(negedge clk) in_valid = 0;
      while (cyc < t0 + d) @(negedge clk);
      in_valid = 1; in_desc = '0; in_desc.hdr[239:208] = ip; in_desc.ts = cyc;
      expq.push_back('{(d >= 6) ? PORT3 : OUT, cyc, 1'b1});
      @(negedge clk) in_valid = 0;
      repeat (10) @(negedge clk);
    end
    checks++;
    if (expq.size() != 0) begin failures++; $display("%0d outputs missing", expq.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_opp_flow_table: self-checking test of the flow context table.
// Uses a small table (64 entries, 4 ways of 16 slots) so that collisions and a
// full candidate set happen. A software model of the d-left table (same hash
// functions, leftmost-free insertion, activity flags) predicts, for each lookup,
// whether the key hits and with which context, where the update key lives,
// whether a write-back is stored or counted as an insertion failure, and what a
// housekeeping scan ages or deletes. Keys outside the table get the wildcard
// TCAM default when they match its row, state 0 otherwise. Lookup latency is
// two cycles.
module tb_opp_flow_table;
  import opp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int ENT = 64, SL = 16, SW = 4;
  cfg_req_t cfg;
  logic lk_valid, ctx_valid, ctx_from_hash, ctx_from_tcam, up_hit, wr_en, wr_hit, hk_busy;
  logic [127:0] lk_key, up_key, wr_key;
  ctx_t ctx, wr_ctx;
  logic [1:0] up_way, wr_way;
  logic [31:0] ins_fail, n_inserted;
  opp_flow_table #(.D(4), .ENTRIES(ENT), .TCAM_ENTRIES(4)) dut (.*);

  task automatic cfg_wr(input logic [3:0] b, input int e, input int w, input logic [31:0] d);
    @(negedge clk);
    cfg = '{we: 1'b1, addr: cfg_addr(b, e, w), wdata: d};
    @(negedge clk);
    cfg.we = 1'b0;
  endtask

  // model
  logic [127:0] mkey [4][SL];
  ctx_t         mctx [4][SL];
  int           mflag [4][SL];     // 0 deleted, 1 inactive, 2 active
  int fails = 0, inserted = 0, n_tcam = 0, n_fail_seen = 0, n_del = 0;

  function automatic int slot(input logic [127:0] k, input int w);
    logic [31:0] hv;
    hv = hash_fold(k, w);
    return int'(hv[31 -: SW]);
  endfunction
  function automatic int find(input logic [127:0] k);
    for (int w = 0; w < 4; w++)
      if (mflag[w][slot(k, w)] != 0 && mkey[w][slot(k, w)] == k) return w;
    return -1;
  endfunction

  logic [127:0] keys [40];

  task automatic access(input logic [127:0] k, input logic [127:0] uk, input bit do_write);
    int w, uw;
    ctx_t exp, nc;
    @(negedge clk);
    lk_valid = 1; lk_key = k; up_key = uk;
    w = find(k); uw = find(uk);
    if (w >= 0) begin exp = mctx[w][slot(k, w)]; exp.flags = FLAG_ACTIVE; end
    else if (k[127:120] == 8'hAA) begin exp = '0; exp.state = 16'h0007; exp.r[0] = 32'h1234; exp.flags = FLAG_ACTIVE; n_tcam++; end
    else exp = '0;
    @(negedge clk);
    lk_valid = 0;
    if (w >= 0) mflag[w][slot(k, w)] = 2;
    @(negedge clk);
    checks++;
    if (!ctx_valid || ctx != exp || ctx_from_hash != (w >= 0) || up_hit != (uw >= 0) ||
        (uw >= 0 && up_way != 2'(uw))) begin
      failures++; $display("lookup %h: w %0d uw %0d got state %h hash %0d up_hit %0d", k, w, uw, ctx.state, ctx_from_hash, up_hit);
    end
    if (do_write) begin
      nc = '0; nc.state = 16'($urandom); for (int i = 0; i < 4; i++) nc.r[i] = $urandom;
      nc.flags = FLAG_ACTIVE;
      wr_en = 1; wr_key = uk; wr_ctx = nc; wr_hit = up_hit; wr_way = up_way;
      if (uw >= 0) begin mctx[uw][slot(uk, uw)] = nc; mflag[uw][slot(uk, uw)] = 2; end
      else begin
        int f;
        f = -1;
        for (int x = 3; x >= 0; x--) if (mflag[x][slot(uk, x)] == 0) f = x;
        if (f < 0) fails++;
        else begin mkey[f][slot(uk, f)] = uk; mctx[f][slot(uk, f)] = nc; mflag[f][slot(uk, f)] = 2; inserted++; end
      end
      @(negedge clk);
      wr_en = 0;
    end
  endtask

  task automatic scan();
    cfg_wr(CFG_CTRL, 0, 1, 1);
    for (int w = 0; w < 4; w++) for (int s = 0; s < SL; s++) begin
      if (mflag[w][s] == 1) n_del++;
      if (mflag[w][s] > 0) mflag[w][s]--;
    end
    checks++;
    if (!hk_busy) begin failures++; $display("scan did not start"); end
    while (hk_busy) @(negedge clk);
  endtask

  initial begin
    cfg = '0; lk_valid = 0; lk_key = 0; up_key = 0; wr_en = 0; wr_key = 0; wr_ctx = '0; wr_hit = 0; wr_way = 0;
    for (int w = 0; w < 4; w++) for (int s = 0; s < SL; s++) mflag[w][s] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // TCAM row 0: keys with top byte AA -> state 7, R0 = 0x1234
    for (int wd = 0; wd < 8; wd++) cfg_wr(CFG_FLOWTC, 0, wd, 0);
    cfg_wr(CFG_FLOWTC, 0, 3, 32'hAA00_0000);
    cfg_wr(CFG_FLOWTC, 0, 7, 32'hFF00_0000);
    cfg_wr(CFG_FLOWTC, 0, 8, 32'h1234_0007);      // state [15:0], R0 low half
    for (int wd = 9; wd <= 12; wd++) cfg_wr(CFG_FLOWTC, 0, wd, 0);
    cfg_wr(CFG_FLOWTC, 0, 12, 32'h0002_0000);     // flags = ACTIVE (bits 145:144)
    cfg_wr(CFG_FLOWTC, 0, 13, 1);
    for (int i = 0; i < 40; i++) begin
      keys[i] = {$urandom, $urandom, $urandom, $urandom};
      if (i % 8 == 0) keys[i][127:120] = 8'hAA;
      else if (keys[i][127:120] == 8'hAA) keys[i][127:120] = 8'h00;
    end
    for (int n = 0; n < 1500; n++) begin
      int a, b;
      a = $urandom_range(0, 39);
      b = ($urandom_range(0, 3) == 0) ? $urandom_range(0, 39) : a;   // cross-flow update key
      access(keys[a], keys[b], $urandom_range(0, 2) != 0);
      if (n == 500 || n == 501 || n == 1000 || n == 1001) scan();
    end
    checks += 2;
    if (ins_fail != 32'(fails) || n_inserted != 32'(inserted)) begin
      failures++; $display("counters: ins_fail %0d/%0d inserted %0d/%0d", ins_fail, fails, n_inserted, inserted);
    end
    // each mechanism must have happened
    if (fails == 0 || n_tcam == 0 || n_del == 0) begin
      failures++; $display("mechanism missing: fails %0d tcam %0d deleted %0d", fails, n_tcam, n_del);
    end
    $display("insert failures %0d, tcam defaults %0d, aged-out entries %0d", fails, n_tcam, n_del);
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

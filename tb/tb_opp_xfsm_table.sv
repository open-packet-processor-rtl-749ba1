// tb_opp_xfsm_table: self-checking test of the XFSM table, programmed with the
// port-scan detection transitions (states DEFAULT=0, MONITOR=1, DROP=2;
// C0 = rate over threshold, C1 = drop window still open; H0 = TCP SYN flag).
// Each row's don't-care pattern follows the published transition table; the
// test drives every combination of C0, C1, state and SYN and checks hit, next
// state, action and the first instruction word against the table evaluated here.
module tb_opp_xfsm_table;
  import opp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  cfg_req_t cfg;
  logic [7:0] c;
  logic [15:0] state, next_state, action;
  fields_t h;
  logic [1:0] in_port;
  logic hit;
  logic [31:0] instr [5];
  opp_xfsm_table dut (.*);

  task automatic cfg_wr(input int e, input int w, input logic [31:0] d);
    @(negedge clk);
    cfg = '{we: 1'b1, addr: cfg_addr(CFG_XFSM, e, w), wdata: d};
    @(negedge clk);
    cfg.we = 1'b0;
  endtask

  // row: c0 c1 (-1 = don't care), state, syn (-1 = don't care), next, action
  int rows [5][6] = '{'{-1, -1, 0, 1, 1, 16'h1001}, '{0, -1, 1, 1, 1, 16'h1001},
                      '{1, -1, 1, 1, 2, 16'h0000}, '{-1, 1, 2, -1, 2, 16'h0000},
                      '{-1, 0, 2, -1, 1, 16'h1001}};

  initial begin
    cfg = '0; c = 0; state = 0; h = '0; in_port = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int e = 0; e < 5; e++) begin
      logic [159:0] v, m;
      logic [191:0] res;
      v = '0; m = '0;
      if (rows[e][0] >= 0) begin v[0] = 1'(rows[e][0]); m[0] = 1; end
      if (rows[e][1] >= 0) begin v[1] = 1'(rows[e][1]); m[1] = 1; end
      v[23:8] = 16'(rows[e][2]); m[23:8] = '1;
      if (rows[e][3] >= 0) begin v[24] = 1'(rows[e][3]); m[24] = 1; end
      res = '0;
      res[15:0] = 16'(rows[e][4]); res[31:16] = 16'(rows[e][5]);
      res[63:32] = 32'hA000_0000 + 32'(e);
      for (int w = 0; w < 5; w++) begin cfg_wr(e, w, v[w*32 +: 32]); cfg_wr(e, 5 + w, m[w*32 +: 32]); end
      for (int w = 0; w < 6; w++) cfg_wr(e, 10 + w, res[w*32 +: 32]);
      cfg_wr(e, 16, 1);
    end
    for (int rep = 0; rep < 4; rep++)
    for (int st = 0; st < 4; st++)
      for (int cv = 0; cv < 4; cv++)
        for (int syn = 0; syn < 2; syn++) begin
          int exp;
          @(negedge clk);
          state = 16'(st); c = 8'(cv) | 8'($urandom_range(0, 63) << 2); h = '0; h[0] = 32'(syn);
          h[0][31:1] = 31'($urandom); h[1] = $urandom; in_port = 2'($urandom);
          if (rep == 0) h[0][31:1] = '0;
          exp = -1;
          for (int e = 4; e >= 0; e--)
            if ((rows[e][0] < 0 || rows[e][0] == (cv & 1)) && (rows[e][1] < 0 || rows[e][1] == (cv >> 1)) &&
                rows[e][2] == st && (rows[e][3] < 0 || rows[e][3] == syn))
              exp = e;
          @(negedge clk);
          checks++;
          if (exp < 0 ? (hit || next_state != 16'(st) || action != 0)
                      : (!hit || next_state != 16'(rows[exp][4]) || action != 16'(rows[exp][5]) ||
                         instr[0] != 32'hA000_0000 + 32'(exp) || instr[1] != 0)) begin
            failures++; $display("st %0d c %0d syn %0d exp %0d hit %0d ns %0d", st, cv, syn, exp, hit, next_state);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

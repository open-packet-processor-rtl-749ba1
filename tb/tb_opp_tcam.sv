// tb_opp_tcam: self-checking test of the TCAM with priority and result RAM.
// Writes random rows (value, care mask with few care bits, result, valid) into
// a 16-row, 40-bit TCAM and searches random keys and keys built to match chosen
// rows; the expected row is the lowest-numbered valid row whose cared-for bits
// equal the key. Also rewrites a row and invalidates one.
module tb_opp_tcam;
  import opp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int E = 16, KW = 40, VW = 40;
  cfg_req_t cfg;
  logic [KW-1:0] key;
  logic hit;
  logic [3:0] idx;
  logic [VW-1:0] val;
  opp_tcam #(.ENTRIES(E), .KEY_W(KW), .VAL_W(VW), .CFG_BLK(4'd7)) dut (.*);

  task automatic cfg_wr(input int e, input int w, input logic [31:0] d);
    @(negedge clk);
    cfg = '{we: 1'b1, addr: cfg_addr(4'd7, e, w), wdata: d};
    @(negedge clk);
    cfg.we = 1'b0;
  endtask

  logic [KW-1:0] tv [E], tm [E];
  logic [VW-1:0] tr [E];
  logic          tvld [E];

  task automatic write_row(input int e);
    logic [63:0] v, m, r;
    v = {$urandom, $urandom}; r = {$urandom, $urandom};
    m = {$urandom, $urandom} & {$urandom, $urandom} & {$urandom, $urandom};
    tv[e] = v[KW-1:0]; tm[e] = m[KW-1:0]; tr[e] = r[VW-1:0]; tvld[e] = ($urandom_range(0, 5) != 0);
    cfg_wr(e, 0, v[31:0]); cfg_wr(e, 1, v[63:32]);
    cfg_wr(e, 2, m[31:0]); cfg_wr(e, 3, m[63:32]);
    cfg_wr(e, 4, r[31:0]); cfg_wr(e, 5, r[63:32]);
    cfg_wr(e, 6, {31'b0, tvld[e]});
  endtask

  task automatic search(input logic [KW-1:0] k);
    int exp;
    @(negedge clk);
    key = k;
    #1;
    exp = -1;
    for (int i = E - 1; i >= 0; i--)
      if (tvld[i] && (((tv[i] ^ k) & tm[i]) == 0)) exp = i;
    checks++;
    if ((exp < 0 && hit) || (exp >= 0 && (!hit || idx != 4'(exp) || val != tr[exp]))) begin
      failures++; $display("key %h exp %0d hit %0d idx %0d", k, exp, hit, idx);
    end
  endtask

  int nhit = 0;
  initial begin
    cfg = '0; key = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    search('0);   // empty table: no hit
    for (int e = 0; e < E; e++) write_row(e);
    for (int n = 0; n < 400; n++) begin
      logic [KW-1:0] k;
      int e;
      e = $urandom_range(0, E - 1);
      k = {$urandom, $urandom};
      if (n % 2 == 0) k = (k & ~tm[e]) | (tv[e] & tm[e]);  // a key row e matches
      search(k);
      if (n == 200) begin write_row(3); cfg_wr(5, 6, 0); tvld[5] = 0; end
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

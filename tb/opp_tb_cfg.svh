// opp_tb_cfg.svh: configuration tasks shared by the OPP stage and switch
// testbenches. Include inside a module that declares `clk` and `cfg`
// (opp_pkg::cfg_req_t). Each task issues 32-bit word writes on the
// configuration bus, one per two clock cycles, as a management controller would.

task automatic cfg_wr(input logic [3:0] blk, input int e, input int w, input logic [31:0] d);
  @(negedge clk);
  cfg = '{we: 1'b1, addr: opp_pkg::cfg_addr(blk, e, w), wdata: d};
  @(negedge clk);
  cfg.we = 1'b0;
endtask

// header field i = (vector >> off) & mask
task automatic set_field(input int i, input int off, input logic [31:0] mask);
  cfg_wr(opp_pkg::CFG_EXTRACT, i, 0, 32'(off));
  cfg_wr(opp_pkg::CFG_EXTRACT, i, 1, mask);
endtask

// which = 0 lookup key, 1 update key
task automatic set_key(input int which, input int off, input logic [127:0] mask);
  cfg_wr(opp_pkg::CFG_EXTRACT, 8 + which, 0, 32'(off));
  for (int w = 0; w < 4; w++) cfg_wr(opp_pkg::CFG_EXTRACT, 8 + which, 1 + w, mask[w*32 +: 32]);
endtask

task automatic set_cond(input int i, input opp_pkg::cmp_e op, input int a, input int b);
  cfg_wr(opp_pkg::CFG_COND, i, 0, {21'b0, op, 4'(b), 4'(a)});
endtask

task automatic set_global(input int i, input logic [31:0] v);
  cfg_wr(opp_pkg::CFG_GLOBAL, i, 0, v);
endtask

task automatic set_default_action(input logic [15:0] a);
  cfg_wr(opp_pkg::CFG_CTRL, 0, 0, {16'b0, a});
endtask

// XFSM row: match value/care over {in_port, H3..H0, state, C}; result fields.
task automatic xfsm_row(input int e, input logic [159:0] v, input logic [159:0] m,
                        input logic [15:0] next, input logic [15:0] action,
                        input logic [31:0] i0, input logic [31:0] i1 = 0,
                        input logic [31:0] i2 = 0, input logic [31:0] i3 = 0,
                        input logic [31:0] i4 = 0);
  logic [191:0] res;
  res = {i4, i3, i2, i1, i0, action, next};
  for (int w = 0; w < 5; w++) cfg_wr(opp_pkg::CFG_XFSM, e, w, v[w*32 +: 32]);
  for (int w = 0; w < 5; w++) cfg_wr(opp_pkg::CFG_XFSM, e, 5 + w, m[w*32 +: 32]);
  for (int w = 0; w < 6; w++) cfg_wr(opp_pkg::CFG_XFSM, e, 10 + w, res[w*32 +: 32]);
  cfg_wr(opp_pkg::CFG_XFSM, e, 16, 1);
endtask

task automatic xfsm_clear(input int e);
  cfg_wr(opp_pkg::CFG_XFSM, e, 16, 0);
endtask

// match helpers: condition i = b, state = s, header field H0 bit 0 = b
function automatic logic [159:0] m_cond(input int i);  return 160'(1) << i;        endfunction
function automatic logic [159:0] v_cond(input int i, input bit b); return 160'(b) << i; endfunction
function automatic logic [159:0] m_state();              return 160'hFFFF << 8;     endfunction
function automatic logic [159:0] v_state(input int s);   return 160'(16'(s)) << 8;  endfunction
function automatic logic [159:0] m_h(input int i, input logic [31:0] mk);  return 160'(mk) << (24 + 32*i); endfunction
function automatic logic [159:0] v_h(input int i, input logic [31:0] x);   return 160'(x) << (24 + 32*i);  endfunction

// instruction builders
function automatic logic [31:0] ins3(input opp_pkg::opcode_e op, input int a, input int b, input int c = 0, input int d = 0);
  return {op, 4'(a), 4'(b), 4'(c), 4'(d), 8'h00};
endfunction
function automatic logic [31:0] insi(input opp_pkg::opcode_e op, input int a, input int b, input logic [15:0] imm);
  return {op, 4'(a), 4'(b), imm};
endfunction

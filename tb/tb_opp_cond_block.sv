// tb_opp_cond_block: self-checking test of the condition logic block.
// Configures the eight comparators with random operand selections and
// comparisons (including OFF), drives random R, G, H (often with equal values
// so that = and the >=/<= edges are exercised) and checks the registered
// condition vector against comparisons computed here.
module tb_opp_cond_block;
  import opp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  cfg_req_t cfg;
  regs_t r; gregs_t g; fields_t h;
  logic [7:0] c;
  opp_cond_block dut (.*);

  task automatic cfg_wr(input int e, input logic [31:0] d);
    @(negedge clk);
    cfg = '{we: 1'b1, addr: cfg_addr(CFG_COND, e, 0), wdata: d};
    @(negedge clk);
    cfg.we = 1'b0;
  endtask

  function automatic logic [31:0] pick(input int s);
    return s < 4 ? r[s] : s < 8 ? g[s-4] : h[s-8];
  endfunction

  int sa [8], sb [8], op [8];
  initial begin
    cfg = '0; r = '0; g = '0; h = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 20; round++) begin
      for (int i = 0; i < 8; i++) begin
        sa[i] = $urandom_range(0, 15); sb[i] = $urandom_range(0, 15); op[i] = $urandom_range(0, 5);
        cfg_wr(i, {21'b0, 3'(op[i]), 4'(sb[i]), 4'(sa[i])});
      end
      for (int n = 0; n < 50; n++) begin
        @(negedge clk);
        for (int k = 0; k < 4; k++) begin r[k] = $urandom_range(0, 3) * 1000; g[k] = $urandom_range(0, 3) * 1000; end
        for (int k = 0; k < 8; k++) h[k] = (k % 2) ? $urandom : $urandom_range(0, 3) * 1000;
        @(negedge clk);
        for (int i = 0; i < 8; i++) begin
          logic [31:0] a, b;
          logic e;
          a = pick(sa[i]); b = pick(sb[i]);
          case (op[i])
            1: e = a > b; 2: e = a >= b; 3: e = a == b; 4: e = a <= b; 5: e = a < b;
            default: e = 0;
          endcase
          checks++;
          if (c[i] != e) begin failures++; $display("cond %0d op %0d a %0d b %0d got %0d", i, op[i], a, b, c[i]); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

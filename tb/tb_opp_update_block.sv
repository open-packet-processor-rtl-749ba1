// tb_opp_update_block: self-checking test of the five-ALU update logic block.
// Issues bundles of five random simple instructions (ADDI/SUBI/XOR/ADD, some
// NOPs) whose targets are random R, G or H codes. The expected R' starts from R
// and applies the writes in ALU order (later ALU wins); G writes set g_we.
// Header-field targets must be ignored. Results are checked in the cycle after
// issue. One bundle also runs avg in ALU 0 to show parallel execution.
module tb_opp_update_block;
  import opp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, out_valid;
  logic [31:0] instr [5];
  regs_t r, r_new; gregs_t g, g_new; fields_t h;
  logic [3:0] g_we;
  opp_update_block dut (.*);

  function automatic logic [31:0] val(input int s);
    return s < 4 ? r[s] : s < 8 ? g[s-4] : h[s-8];
  endfunction

  int conflicts = 0;
  initial begin
    in_valid = 0; r = '0; g = '0; h = '0;
    for (int i = 0; i < 5; i++) instr[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      regs_t er; gregs_t eg; logic [3:0] ewe;
      int tgt_seen [16];
      @(negedge clk);
      for (int k = 0; k < 4; k++) begin r[k] = $urandom; g[k] = $urandom; end
      for (int k = 0; k < 8; k++) h[k] = $urandom;
      er = r; eg = '0; ewe = 0;
      for (int k = 0; k < 16; k++) tgt_seen[k] = 0;
      for (int i = 0; i < 5; i++) begin
        int a, b, c, kind;
        logic [31:0] res;
        a = $urandom_range(0, 15); b = $urandom_range(0, 15); c = $urandom_range(0, 15);
        kind = $urandom_range(0, 4);
        case (kind)
          0: begin instr[i] = {OP_ADDI, 4'(a), 4'(b), 16'(n)}; res = val(b) + 32'(16'(n)); end
          1: begin instr[i] = {OP_SUBI, 4'(a), 4'(b), 16'(3)}; res = val(b) - 3; end
          2: begin instr[i] = {OP_XOR, 4'(a), 4'(b), 4'(c), 12'h0}; res = val(b) ^ val(c); end
          3: begin instr[i] = {OP_ADD, 4'(a), 4'(b), 4'(c), 12'h0}; res = val(b) + val(c); end
          default: begin instr[i] = 0; a = -1; end
        endcase
        if (a >= 0) begin
          if (tgt_seen[a]++ > 0) conflicts++;
          if (a < 4) er[a] = res;
          else if (a < 8) begin eg[a-4] = res; ewe[a-4] = 1; end
        end
      end
      in_valid = (n % 5 != 4);
      if (!in_valid) ewe = 0;
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (out_valid != (n % 5 != 4)) begin failures++; $display("out_valid"); end
      if (n % 5 != 4) begin
        checks += 2;
        if (r_new != er) begin failures++; $display("n %0d r_new mismatch", n); end
        if (g_we != ewe) begin failures++; $display("n %0d g_we %b exp %b", n, g_we, ewe); end
        for (int k = 0; k < 4; k++) if (ewe[k]) begin
          checks++;
          if (g_new[k] != eg[k]) begin failures++; $display("n %0d g_new[%0d]", n, k); end
        end
      end else begin
        checks++;
        if (g_we != 0) begin failures++; $display("g_we without valid"); end
      end
    end
    checks++;
    if (conflicts == 0) begin failures++; $display("no write conflict exercised"); end
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

// tb_opp_alu: self-checking test of one update ALU.
// Random instructions of every opcode with random operands (small values for
// avg/var/ewma so that the 16-bit division range is exercised both inside and
// beyond saturation). A reference model written from the instruction
// definitions computes the expected writes; results must be present in the
// cycle after the instruction is issued (two-cycle latency, stored at the end
// of the second cycle) and absent when in_valid is low.
module tb_opp_alu;
  import opp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid;
  logic [31:0] instr;
  regs_t r; gregs_t g; fields_t h;
  logic [2:0] wr_en;
  logic [3:0] wr_sel [3];
  logic [31:0] wr_val [3];
  opp_alu dut (.*);

  function automatic logic [31:0] val(input int s);
    return s < 4 ? r[s] : s < 8 ? g[s-4] : h[s-8];
  endfunction
  function automatic longint sdiv(input longint x, input longint y);
    // x / y with |x| and y limited to 16 bits, truncation towards zero
    longint m, q;
    m = x < 0 ? -x : x;
    if (m > 65535) m = 65535;
    if (y > 65535) y = 65535;
    q = (y == 0) ? 65535 : m / y;
    return x < 0 ? -q : q;
  endfunction

  opcode_e ops [19] = '{OP_NOP, OP_NOT, OP_XOR, OP_AND, OP_OR, OP_ADD, OP_SUB, OP_MUL, OP_DIV,
                        OP_ADDI, OP_SUBI, OP_MULI, OP_DIVI, OP_LSL, OP_LSR, OP_ROR,
                        OP_AVG, OP_VAR, OP_EWMA};

  initial begin
    in_valid = 0; instr = 0; r = '0; g = '0; h = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 4000; n++) begin
      opcode_e op;
      int a, b, c, d;
      logic [15:0] imm;
      logic [2:0] een;
      int esel [3];
      logic [31:0] eval [3];
      logic [31:0] A, B, C, D;
      op = ops[$urandom_range(0, 18)];
      // distinct operand codes so that the model is unambiguous
      a = $urandom_range(0, 15);
      do b = $urandom_range(0, 15); while (b == a);
      do c = $urandom_range(0, 15); while (c == a || c == b);
      do d = $urandom_range(0, 15); while (d == a || d == b || d == c);
      imm = 16'($urandom);
      @(negedge clk);
      for (int k = 0; k < 4; k++) begin r[k] = $urandom; g[k] = $urandom; end
      for (int k = 0; k < 8; k++) h[k] = $urandom;
      if (op inside {OP_AVG, OP_VAR, OP_EWMA, OP_DIV} || n % 3 == 0) begin
        for (int k = 0; k < 4; k++) begin r[k] = $urandom_range(0, 3000); g[k] = $urandom_range(0, 3000); end
        for (int k = 0; k < 8; k++) h[k] = $urandom_range(0, 3000);
      end
      in_valid = (n % 7 != 6);
      instr = {op, 4'(a), 4'(b), 4'(c), 4'(d), 8'h0};
      if (!(op inside {OP_AVG, OP_VAR, OP_EWMA, OP_XOR, OP_AND, OP_OR, OP_ADD, OP_SUB, OP_MUL, OP_DIV}))
        instr[15:0] = imm;
      A = val(a); B = val(b); C = val(c); D = val(d);
      if (op inside {OP_ADDI, OP_SUBI, OP_MULI, OP_DIVI, OP_LSL, OP_LSR, OP_ROR}) imm = instr[15:0];
      een = 0; esel = '{a, 0, 0}; eval = '{0, 0, 0};
      case (op)
        OP_NOT:  begin een = 1; eval[0] = ~B; end
        OP_XOR:  begin een = 1; eval[0] = B ^ C; end
        OP_AND:  begin een = 1; eval[0] = B & C; end
        OP_OR:   begin een = 1; eval[0] = B | C; end
        OP_ADD:  begin een = 1; eval[0] = B + C; end
        OP_SUB:  begin een = 1; eval[0] = B - C; end
        OP_MUL:  begin een = 1; eval[0] = B * C; end
        OP_DIV:  begin een = 1; eval[0] = C[15:0] == 0 ? 32'hFFFF : 32'(B[15:0] / C[15:0]); end
        OP_ADDI: begin een = 1; eval[0] = B + 32'(imm); end
        OP_SUBI: begin een = 1; eval[0] = B - 32'(imm); end
        OP_MULI: begin een = 1; eval[0] = B * 32'(imm); end
        OP_DIVI: begin een = 1; eval[0] = imm == 0 ? 32'hFFFF : 32'(B[15:0] / imm); end
        OP_LSL:  begin een = 1; eval[0] = B << imm[4:0]; end
        OP_LSR:  begin een = 1; eval[0] = B >> imm[4:0]; end
        OP_ROR:  begin een = 1; eval[0] = {B, B} >> imm[4:0]; end
        OP_AVG, OP_VAR: begin
          longint x, cnt;
          x = (op == OP_VAR) ? longint'(D) : longint'(C);
          cnt = longint'(A) + 1;
          een = 3'b011; eval[0] = A + 1; esel[1] = b;
          eval[1] = 32'(longint'(B) + sdiv(x - longint'(B), cnt));
          if (op == OP_VAR) begin
            longint sq;
            sq = (x - longint'(B)) * (x - longint'(B));
            if (sq > 64'hFFFF_FFFF) sq = 64'hFFFF_FFFF;
            een = 3'b111; esel[2] = c;
            eval[2] = 32'(longint'(C) + sdiv(sq - longint'(C), cnt));
          end
        end
        OP_EWMA: begin
          logic [31:0] dt;
          dt = C - A;
          een = 3'b011; eval[0] = C; esel[1] = b;
          eval[1] = (dt >= 32 ? 0 : (B >> dt)) + D;
        end
        default: ;
      endcase
      if (!in_valid) een = 0;
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (wr_en != een) begin failures++; $display("n %0d op %s en %b exp %b", n, op.name(), wr_en, een); end
      for (int k = 0; k < 3; k++) if (een[k]) begin
        checks++;
        if (wr_sel[k] != 4'(esel[k]) || wr_val[k] != eval[k]) begin
          failures++; $display("n %0d op %s slot %0d sel %0d val %0d exp %0d/%0d", n, op.name(), k, wr_sel[k], wr_val[k], esel[k], eval[k]);
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

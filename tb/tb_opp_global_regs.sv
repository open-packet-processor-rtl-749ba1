// tb_opp_global_regs: self-checking test of the global register file.
// Random mixes of configuration writes and update-block writes (same register
// in the same cycle included) against a model in which the update write wins.
module tb_opp_global_regs;
  import opp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  cfg_req_t cfg;
  logic [3:0] upd_we;
  gregs_t upd_val, g;
  opp_global_regs dut (.*);

  gregs_t model;
  initial begin
    cfg = '0; upd_we = 0; upd_val = '0; model = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++;
    if (g != '0) begin failures++; $display("reset value"); end
    for (int n = 0; n < 2000; n++) begin
      int ci;
      @(negedge clk);
      ci = $urandom_range(0, 5);   // 4, 5: no register / another block
      cfg = '{we: $urandom_range(0, 1), addr: cfg_addr(ci == 5 ? CFG_COND : CFG_GLOBAL, ci, 0), wdata: $urandom};
      upd_we = 4'($urandom);
      for (int k = 0; k < 4; k++) upd_val[k] = $urandom;
      for (int k = 0; k < 4; k++) begin
        if (upd_we[k]) model[k] = upd_val[k];
        else if (cfg.we && ci == k) model[k] = cfg.wdata;
      end
      @(negedge clk);
      cfg.we = 0; upd_we = 0;
      checks++;
      if (g != model) begin failures++; $display("n %0d mismatch", n); end
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

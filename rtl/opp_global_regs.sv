// opp_global_regs: the global (switch-wide) registers G0..G3.
//
// A small register file shared by all flows: the condition block and the ALUs
// read all registers at once (g), the update block writes any subset at the end
// of a transition (upd_we/upd_val), and the management controller writes them
// through the configuration bus (block CFG_GLOBAL, entry i, word 0) to set
// thresholds and constants. An update-block write wins over a configuration
// write to the same register in the same cycle. Writes show on g the next cycle.
// Reset clears all registers.
// A register file for concurrent access follows the architecture; the priority
// rule and the reset value are this design's choices.
module opp_global_regs
  import opp_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  cfg_req_t           cfg,
  input  logic [NGLOBAL-1:0] upd_we,
  input  gregs_t             upd_val,
  output gregs_t             g
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      g <= '0;
    end else begin
      for (int i = 0; i < NGLOBAL; i++) begin
        if (upd_we[i])
          g[i] <= upd_val[i];
        else if (cfg.we && cfg.addr[23:20] == CFG_GLOBAL && cfg.addr[19:5] == 15'(i) &&
                 cfg.addr[4:0] == 5'd0)
          g[i] <= cfg.wdata;
      end
    end
  end
endmodule

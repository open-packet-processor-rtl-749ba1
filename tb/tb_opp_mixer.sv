// tb_opp_mixer: self-checking test of the round-robin mixer.
// Four model queues with random fill. Checks: at most one pop per cycle, a pop
// whenever some queue is non-empty (one packet per clock), the grant is the
// first non-empty queue after the previous grant, the registered output carries
// the popped descriptor, and with all queues busy each port is served every 4 cycles.
module tb_opp_mixer;
  import opp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [3:0] q_valid, q_pop;
  pkt_desc_t  q_desc [4];
  logic       m_valid;
  pkt_desc_t  m_desc;
  opp_mixer #(.N(4)) dut (.*);

  pkt_desc_t q [4][$];
  int last = 3;
  pkt_desc_t exp_desc;
  logic exp_valid = 0;
  int lastsrv [4];
  int busy_run = 0;

  task automatic drive();
    for (int i = 0; i < 4; i++) begin
      q_valid[i] = q[i].size() > 0;
      q_desc[i]  = q[i].size() > 0 ? q[i][0] : '0;
    end
  endtask

  initial begin
    drive();
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 4; i++) lastsrv[i] = 0;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      int exp_sel;
      @(negedge clk);
      // registered output of the previous cycle's pop
      checks++;
      if (m_valid != exp_valid || (exp_valid && m_desc != exp_desc)) begin
        failures++; $display("cyc %0d output mismatch", cyc);
      end
      // refill: during cycles 1000..1999 keep all queues full
      for (int i = 0; i < 4; i++) begin
        if ((cyc >= 1000 && cyc < 2000) ? (q[i].size() < 3) : ($urandom_range(0, 99) < 20)) begin
          pkt_desc_t d;
          d = '0; d.hdr[63:0] = {$urandom, $urandom}; d.in_port = 2'(i);
          q[i].push_back(d);
        end
      end
      drive();
      #1;
      exp_sel = -1;
      for (int k = 1; k <= 4; k++)
        if (exp_sel < 0 && q[(last + k) % 4].size() > 0) exp_sel = (last + k) % 4;
      checks++;
      if (exp_sel < 0 ? (q_pop != 0) : (q_pop != 4'(1 << exp_sel))) begin
        failures++; $display("cyc %0d grant %b expected %0d", cyc, q_pop, exp_sel);
      end
      exp_valid = exp_sel >= 0;
      if (exp_sel >= 0) begin
        exp_desc = q[exp_sel].pop_front();
        last = exp_sel;
        if (cyc >= 1010 && cyc < 2000) begin
          checks++;
          if (cyc - lastsrv[exp_sel] != 4) begin failures++; $display("port %0d spacing %0d", exp_sel, cyc - lastsrv[exp_sel]); end
        end
        lastsrv[exp_sel] = cyc;
      end
      @(posedge clk);
      #1 drive();
    end
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

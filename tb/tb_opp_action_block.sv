// tb_opp_action_block: self-checking test of the action block.
// Random packets with drop, forward (valid and invalid port), flood and unknown
// action types; checks the egress push mask one cycle later, the descriptor and
// the drop counter.
module tb_opp_action_block;
  import opp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid;
  pkt_desc_t in_desc, eg_desc;
  logic [15:0] in_action;
  logic [3:0] eg_push;
  logic [31:0] n_drop;
  opp_action_block dut (.*);

  int drops = 0;
  initial begin
    in_valid = 0; in_desc = '0; in_action = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 1000; n++) begin
      logic [3:0] em;
      int typ, port;
      @(negedge clk);
      typ = $urandom_range(0, 3); port = $urandom_range(0, 5);
      in_valid = $urandom_range(0, 3) != 0;
      in_desc = '0; in_desc.hdr[31:0] = $urandom; in_desc.in_port = 2'($urandom);
      in_action = {4'(typ), 8'($urandom), 4'(port)};
      em = 0;
      if (typ == 1 && port < 4) em[port] = 1;
      if (typ == 2) em = 4'hF & ~(4'b1 << in_desc.in_port);
      if (!in_valid) em = 0;
      if (in_valid && em == 0) drops++;
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (eg_push != em || (em != 0 && eg_desc != in_desc) || n_drop != 32'(drops)) begin
        failures++; $display("n %0d typ %0d port %0d push %b exp %b", n, typ, port, eg_push, em);
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

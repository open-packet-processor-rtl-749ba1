// tb_opp_fifo: self-checking test of the descriptor FIFO.
// Random pushes and pops (never past full or empty) against a queue model;
// checks head data, full/empty flags and the occupancy count every cycle.
module tb_opp_fifo;
  import opp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic push, pop, full, empty;
  logic [31:0] din, dout;
  logic [4:0]  count;
  opp_fifo #(.T(logic [31:0]), .DEPTH(16)) dut (.*);

  logic [31:0] model[$];
  initial begin
    push = 0; pop = 0; din = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 2000; cyc++) begin
      @(negedge clk);
      checks++;
      if (empty != (model.size() == 0) || full != (model.size() == 16) || count != model.size()) begin
        failures++; $display("flag mismatch cyc %0d size %0d", cyc, model.size());
      end
      if (model.size() > 0) begin
        checks++;
        if (dout != model[0]) begin failures++; $display("data mismatch %h %h", dout, model[0]); end
      end
      // bias towards filling in the first half, draining in the second
      push = ($urandom_range(0, 99) < ((cyc % 400) < 200 ? 70 : 30)) && model.size() < 16;
      pop  = ($urandom_range(0, 99) < ((cyc % 400) < 200 ? 30 : 70)) && model.size() > 0;
      din  = $urandom;
      @(posedge clk);
      if (pop) void'(model.pop_front());
      if (push) model.push_back(din);
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

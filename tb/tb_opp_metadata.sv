// tb_opp_metadata: self-checking test of the metadata block.
// Checks that `now` counts clock cycles from reset and that each packet leaves
// one cycle later carrying the time of its arrival cycle and unchanged fields.
module tb_opp_metadata;
  import opp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, out_valid;
  pkt_desc_t in_desc, out_desc;
  logic [31:0] now;
  opp_metadata dut (.*);

  initial begin
    logic [31:0] t_in;
    pkt_desc_t d_in;
    logic v_in;
    in_valid = 0; in_desc = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int cyc = 0; cyc < 500; cyc++) begin
      @(negedge clk);
      checks++;
      if (now != 32'(cyc + 1)) begin failures++; $display("now %0d at cyc %0d", now, cyc); end
      if (cyc > 0) begin
        checks++;
        if (out_valid != v_in || (v_in && (out_desc.ts != t_in || out_desc.hdr != d_in.hdr ||
            out_desc.len != d_in.len || out_desc.in_port != d_in.in_port))) begin
          failures++; $display("cyc %0d packet mismatch", cyc);
        end
      end
      in_valid = $urandom_range(0, 1);
      in_desc = '0;
      in_desc.hdr[31:0] = $urandom; in_desc.len = 16'($urandom); in_desc.in_port = 2'($urandom);
      in_desc.ts = $urandom;
      v_in = in_valid; d_in = in_desc; t_in = now;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

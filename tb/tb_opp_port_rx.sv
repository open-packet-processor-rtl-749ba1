// tb_opp_port_rx: self-checking test of the port receive assembler.
// Sends packets of random length (1..100 bytes) as 64-bit beats with idle gaps;
// checks each descriptor's header bytes (first 40 bytes, zero beyond the packet),
// length and input port, and that it appears one cycle after the last beat.
module tb_opp_port_rx;
  import opp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic s_valid, s_last, m_valid;
  logic [63:0] s_data;
  logic [7:0]  s_keep;
  pkt_desc_t   m_desc;
  opp_port_rx #(.PORT_ID(2'd3)) dut (.*);

  initial begin
    s_valid = 0; s_last = 0; s_data = 0; s_keep = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      int len;
      logic [7:0] bytes [100];
      logic [HDR_W-1:0] exp_hdr;
      len = $urandom_range(1, 100);
      exp_hdr = '0;
      for (int i = 0; i < len; i++) begin
        bytes[i] = 8'($urandom);
        if (i < 40) exp_hdr[i*8 +: 8] = bytes[i];
      end
      for (int b = 0; b < (len + 7) / 8; b++) begin
        @(negedge clk);
        s_valid = 1;
        s_last  = (b == (len + 7) / 8 - 1);
        s_data  = $urandom;   // garbage in unused lanes
        s_data[63:32] = $urandom;
        s_keep  = 0;
        for (int k = 0; k < 8; k++)
          if (b*8 + k < len) begin s_keep[k] = 1; s_data[k*8 +: 8] = bytes[b*8 + k]; end
          else s_data[k*8 +: 8] = 8'h00;
      end
      @(negedge clk);
      s_valid = 0; s_last = 0;
      checks++;
      if (!m_valid) begin failures++; $display("no descriptor after last beat, pkt %0d", n); end
      else begin
        checks++;
        if (m_desc.hdr != exp_hdr || m_desc.len != 16'(len) || m_desc.in_port != 2'd3) begin
          failures++; $display("pkt %0d: len %0d got %0d", n, len, m_desc.len);
        end
      end
      @(negedge clk);
      checks++;
      if (m_valid) begin failures++; $display("m_valid held"); end
      repeat ($urandom_range(0, 2)) @(negedge clk);
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

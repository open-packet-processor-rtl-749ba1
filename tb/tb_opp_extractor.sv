// tb_opp_extractor: self-checking test of the packet fields extractor.
// Programs the eight field units and both key units with random offsets and
// masks, sends random packets and compares H0..H7 and the two flow keys with
// (vector >> offset) & mask computed here, one cycle after the input.
module tb_opp_extractor;
  import opp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  cfg_req_t cfg;
  logic in_valid, out_valid;
  pkt_desc_t in_desc, out_desc;
  fields_t h;
  logic [FK_W-1:0] lookup_key, update_key;
  opp_extractor dut (.*);

  task automatic cfg_wr(input logic [3:0] blk, input int e, input int w, input logic [31:0] d);
    @(negedge clk);
    cfg = '{we: 1'b1, addr: cfg_addr(blk, e, w), wdata: d};
    @(negedge clk);
    cfg.we = 1'b0;
  endtask

  int          off  [10];
  logic [127:0] mask [10];

  initial begin
    cfg = '0; in_valid = 0; in_desc = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 4; round++) begin
      for (int i = 0; i < 10; i++) begin
        off[i] = $urandom_range(0, XV_W - 1);
        mask[i] = {$urandom, $urandom, $urandom, $urandom};
        if (i < 8) mask[i][127:32] = '0;
        cfg_wr(CFG_EXTRACT, i, 0, 32'(off[i]));
        for (int w = 0; w < (i < 8 ? 1 : 4); w++) cfg_wr(CFG_EXTRACT, i, 1 + w, mask[i][w*32 +: 32]);
      end
      for (int n = 0; n < 50; n++) begin
        logic [XV_W-1:0] vec;
        @(negedge clk);
        in_valid = 1;
        for (int k = 0; k < HDR_W / 32; k++) in_desc.hdr[k*32 +: 32] = $urandom;
        in_desc.ts = $urandom; in_desc.len = 16'($urandom); in_desc.in_port = 2'($urandom);
        vec = {6'b0, in_desc.in_port, in_desc.len, in_desc.ts, in_desc.hdr};
        @(negedge clk);
        in_valid = 0;
        checks++;
        if (!out_valid || out_desc != in_desc) begin failures++; $display("valid/desc"); end
        for (int i = 0; i < 8; i++) begin
          logic [XV_W-1:0] s;
          s = vec >> off[i];
          checks++;
          if (h[i] != (s[31:0] & mask[i][31:0])) begin failures++; $display("field %0d", i); end
        end
        begin
          logic [XV_W-1:0] s8, s9;
          s8 = vec >> off[8]; s9 = vec >> off[9];
          checks += 2;
          if (lookup_key != (s8[127:0] & mask[8])) begin failures++; $display("lookup key"); end
          if (update_key != (s9[127:0] & mask[9])) begin failures++; $display("update key"); end
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

// opp_extractor: packet fields extractor and flow-key extractors.
//
// The packet descriptor is turned into an extraction vector (the 320 header
// bits with timestamp, length and input port above them) and fed to a parallel
// array of Shift-and-Mask units: eight give the 32-bit header fields H0..H7 used
// by the condition block, the XFSM match and the ALUs; two more give the 128-bit
// lookup flow key and the 128-bit update flow key (they differ for cross-flow
// applications such as MAC learning). Each unit has an offset and a mask,
// written through the configuration bus:
//   entry 0..7 : word 0 offset, word 1 mask          (header field i)
//   entry 8    : word 0 offset, words 1..4 mask      (lookup key)
//   entry 9    : word 0 offset, words 1..4 mask      (update key)
// Outputs are registered: one cycle from in_valid to out_valid.
// SaM units with offsets and masks follow the architecture; putting metadata in
// the vector (so that pkt.ts can be a header field) is this design's choice.
module opp_extractor
  import opp_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  cfg_req_t        cfg,
  input  logic            in_valid,
  input  pkt_desc_t       in_desc,
  output logic            out_valid,
  output pkt_desc_t       out_desc,
  output fields_t         h,
  output logic [FK_W-1:0] lookup_key,
  output logic [FK_W-1:0] update_key
);
  logic [XV_OFF_W-1:0] f_off  [NFIELDS];
  logic [REG_W-1:0]    f_mask [NFIELDS];
  logic [XV_OFF_W-1:0] k_off  [2];
  logic [FK_W-1:0]     k_mask [2];

  // configuration
  logic        sel;
  logic [14:0] entry;
  logic [4:0]  word;
  assign sel   = cfg.we && cfg.addr[23:20] == CFG_EXTRACT;
  assign entry = cfg.addr[19:5];
  assign word  = cfg.addr[4:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NFIELDS; i++) begin f_off[i] <= '0; f_mask[i] <= '0; end
      for (int i = 0; i < 2; i++)       begin k_off[i] <= '0; k_mask[i] <= '0; end
    end else if (sel) begin
      if (entry < 15'(NFIELDS)) begin
        if (word == 5'd0) f_off[entry[2:0]]  <= cfg.wdata[XV_OFF_W-1:0];
        if (word == 5'd1) f_mask[entry[2:0]] <= cfg.wdata;
      end else if (entry == 15'(NFIELDS) || entry == 15'(NFIELDS+1)) begin
        if (word == 5'd0) k_off[entry[0]] <= cfg.wdata[XV_OFF_W-1:0];
        else if (word >= 5'd1 && word <= 5'd4) k_mask[entry[0]][(word-5'd1)*32 +: 32] <= cfg.wdata;
      end
    end
  end

  // datapath
  logic [XV_W-1:0] vec;
  fields_t         h_d;
  logic [FK_W-1:0] key_d [2];
  assign vec = {6'b0, in_desc.in_port, in_desc.len, in_desc.ts, in_desc.hdr};

  for (genvar i = 0; i < NFIELDS; i++) begin : g_field
    opp_sam #(.IN_W(XV_W), .OUT_W(REG_W), .OFF_W(XV_OFF_W)) u_sam (
      .vec(vec), .offset(f_off[i]), .mask(f_mask[i]), .field(h_d[i]));
  end
  for (genvar i = 0; i < 2; i++) begin : g_key
    opp_sam #(.IN_W(XV_W), .OUT_W(FK_W), .OFF_W(XV_OFF_W)) u_sam (
      .vec(vec), .offset(k_off[i]), .mask(k_mask[i]), .field(key_d[i]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid  <= 1'b0;
      out_desc   <= '0;
      h          <= '0;
      lookup_key <= '0;
      update_key <= '0;
    end else begin
      out_valid  <= in_valid;
      out_desc   <= in_desc;
      h          <= h_d;
      lookup_key <= key_d[0];
      update_key <= key_d[1];
    end
  end
endmodule

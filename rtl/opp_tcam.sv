// opp_tcam: ternary content-addressable memory with a companion result RAM.
//
// ENTRIES rows, each holding a KEY_W-bit value, a KEY_W-bit care mask (1 = the
// bit is compared, 0 = don't care), a valid bit and a VAL_W-bit result. A search
// compares the key with all rows at once; the lowest-numbered valid matching row
// has the highest priority and its result is returned with `hit` high. The search
// is combinational; callers register the result. Rows are written word by word
// through the configuration bus, block CFG_BLK, entry = row, words:
//   0 .. KW-1        value          (KW = ceil(KEY_W/32))
//   KW .. 2KW-1      mask
//   2KW .. 2KW+VW-1  result         (VW = ceil(VAL_W/32))
//   2KW+VW           bit 0 = valid
// The TCAM with priority output and a companion RAM follows the architecture;
// the flip-flop construction and the word layout are this design's choices.
module opp_tcam
  import opp_pkg::*;
#(
  parameter int unsigned ENTRIES = 128,
  parameter int unsigned KEY_W   = 160,
  parameter int unsigned VAL_W   = 192,
  parameter logic [3:0]  CFG_BLK = CFG_XFSM
) (
  input  logic             clk,
  input  logic             rst_n,
  input  cfg_req_t         cfg,
  input  logic [KEY_W-1:0] key,
  output logic             hit,
  output logic [$clog2(ENTRIES)-1:0] idx,
  output logic [VAL_W-1:0] val
);
  localparam int unsigned KW = (KEY_W + 31) / 32;
  localparam int unsigned VW = (VAL_W + 31) / 32;
  localparam int unsigned IW = $clog2(ENTRIES);

  logic [KW*32-1:0] t_val  [ENTRIES];
  logic [KW*32-1:0] t_mask [ENTRIES];
  logic [VW*32-1:0] t_res  [ENTRIES];
  logic [ENTRIES-1:0] t_vld;

  logic        sel;
  logic [14:0] entry;
  logic [4:0]  word;
  assign sel   = cfg.we && cfg.addr[23:20] == CFG_BLK && cfg.addr[19:5] < 15'(ENTRIES);
  assign entry = cfg.addr[19:5];
  assign word  = cfg.addr[4:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      t_vld <= '0;
    end else if (sel && word == 5'(2*KW+VW)) begin
      t_vld[entry[IW-1:0]] <= cfg.wdata[0];
    end
  end

  always_ff @(posedge clk) begin
    if (sel) begin
      if (word < 5'(KW))
        t_val[entry[IW-1:0]][word*32 +: 32] <= cfg.wdata;
      else if (word < 5'(2*KW))
        t_mask[entry[IW-1:0]][(word-5'(KW))*32 +: 32] <= cfg.wdata;
      else if (word < 5'(2*KW+VW))
        t_res[entry[IW-1:0]][(word-5'(2*KW))*32 +: 32] <= cfg.wdata;
    end
  end

  // match lines and priority encoder
  logic [ENTRIES-1:0] match;
  always_comb begin
    for (int i = 0; i < ENTRIES; i++)
      match[i] = t_vld[i] &&
                 (((t_val[i][KEY_W-1:0] ^ key) & t_mask[i][KEY_W-1:0]) == '0);
    hit = 1'b0;
    idx = '0;
    for (int i = ENTRIES - 1; i >= 0; i--) begin
      if (match[i]) begin
        hit = 1'b1;
        idx = IW'(i);
      end
    end
    val = t_res[idx][VAL_W-1:0];
  end
endmodule

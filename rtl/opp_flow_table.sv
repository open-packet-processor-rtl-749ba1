// opp_flow_table: the Flow Context Table.
//
// Maps a 128-bit flow key to a flow context: a 16-bit state label, four 32-bit
// per-flow registers and two activity bits (146 bits in all). Exact matches are
// held in a d-left hash table of D ways with ENTRIES/D slots each; a small TCAM
// of TCAM_ENTRIES rows supplies wildcard (default) contexts for keys that are
// not in the hash table. A key in neither gets state 0 and zero registers.
//
// Lookup (two cycles): lk_valid/lk_key/up_key in cycle t. The edge ending cycle
// t reads the candidate slot of every way for the lookup key and for the update
// key (the key used to write back, which differs for cross-flow applications),
// and searches the TCAM. The edge ending cycle t+1 compares keys and registers
// ctx_valid/ctx plus where the update key lives (up_hit, up_way).
//
// Write-back (one cycle): wr_en with wr_key, wr_ctx and the up_hit/up_way found
// at lookup. A known key is overwritten in place; a new key goes into the
// leftmost way whose candidate slot is free (d-left insertion with slots of one
// entry). If no way has room the write is dropped and ins_fail counts it. A
// lookup issued in the cycle after the write-back edge sees the new context; a
// key inserted twice within one pipeline window can occupy two slots (the
// architecture relies on packets of one flow being spaced by the mixer).
//
// Housekeeping: a configuration write to control word 1 starts a scan that
// visits one slot index per cycle in all ways: ACTIVE entries become INACTIVE,
// INACTIVE entries become DELETED (free). A lookup hit or a write-back marks
// the entry ACTIVE. hk_busy is high while a scan runs.
//
// Following the architecture: d = 4, 4K entries, 32x128 TCAM, 146-bit context,
// activity bits ACTIVE/INACTIVE/DELETED, dual-ported RAMs with a read and a
// write each cycle. This design's choices: the hash functions (opp_pkg::hash_fold),
// slots of one entry, the second read port for the update key, the activity bits
// held in flip-flops beside the RAM, and the scan engine in hardware.
module opp_flow_table
  import opp_pkg::*;
#(
  parameter int unsigned D            = 4,
  parameter int unsigned ENTRIES      = 4096,
  parameter int unsigned TCAM_ENTRIES = 32
) (
  input  logic            clk,
  input  logic            rst_n,
  input  cfg_req_t        cfg,
  // lookup
  input  logic            lk_valid,
  input  logic [FK_W-1:0] lk_key,
  input  logic [FK_W-1:0] up_key,
  output logic            ctx_valid,
  output ctx_t            ctx,
  output logic            ctx_from_hash,   // context came from the hash table
  output logic            ctx_from_tcam,   // context came from the wildcard TCAM
  output logic            up_hit,
  output logic [1:0]      up_way,
  // write-back
  input  logic            wr_en,
  input  logic [FK_W-1:0] wr_key,
  input  ctx_t            wr_ctx,
  input  logic            wr_hit,
  input  logic [1:0]      wr_way,
  // status
  output logic            hk_busy,
  output logic [31:0]     ins_fail,
  output logic [31:0]     n_inserted
);
  localparam int unsigned SLOTS = ENTRIES / D;
  localparam int unsigned SW    = $clog2(SLOTS);
  localparam int unsigned DATA_W = STATE_W + NREGS*REG_W;   // 144

  function automatic logic [SW-1:0] slot_of(input logic [FK_W-1:0] k, input int unsigned w);
    logic [31:0] hv;
    hv = hash_fold(k, w);
    return hv[31 -: SW];
  endfunction

  // ---------------------------------------------------------------- storage
  logic [FK_W-1:0]   key_mem  [D][SLOTS];
  logic [DATA_W-1:0] data_mem [D][SLOTS];
  flag_e             flags    [D][SLOTS];

  // ---------------------------------------------------------------- TCAM
  logic            tc_hit;
  logic [CTX_W-1:0] tc_val;
  logic [$clog2(TCAM_ENTRIES)-1:0] tc_idx;
  opp_tcam #(.ENTRIES(TCAM_ENTRIES), .KEY_W(FK_W), .VAL_W(CTX_W), .CFG_BLK(CFG_FLOWTC)) u_tcam (
    .clk, .rst_n, .cfg, .key(lk_key), .hit(tc_hit), .idx(tc_idx), .val(tc_val));

  // ---------------------------------------------------------------- stage 1: read
  logic              s1_valid;
  logic [FK_W-1:0]   s1_lk_key, s1_up_key;
  logic [SW-1:0]     s1_lk_slot [D];
  logic [SW-1:0]     s1_up_slot [D];
  logic [FK_W-1:0]   s1_lk_kd   [D];
  logic [DATA_W-1:0] s1_lk_dd   [D];
  logic [FK_W-1:0]   s1_up_kd   [D];
  logic              s1_tc_hit;
  ctx_t              s1_tc_val;

  always_ff @(posedge clk) begin
    for (int w = 0; w < D; w++) begin
      s1_lk_slot[w] <= slot_of(lk_key, w);
      s1_up_slot[w] <= slot_of(up_key, w);
      s1_lk_kd[w]   <= key_mem[w][slot_of(lk_key, w)];
      s1_lk_dd[w]   <= data_mem[w][slot_of(lk_key, w)];
      s1_up_kd[w]   <= key_mem[w][slot_of(up_key, w)];
    end
    s1_lk_key <= lk_key;
    s1_up_key <= up_key;
    s1_tc_hit <= tc_hit;
    s1_tc_val <= ctx_t'(tc_val);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) s1_valid <= 1'b0;
    else        s1_valid <= lk_valid;
  end

  // ---------------------------------------------------------------- stage 2: compare
  logic          lk_hit_d, up_hit_d;
  logic [1:0]    lk_way_d, up_way_d;
  always_comb begin
    lk_hit_d = 1'b0; lk_way_d = '0;
    up_hit_d = 1'b0; up_way_d = '0;
    for (int w = D - 1; w >= 0; w--) begin
      if (flags[w][s1_lk_slot[w]] != FLAG_DELETED && s1_lk_kd[w] == s1_lk_key) begin
        lk_hit_d = 1'b1; lk_way_d = 2'(w);
      end
      if (flags[w][s1_up_slot[w]] != FLAG_DELETED && s1_up_kd[w] == s1_up_key) begin
        up_hit_d = 1'b1; up_way_d = 2'(w);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ctx_valid     <= 1'b0;
      ctx           <= '0;
      ctx_from_hash <= 1'b0;
      ctx_from_tcam <= 1'b0;
      up_hit        <= 1'b0;
      up_way        <= '0;
    end else begin
      ctx_valid     <= s1_valid;
      ctx_from_hash <= s1_valid && lk_hit_d;
      ctx_from_tcam <= s1_valid && !lk_hit_d && s1_tc_hit;
      up_hit        <= up_hit_d;
      up_way        <= up_way_d;
      if (lk_hit_d) begin
        ctx.state <= s1_lk_dd[lk_way_d][STATE_W-1:0];
        ctx.r     <= regs_t'(s1_lk_dd[lk_way_d][DATA_W-1:STATE_W]);
        ctx.flags <= FLAG_ACTIVE;
      end else if (s1_tc_hit) begin
        ctx <= s1_tc_val;
      end else begin
        ctx <= '0;
      end
    end
  end

  // ---------------------------------------------------------------- write-back
  logic [SW-1:0] wr_slot [D];
  logic          wr_do;
  logic [1:0]    wr_w;
  always_comb begin
    wr_do = 1'b0;
    wr_w  = '0;
    for (int w = 0; w < D; w++) wr_slot[w] = slot_of(wr_key, w);
    if (wr_en) begin
      if (wr_hit) begin
        wr_do = 1'b1;
        wr_w  = wr_way;
      end else begin
        for (int w = D - 1; w >= 0; w--) begin
          if (flags[w][wr_slot[w]] == FLAG_DELETED) begin
            wr_do = 1'b1;
            wr_w  = 2'(w);
          end
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (wr_do) begin
      key_mem[wr_w][wr_slot[wr_w]]  <= wr_key;
      data_mem[wr_w][wr_slot[wr_w]] <= {wr_ctx.r, wr_ctx.state};
    end
  end

  // ---------------------------------------------------------------- flags and housekeeping
  logic          hk_start;
  logic [SW-1:0] hk_idx;
  assign hk_start = cfg.we && cfg.addr[23:20] == CFG_CTRL && cfg.addr[19:5] == '0 &&
                    cfg.addr[4:0] == 5'd1 && cfg.wdata[0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int w = 0; w < D; w++)
        for (int s = 0; s < SLOTS; s++) flags[w][s] <= FLAG_DELETED;
      hk_busy    <= 1'b0;
      hk_idx     <= '0;
      ins_fail   <= '0;
      n_inserted <= '0;
    end else begin
      // ageing scan
      if (hk_busy) begin
        for (int w = 0; w < D; w++) begin
          case (flags[w][hk_idx])
            FLAG_ACTIVE:   flags[w][hk_idx] <= FLAG_INACTIVE;
            FLAG_INACTIVE: flags[w][hk_idx] <= FLAG_DELETED;
            default:       ;
          endcase
        end
        hk_idx <= hk_idx + 1'b1;
        if (hk_idx == SW'(SLOTS - 1)) hk_busy <= 1'b0;
      end else if (hk_start) begin
        hk_busy <= 1'b1;
        hk_idx  <= '0;
      end
      // accesses keep an entry alive
      if (s1_valid && lk_hit_d) flags[lk_way_d][s1_lk_slot[lk_way_d]] <= FLAG_ACTIVE;
      if (wr_do) flags[wr_w][wr_slot[wr_w]] <= FLAG_ACTIVE;
      if (wr_en && !wr_do) ins_fail <= ins_fail + 1'b1;
      if (wr_do && !wr_hit) n_inserted <= n_inserted + 1'b1;
    end
  end

  initial begin
    assert (D == 4) else $error("opp_flow_table: way index is 2 bits, D must be 4");
  end
endmodule

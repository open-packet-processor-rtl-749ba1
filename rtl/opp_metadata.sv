// opp_metadata: attaches arrival metadata to each packet entering the OPP stage.
//
// A free-running counter advances by one every clock and serves as the switch
// time base; a packet passing through gets the counter value as its timestamp.
// The input port is already carried by the descriptor. One register stage:
// out_* in cycle t+1 reflects in_* in cycle t, with the timestamp of cycle t.
// The time value is also an output so that other blocks can read "now".
// That the block supplies input port and timestamp follows the architecture;
// the 32-bit clock-cycle time unit is this design's choice.
module opp_metadata
  import opp_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  input  pkt_desc_t       in_desc,
  output logic            out_valid,
  output pkt_desc_t       out_desc,
  output logic [TS_W-1:0] now
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      now       <= '0;
      out_valid <= 1'b0;
      out_desc  <= '0;
    end else begin
      now       <= now + 1'b1;
      out_valid <= in_valid;
      out_desc  <= in_desc;
      if (in_valid) out_desc.ts <= now;
    end
  end
endmodule

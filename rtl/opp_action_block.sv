// opp_action_block: applies the packet action chosen by the XFSM table.
//
// Takes a packet descriptor (from the delay queue) together with its 16-bit
// action word and pushes it into the egress queues:
//   [15:12] = 0 DROP   the packet goes nowhere
//           = 1 FWD    to the port in [3:0] (dropped if not a valid port)
//           = 2 FLOOD  to every port except the one it came in on
// other types drop. Egress pushes are registered: one cycle after in_valid.
// Counters of forwarded copies and drops are kept for status.
// Drop, forward and flood are the sample actions of the architecture's
// prototype; the encoding and flood-excludes-input are this design's choices.
module opp_action_block
  import opp_pkg::*;
#(
  parameter int unsigned N = NPORTS
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  pkt_desc_t           in_desc,
  input  logic [ACTION_W-1:0] in_action,
  output logic [N-1:0]        eg_push,
  output pkt_desc_t           eg_desc,
  output logic [31:0]         n_drop
);
  logic [N-1:0] mask;
  always_comb begin
    mask = '0;
    case (in_action[15:12])
      ACT_FWD:   if (in_action[3:0] < 4'(N)) mask[in_action[1:0]] = 1'b1;
      ACT_FLOOD: begin
        mask = '1;
        mask[in_desc.in_port] = 1'b0;
      end
      default:   mask = '0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      eg_push <= '0;
      eg_desc <= '0;
      n_drop  <= '0;
    end else begin
      eg_push <= in_valid ? mask : '0;
      eg_desc <= in_desc;
      if (in_valid && mask == '0) n_drop <= n_drop + 1'b1;
    end
  end
endmodule

// opp_port_rx: receive side of one switch port.
//
// Each Ethernet port delivers a packet as 64-bit beats (valid, last, byte-keep).
// This block gathers the first five beats into the 320-bit header word that the
// OPP stage inspects (40 bytes, the minimum packet the 320-bit mixer bus carries
// in one clock), counts the packet length in bytes from the keep bits, and emits
// one packet descriptor in the cycle after the last beat. Bytes past the first
// 40 are counted but not stored: the OPP stage only acts on headers, and the
// payload path is not modelled. Header bytes not received are zero.
// The 64-bit port path and 320-bit header bus follow the prototype; the beat
// framing and the descriptor format are this design's choices.
module opp_port_rx
  import opp_pkg::*;
#(
  parameter logic [PORT_W-1:0] PORT_ID = '0
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              s_valid,
  input  logic [BEAT_W-1:0] s_data,
  input  logic              s_last,
  input  logic [7:0]        s_keep,   // contiguous from bit 0
  output logic              m_valid,
  output pkt_desc_t         m_desc
);
  localparam int unsigned NBEATS = HDR_W / BEAT_W;   // 5

  logic [HDR_W-1:0] hdr_q;
  logic [LEN_W-1:0] len_q;
  logic [3:0]       beat_q;
  logic [3:0]       nbytes;

  always_comb begin
    nbytes = '0;
    for (int i = 0; i < 8; i++) nbytes += {3'b0, s_keep[i]};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hdr_q   <= '0;
      len_q   <= '0;
      beat_q  <= '0;
      m_valid <= 1'b0;
      m_desc  <= '0;
    end else begin
      m_valid <= 1'b0;
      if (s_valid) begin
        logic [HDR_W-1:0] h;
        logic [LEN_W-1:0] l;
        h = hdr_q;
        if (beat_q < NBEATS[3:0]) begin
          for (int b = 0; b < 8; b++)
            h[beat_q*BEAT_W + b*8 +: 8] = s_keep[b] ? s_data[b*8 +: 8] : 8'h00;
        end
        l = len_q + LEN_W'(nbytes);
        if (s_last) begin
          m_valid        <= 1'b1;
          m_desc.hdr     <= h;
          m_desc.len     <= l;
          m_desc.ts      <= '0;
          m_desc.in_port <= PORT_ID;
          hdr_q          <= '0;
          len_q          <= '0;
          beat_q         <= '0;
        end else begin
          hdr_q  <= h;
          len_q  <= l;
          beat_q <= (beat_q == 4'hF) ? beat_q : beat_q + 1'b1;
        end
      end
    end
  end
endmodule

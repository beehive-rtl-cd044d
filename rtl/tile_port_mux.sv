// tile_port_mux: lets two endpoints share one tile's router port.
//
// Toward the endpoints, each message leaving the router's local port is steered by the
// `fbits` field of its header flit: fbits = 0 goes to endpoint 0, anything else to
// endpoint 1. Toward the router, the two endpoints' messages are merged with a
// round-robin choice made at message boundaries; the choice holds for the header flit
// and the msg_len body flits that follow, so messages never interleave (wormhole
// routing needs that). Fig. 9 of the paper draws two such tiles (App with App Log,
// ETH TX with Latency Log); selecting the endpoint by fbits, as OpenPiton headers
// allow, and the arbitration are this design's choices.
// Interface: valid/ready flit streams; no added latency.
module tile_port_mux
  import beehive_pkg::*;
(
  input  logic       clk,
  input  logic       rst,
  // router local port
  input  logic       r_out_valid,
  input  flit_t      r_out_data,
  output logic       r_out_ready,
  output logic       r_in_valid,
  output flit_t      r_in_data,
  input  logic       r_in_ready,
  // endpoints
  output logic [1:0] ep_in_valid,
  output flit_t      ep_in_data [2],
  input  logic [1:0] ep_in_ready,
  input  logic [1:0] ep_out_valid,
  input  flit_t      ep_out_data [2],
  output logic [1:0] ep_out_ready
);
  // ---- split ----
  logic             s_busy, s_sel;
  logic [LEN_W-1:0] s_rem;
  noc_hdr_t         s_h;
  logic             s_cur;

  assign s_h   = hdr_of(r_out_data);
  assign s_cur = s_busy ? s_sel : (s_h.fbits != 4'd0);

  always_comb begin
    ep_in_valid   = '0;
    ep_in_data[0] = r_out_data;
    ep_in_data[1] = r_out_data;
    ep_in_valid[s_cur] = r_out_valid;
    r_out_ready   = ep_in_ready[s_cur];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      s_busy <= 1'b0;
      s_sel  <= 1'b0;
      s_rem  <= '0;
    end else if (r_out_valid && r_out_ready) begin
      if (!s_busy) begin
        if (s_h.msg_len != '0) begin
          s_busy <= 1'b1;
          s_sel  <= s_cur;
          s_rem  <= s_h.msg_len;
        end
      end else begin
        s_rem <= s_rem - 1'b1;
        if (s_rem == LEN_W'(1)) s_busy <= 1'b0;
      end
    end
  end

  // ---- merge ----
  logic             m_busy, m_sel, m_last;
  logic [LEN_W-1:0] m_rem;
  logic             m_cur;
  noc_hdr_t         m_h;

  always_comb begin
    if (m_busy)                              m_cur = m_sel;
    else if (ep_out_valid[0] && ep_out_valid[1]) m_cur = ~m_last;
    else                                     m_cur = ep_out_valid[1];
  end
  assign m_h = hdr_of(ep_out_data[m_cur]);

  always_comb begin
    r_in_valid   = ep_out_valid[m_cur];
    r_in_data    = ep_out_data[m_cur];
    ep_out_ready = '0;
    ep_out_ready[m_cur] = r_in_ready;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      m_busy <= 1'b0;
      m_sel  <= 1'b0;
      m_last <= 1'b1;
      m_rem  <= '0;
    end else if (r_in_valid && r_in_ready) begin
      if (!m_busy) begin
        m_last <= m_cur;
        if (m_h.msg_len != '0) begin
          m_busy <= 1'b1;
          m_sel  <= m_cur;
          m_rem  <= m_h.msg_len;
        end
      end else begin
        m_rem <= m_rem - 1'b1;
        if (m_rem == LEN_W'(1)) m_busy <= 1'b0;
      end
    end
  end
endmodule

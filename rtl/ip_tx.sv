// ip_tx: IPv4 transmit tile processing logic.
//
// Takes IP messages (header flit, ip_meta_t flit, data flits holding the transport
// segment) and emits ETH messages toward the Ethernet transmit tile at `next_dest`:
// the metadata flit names the MAC addresses and EtherType 0x0800, and the data flits
// carry a 20-byte IPv4 header followed by the segment. The header has version 4,
// IHL 5, TOS 0, total length, an identification that counts packets, the don't-
// fragment flag, TTL 64, the protocol and addresses from the metadata and a header
// checksum computed over the other nine 16-bit words. The header goes in front of the
// data with prepend_stream, so the tile streams.
//
// The destination MAC is the configured `gw_mac` (a next-hop router or the peer) and
// the source MAC is `local_mac`; the paper does not describe address resolution, so
// this is this design's assumption, as are TTL and the ID scheme. Timing: the output
// header flit leaves the cycle after the input metadata is taken; one flit per cycle
// after that.
module ip_tx
  import beehive_pkg::*;
(
  input  logic               clk,
  input  logic               rst,
  input  logic [COORD_W-1:0] my_x,
  input  logic [COORD_W-1:0] my_y,
  input  noc_dest_t          next_dest,
  input  logic [47:0]        local_mac,
  input  logic [47:0]        gw_mac,
  input  logic               in_valid,
  input  flit_t              in_data,
  output logic               in_ready,
  output logic               out_valid,
  output flit_t              out_data,
  input  logic               out_ready
);
  typedef enum logic [2:0] {S_HDR, S_META, S_OHDR, S_OMETA, S_DATA} state_t;
  state_t   st;
  ip_meta_t meta;
  logic [15:0] ident;

  logic [15:0]  tot;
  logic [159:0] iph;
  logic [15:0]  csum;
  assign tot = meta.data_len + 16'd20;
  always_comb begin
    iph  = {8'h45, 8'h00, tot, ident, 16'h4000, 8'd64, meta.protocol, 16'h0000,
            meta.src_ip, meta.dst_ip};
    csum = ~csum_fold(flit_sum({iph, {(NOC_W-160){1'b0}}}));
    iph[79:64] = csum;
  end

  eth_meta_t om;
  always_comb begin
    om.dst_mac   = gw_mac;
    om.src_mac   = local_mac;
    om.ethertype = ETHERTYPE_IPV4;
    om.data_len  = tot;
    om.ts        = meta.ts;
  end

  logic  p_start, p_busy, p_in_ready, p_out_valid, p_out_last;
  flit_t p_out_data;

  prepend_stream u_pre (
    .clk, .rst, .start(p_start), .hdr({iph, {(NOC_W-160){1'b0}}}), .hlen(6'd20),
    .in_bytes(24'(meta.data_len)), .busy(p_busy),
    .in_valid(in_valid && st == S_DATA), .in_data, .in_ready(p_in_ready),
    .out_valid(p_out_valid), .out_data(p_out_data), .out_last(p_out_last),
    .out_ready(out_ready && st == S_DATA));

  always_comb begin
    in_ready  = 1'b0;
    out_valid = 1'b0;
    out_data  = p_out_data;
    p_start   = 1'b0;
    case (st)
      S_HDR, S_META: in_ready = 1'b1;
      S_OHDR: begin
        out_valid = 1'b1;
        out_data  = mk_hdr_flit(next_dest, my_x, my_y,
                                LEN_W'(1) + data_flits(24'(tot)), MSG_ETH);
      end
      S_OMETA: begin
        out_valid = 1'b1;
        out_data  = {om, {(NOC_W - $bits(eth_meta_t)){1'b0}}};
        p_start   = out_ready;
      end
      S_DATA: begin
        in_ready  = p_in_ready;
        out_valid = p_out_valid;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      st    <= S_HDR;
      meta  <= '0;
      ident <= '0;
    end else begin
      case (st)
        S_HDR:   if (in_valid) st <= S_META;
        S_META:  if (in_valid) begin
          meta <= ip_meta_t'(in_data[NOC_W-1 -: $bits(ip_meta_t)]);
          st   <= S_OHDR;
        end
        S_OHDR:  if (out_ready) st <= S_OMETA;
        S_OMETA: if (out_ready) st <= S_DATA;
        S_DATA:  if (!p_busy) begin
          st    <= S_HDR;
          ident <= ident + 16'd1;
        end
        default: st <= S_HDR;
      endcase
    end
  end

  wire unused = p_out_last;
endmodule

// udp_tx: UDP transmit tile processing logic.
//
// Takes UDP messages from an application (header flit, udp_meta_t flit, payload flits)
// and sends IP messages to the IP transmit tile at `next_dest`: an ip_meta_t flit
// (addresses, protocol 17, length) and data flits holding the 8-byte UDP header
// followed by the payload.
//
// The UDP checksum sits in the header but covers the whole payload, so the payload is
// first written into a pkt_buffer while its ones' complement sum is accumulated. Once
// it is all in, the read side completes the checksum with the pseudo-header and the
// UDP header words, sends the metadata, and streams the payload out through
// prepend_stream with the header in front. A computed checksum of 0 is sent as 0xFFFF
// (RFC 768). Computing the checksum follows the paper; the store-and-forward buffer
// and its 256-flit default are this design's.
module udp_tx
  import beehive_pkg::*;
#(
  parameter int BUF_FLITS = 256
) (
  input  logic               clk,
  input  logic               rst,
  input  logic [COORD_W-1:0] my_x,
  input  logic [COORD_W-1:0] my_y,
  input  noc_dest_t          next_dest,
  input  logic               in_valid,
  input  flit_t              in_data,
  output logic               in_ready,
  output logic               out_valid,
  output flit_t              out_data,
  input  logic               out_ready
);
  localparam int SIDE_W = $bits(udp_meta_t) + 16;

  typedef enum logic [1:0] {S_HDR, S_META, S_DATA, S_COMMIT} state_t;
  state_t      st;
  udp_meta_t   meta, in_meta;
  logic [31:0] sum;
  logic [23:0] left;

  assign in_meta = udp_meta_t'(in_data[NOC_W-1 -: $bits(udp_meta_t)]);

  logic  wr_ready, commit_ready, pkt_valid, pkt_pop, rd_valid, rd_ready;
  logic [23:0] pkt_bytes;
  logic [SIDE_W-1:0] pkt_side;
  flit_t rd_data;

  pkt_buffer #(.DEPTH(BUF_FLITS), .SIDE_W(SIDE_W), .PKTS(8)) u_buf (
    .clk, .rst,
    .wr_valid(in_valid && st == S_DATA), .wr_data(in_data), .wr_ready,
    .commit_valid(st == S_COMMIT && commit_ready), .commit_keep(1'b1),
    .commit_bytes(24'(meta.data_len)), .commit_side({meta, csum_fold(sum)}), .commit_ready,
    .pkt_valid, .pkt_bytes, .pkt_side, .pkt_pop,
    .rd_valid, .rd_data, .rd_ready);

  always_comb begin
    case (st)
      S_HDR, S_META: in_ready = 1'b1;
      S_DATA:        in_ready = wr_ready;
      default:       in_ready = 1'b0;
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      st   <= S_HDR;
      meta <= '0;
      sum  <= '0;
      left <= '0;
    end else begin
      case (st)
        S_HDR:  if (in_valid) st <= S_META;
        S_META: if (in_valid) begin
          meta <= in_meta;
          sum  <= '0;
          left <= 24'(in_meta.data_len);
          st   <= (in_meta.data_len == '0) ? S_COMMIT : S_DATA;
        end
        S_DATA: if (in_valid && wr_ready) begin
          sum  <= 32'(csum_fold(sum)) + flit_sum(mask_bytes(in_data, left));
          left <= (left > 24'(FLIT_BYTES)) ? left - 24'(FLIT_BYTES) : '0;
          if (left <= 24'(FLIT_BYTES)) st <= S_COMMIT;
        end
        S_COMMIT: if (commit_ready) st <= S_HDR;
        default: st <= S_HDR;
      endcase
    end
  end

  // ---- read side ----
  typedef enum logic [1:0] {R_IDLE, R_HDR, R_META, R_DATA} rstate_t;
  rstate_t     rs;
  udp_meta_t   r_meta;
  logic [15:0] r_psum, r_len, r_cs, cs_raw;
  logic [23:0] r_bytes;

  assign r_len  = r_meta.data_len + 16'd8;
  assign cs_raw = ~csum_fold(32'(r_psum) +
                   32'(r_meta.src_ip[31:16]) + 32'(r_meta.src_ip[15:0]) +
                   32'(r_meta.dst_ip[31:16]) + 32'(r_meta.dst_ip[15:0]) +
                   32'(IPPROTO_UDP) + 32'(r_len) +
                   32'(r_meta.src_port) + 32'(r_meta.dst_port) + 32'(r_len));
  assign r_cs   = (cs_raw == 16'h0) ? 16'hFFFF : cs_raw;

  ip_meta_t om;
  always_comb begin
    om.src_ip   = r_meta.src_ip;
    om.dst_ip   = r_meta.dst_ip;
    om.protocol = IPPROTO_UDP;
    om.data_len = r_len;
    om.ts       = r_meta.ts;
  end

  logic  p_start, p_busy, p_out_valid, p_out_last;
  flit_t p_out_data;

  prepend_stream u_pre (
    .clk, .rst, .start(p_start),
    .hdr({r_meta.src_port, r_meta.dst_port, r_len, r_cs, {(NOC_W-64){1'b0}}}),
    .hlen(6'd8), .in_bytes(r_bytes), .busy(p_busy),
    .in_valid(rd_valid && rs == R_DATA), .in_data(rd_data), .in_ready(rd_ready),
    .out_valid(p_out_valid), .out_data(p_out_data), .out_last(p_out_last),
    .out_ready(out_ready && rs == R_DATA));

  always_comb begin
    pkt_pop   = (rs == R_IDLE) && pkt_valid;
    out_valid = 1'b0;
    out_data  = p_out_data;
    p_start   = 1'b0;
    case (rs)
      R_HDR: begin
        out_valid = 1'b1;
        out_data  = mk_hdr_flit(next_dest, my_x, my_y,
                                LEN_W'(1) + data_flits(24'(r_len)), MSG_IP);
      end
      R_META: begin
        out_valid = 1'b1;
        out_data  = {om, {(NOC_W - $bits(ip_meta_t)){1'b0}}};
        p_start   = out_ready;
      end
      R_DATA: out_valid = p_out_valid;
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      rs      <= R_IDLE;
      r_meta  <= '0;
      r_psum  <= '0;
      r_bytes <= '0;
    end else begin
      case (rs)
        R_IDLE: if (pkt_valid) begin
          {r_meta, r_psum} <= pkt_side;
          r_bytes          <= pkt_bytes;
          rs               <= R_HDR;
        end
        R_HDR:  if (out_ready) rs <= R_META;
        R_META: if (out_ready) rs <= R_DATA;
        R_DATA: if (!p_busy) rs <= R_IDLE;
        default: rs <= R_IDLE;
      endcase
    end
  end

  wire unused = p_out_last;
endmodule

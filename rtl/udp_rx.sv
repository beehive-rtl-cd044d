// udp_rx: UDP receive tile processing logic.
//
// Takes IP messages whose data flits hold a UDP datagram and delivers UDP messages
// (header flit, udp_meta_t flit, payload flits) to the tile the destination port
// selects in the next_hop_table: the application, or a log read-back endpoint.
//
// The UDP checksum covers the whole datagram, so its verdict is known only after the
// last flit. The tile therefore strips the 8-byte UDP header with strip_stream while
// it adds up the datagram (plus the pseudo-header of addresses, protocol and length)
// and writes the payload into a pkt_buffer; at the end it commits the payload when the
// checksum folds to 0xFFFF (or the sender sent 0, meaning no checksum) and rolls it
// back otherwise. A datagram whose length field is impossible or whose port has no
// next hop is consumed without being buffered. Each drop pulses `drop`. The read side
// sends committed payloads out as UDP messages, one flit per cycle.
//
// Checksum validation and port-based routing follow the paper; the store-and-forward
// buffer (the paper's UDP tiles do use block RAM, Table V) and its 256-flit default
// depth are this design's. A datagram longer than the buffer would never commit.
module udp_rx
  import beehive_pkg::*;
#(
  parameter int                         BUF_FLITS   = 256,
  parameter int                         TBL_ENTRIES = 4,
  parameter logic [TBL_ENTRIES-1:0]     INIT_VALID  = '0,
  parameter logic [TBL_ENTRIES*16-1:0]  INIT_KEY    = '0,
  parameter logic [TBL_ENTRIES*DEST_W-1:0] INIT_DEST = '0
) (
  input  logic                           clk,
  input  logic                           rst,
  input  logic [COORD_W-1:0]             my_x,
  input  logic [COORD_W-1:0]             my_y,
  input  logic                           in_valid,
  input  flit_t                          in_data,
  output logic                           in_ready,
  output logic                           out_valid,
  output flit_t                          out_data,
  input  logic                           out_ready,
  input  logic                           tbl_wr_en,
  input  logic [$clog2(TBL_ENTRIES)-1:0] tbl_wr_idx,
  input  logic                           tbl_wr_valid,
  input  logic [15:0]                    tbl_wr_key,
  input  noc_dest_t                      tbl_wr_dest,
  output logic                           drop
);
  localparam int SIDE_W = DEST_W + $bits(udp_meta_t);

  typedef enum logic [2:0] {S_HDR, S_META, S_FIRST, S_DEC, S_DATA, S_COMMIT} state_t;
  state_t      st;
  ip_meta_t    meta, in_meta;
  flit_t       first;
  logic [31:0] sum;
  logic [23:0] sum_left;   // datagram bytes not yet added to sum

  assign in_meta = ip_meta_t'(in_data[NOC_W-1 -: $bits(ip_meta_t)]);

  logic [15:0] sport, dport, ulen, ucs;
  logic        hit, ok_pre;
  noc_dest_t   dest;
  always_comb begin
    sport  = first[NOC_W-1 -: 16];
    dport  = first[NOC_W-17 -: 16];
    ulen   = first[NOC_W-33 -: 16];
    ucs    = first[NOC_W-49 -: 16];
    ok_pre = (ulen >= 16'd8) && (ulen <= meta.data_len) && hit;
  end

  next_hop_table #(.ENTRIES(TBL_ENTRIES), .KEY_W(16), .INIT_VALID(INIT_VALID),
                   .INIT_KEY(INIT_KEY), .INIT_DEST(INIT_DEST)) u_tbl (
    .clk, .rst, .key(dport), .hit, .dest,
    .wr_en(tbl_wr_en), .wr_idx(tbl_wr_idx), .wr_valid(tbl_wr_valid),
    .wr_key(tbl_wr_key), .wr_dest(tbl_wr_dest));

  logic [15:0] final_sum;
  logic        cs_ok;
  always_comb begin
    final_sum = csum_fold(sum + 32'(meta.src_ip[31:16]) + 32'(meta.src_ip[15:0]) +
                          32'(meta.dst_ip[31:16]) + 32'(meta.dst_ip[15:0]) +
                          32'(IPPROTO_UDP) + 32'(ulen));
    cs_ok = (ucs == 16'h0) || (final_sum == 16'hFFFF);
  end

  // ---- strip + buffer ----
  logic  s_start, s_busy, s_in_ready, s_out_valid, s_out_last;
  flit_t s_out_data;
  logic  wr_ready, commit_valid, commit_ready;
  logic  pkt_valid, pkt_pop, rd_valid, rd_ready;
  logic [23:0] pkt_bytes;
  logic [SIDE_W-1:0] pkt_side;
  flit_t rd_data;
  udp_meta_t um;

  always_comb begin
    um.src_ip   = meta.src_ip;
    um.dst_ip   = meta.dst_ip;
    um.src_port = sport;
    um.dst_port = dport;
    um.data_len = ulen - 16'd8;
    um.ts       = meta.ts;
  end

  strip_stream u_strip (
    .clk, .rst, .start(s_start), .first(first), .strip(6'd8),
    .in_bytes(24'(meta.data_len)), .out_bytes(ok_pre ? 24'(ulen) - 24'd8 : 24'd0),
    .busy(s_busy),
    .in_valid(in_valid && st == S_DATA), .in_data(in_data), .in_ready(s_in_ready),
    .out_valid(s_out_valid), .out_data(s_out_data), .out_last(s_out_last),
    .out_ready(wr_ready));

  pkt_buffer #(.DEPTH(BUF_FLITS), .SIDE_W(SIDE_W), .PKTS(8)) u_buf (
    .clk, .rst,
    .wr_valid(s_out_valid), .wr_data(s_out_data), .wr_ready,
    .commit_valid, .commit_keep(cs_ok), .commit_bytes(24'(ulen) - 24'd8),
    .commit_side({dest, um}), .commit_ready,
    .pkt_valid, .pkt_bytes, .pkt_side, .pkt_pop,
    .rd_valid, .rd_data, .rd_ready);

  assign commit_valid = (st == S_COMMIT) && commit_ready;

  always_comb begin
    in_ready = 1'b0;
    s_start  = 1'b0;
    drop     = 1'b0;
    case (st)
      S_HDR, S_META, S_FIRST: in_ready = 1'b1;
      S_DEC: begin
        s_start = 1'b1;
        drop    = !ok_pre;
      end
      S_DATA:   in_ready = s_in_ready;
      S_COMMIT: drop = commit_ready && !cs_ok;
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      st       <= S_HDR;
      meta     <= '0;
      first    <= '0;
      sum      <= '0;
      sum_left <= '0;
    end else begin
      case (st)
        S_HDR:   if (in_valid) st <= S_META;
        S_META:  if (in_valid) begin
          meta <= in_meta;
          st   <= (in_meta.data_len == '0) ? S_HDR : S_FIRST;
        end
        S_FIRST: if (in_valid) begin
          first <= in_data;
          st    <= S_DEC;
        end
        S_DEC: begin
          sum      <= flit_sum(mask_bytes(first, 24'(ulen)));
          sum_left <= (24'(ulen) > 24'(FLIT_BYTES)) ? 24'(ulen) - 24'(FLIT_BYTES) : '0;
          st       <= S_DATA;
        end
        S_DATA: begin
          if (in_valid && s_in_ready) begin
            sum      <= 32'(csum_fold(sum)) + flit_sum(mask_bytes(in_data, sum_left));
            sum_left <= (sum_left > 24'(FLIT_BYTES)) ? sum_left - 24'(FLIT_BYTES) : '0;
          end
          if (!s_busy) st <= ok_pre ? S_COMMIT : S_HDR;
        end
        S_COMMIT: if (commit_ready) st <= S_HDR;
        default: st <= S_HDR;
      endcase
    end
  end

  // ---- read side: committed payloads out as UDP messages ----
  typedef enum logic [1:0] {R_IDLE, R_HDR, R_META, R_DATA} rstate_t;
  rstate_t          rs;
  noc_dest_t        r_dest;
  udp_meta_t        r_meta;
  logic [LEN_W-1:0] r_left;

  always_comb begin
    pkt_pop   = (rs == R_IDLE) && pkt_valid;
    out_valid = 1'b0;
    out_data  = rd_data;
    rd_ready  = 1'b0;
    case (rs)
      R_HDR: begin
        out_valid = 1'b1;
        out_data  = mk_hdr_flit(r_dest, my_x, my_y, LEN_W'(1) + r_left, MSG_UDP);
      end
      R_META: begin
        out_valid = 1'b1;
        out_data  = {r_meta, {(NOC_W - $bits(udp_meta_t)){1'b0}}};
      end
      R_DATA: begin
        out_valid = rd_valid;
        rd_ready  = out_ready;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      rs     <= R_IDLE;
      r_dest <= '0;
      r_meta <= '0;
      r_left <= '0;
    end else begin
      case (rs)
        R_IDLE: if (pkt_valid) begin
          {r_dest, r_meta} <= pkt_side;
          r_left           <= data_flits(pkt_bytes);
          rs               <= R_HDR;
        end
        R_HDR:  if (out_ready) rs <= R_META;
        R_META: if (out_ready) rs <= (r_left == '0) ? R_IDLE : R_DATA;
        R_DATA: if (rd_valid && out_ready) begin
          r_left <= r_left - 1'b1;
          if (r_left == LEN_W'(1)) rs <= R_IDLE;
        end
        default: rs <= R_IDLE;
      endcase
    end
  end

  wire unused = s_out_last;
endmodule

// eth_rx: Ethernet receive tile processing logic.
//
// Frames arrive from the MAC as a 512-bit stream (valid/ready, byte-enable keep,
// last). Each frame is written into a pkt_buffer and committed at its last flit, when
// its length is known, because the NoC header flit that leads the outgoing message
// must state the number of body flits. The arrival cycle (`now_ts` at the first flit)
// travels with the frame as its timestamp. Frames shorter than an Ethernet header
// are discarded.
//
// The read side parses destination MAC, source MAC and EtherType from the first flit.
// A VLAN tag (EtherType 0x8100) is skipped: the EtherType is then taken from bytes
// 16-17 and the header is 18 bytes instead of 14. The EtherType is looked up in the
// next_hop_table; a miss drops the frame (drop pulses). Otherwise the tile sends an
// ETH message (header flit, eth_meta_t flit, the frame payload realigned by
// strip_stream) to that tile. The paper gives the function (parse and remove the
// header, realign, VLAN support, route by EtherType); the buffering of whole frames
// and the formats are this design's. The MAC is assumed to have checked and removed
// the frame check sequence. Buffer default: 256 flits (16 KiB), enough for a 9000-byte
// jumbo frame; a frame longer than the buffer would stall the MAC stream forever.
module eth_rx
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
  input  logic [TS_W-1:0]                now_ts,
  input  logic                           mac_valid,
  input  flit_t                          mac_data,
  input  logic [FLIT_BYTES-1:0]          mac_keep,
  input  logic                           mac_last,
  output logic                           mac_ready,
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
  // ---------------- write side ----------------
  logic        wr_ready, commit_ready, in_frame;
  logic [23:0] cnt;
  logic [TS_W-1:0] ts_first;
  logic [6:0]  keep_n;

  always_comb begin
    keep_n = '0;
    for (int i = 0; i < FLIT_BYTES; i++) keep_n += 7'(mac_keep[i]);
  end

  assign mac_ready = wr_ready && commit_ready;
  wire   mac_fire  = mac_valid && mac_ready;

  logic        commit_valid, commit_keep;
  logic [23:0] commit_bytes;
  logic [TS_W-1:0] commit_ts;
  assign commit_valid = mac_fire && mac_last;
  assign commit_bytes = cnt + 24'(keep_n);
  assign commit_keep  = (commit_bytes >= 24'd14);
  assign commit_ts    = in_frame ? ts_first : now_ts;

  always_ff @(posedge clk) begin
    if (rst) begin
      cnt      <= '0;
      in_frame <= 1'b0;
      ts_first <= '0;
    end else if (mac_fire) begin
      if (!in_frame) ts_first <= now_ts;
      if (mac_last) begin
        cnt      <= '0;
        in_frame <= 1'b0;
      end else begin
        cnt      <= cnt + 24'(keep_n);
        in_frame <= 1'b1;
      end
    end
  end

  logic        pkt_valid, pkt_pop, rd_valid, rd_ready;
  logic [23:0] pkt_bytes;
  logic [TS_W-1:0] pkt_ts;
  flit_t       rd_data;

  pkt_buffer #(.DEPTH(BUF_FLITS), .SIDE_W(TS_W), .PKTS(8)) u_buf (
    .clk, .rst,
    .wr_valid(mac_valid && commit_ready), .wr_data(mac_data), .wr_ready,
    .commit_valid, .commit_keep, .commit_bytes, .commit_side(commit_ts), .commit_ready,
    .pkt_valid, .pkt_bytes, .pkt_side(pkt_ts), .pkt_pop,
    .rd_valid, .rd_data, .rd_ready);

  // ---------------- read side ----------------
  typedef enum logic [1:0] {S_IDLE, S_OHDR, S_OMETA, S_DATA} state_t;
  state_t      st;
  flit_t       first;
  logic [23:0] fbytes;
  logic [TS_W-1:0] fts;

  logic [47:0] dmac, smac;
  logic [15:0] et0, et;
  logic [5:0]  hl;
  logic        hit, ok;
  noc_dest_t   dest;
  logic [23:0] pay;

  always_comb begin
    dmac = first[NOC_W-1 -: 48];
    smac = first[NOC_W-49 -: 48];
    et0  = first[NOC_W-97 -: 16];
    if (et0 == ETHERTYPE_VLAN) begin
      et = first[NOC_W-129 -: 16];
      hl = 6'd18;
    end else begin
      et = et0;
      hl = 6'd14;
    end
    ok  = (fbytes >= 24'(hl)) && hit;
    pay = ok ? fbytes - 24'(hl) : '0;
  end

  next_hop_table #(.ENTRIES(TBL_ENTRIES), .KEY_W(16), .INIT_VALID(INIT_VALID),
                   .INIT_KEY(INIT_KEY), .INIT_DEST(INIT_DEST)) u_tbl (
    .clk, .rst, .key(et), .hit, .dest,
    .wr_en(tbl_wr_en), .wr_idx(tbl_wr_idx), .wr_valid(tbl_wr_valid),
    .wr_key(tbl_wr_key), .wr_dest(tbl_wr_dest));

  eth_meta_t om;
  always_comb begin
    om.dst_mac   = dmac;
    om.src_mac   = smac;
    om.ethertype = et;
    om.data_len  = 16'(pay);
    om.ts        = fts;
  end

  logic  s_start, s_busy, s_in_ready, s_out_valid, s_out_last;
  flit_t s_out_data;

  strip_stream u_strip (
    .clk, .rst, .start(s_start), .first(first), .strip(hl),
    .in_bytes(fbytes), .out_bytes(pay), .busy(s_busy),
    .in_valid(rd_valid && st == S_DATA), .in_data(rd_data), .in_ready(s_in_ready),
    .out_valid(s_out_valid), .out_data(s_out_data), .out_last(s_out_last),
    .out_ready(out_ready && st == S_DATA));

  always_comb begin
    rd_ready  = 1'b0;
    pkt_pop   = 1'b0;
    out_valid = 1'b0;
    out_data  = s_out_data;
    s_start   = 1'b0;
    drop      = 1'b0;
    case (st)
      S_IDLE: if (pkt_valid && rd_valid) begin
        rd_ready = 1'b1;
        pkt_pop  = 1'b1;
      end
      S_OHDR: begin
        if (!ok) begin
          s_start = 1'b1;
          drop    = 1'b1;
        end else begin
          out_valid = 1'b1;
          out_data  = mk_hdr_flit(dest, my_x, my_y, LEN_W'(1) + data_flits(pay), MSG_ETH);
        end
      end
      S_OMETA: begin
        out_valid = 1'b1;
        out_data  = {om, {(NOC_W - $bits(eth_meta_t)){1'b0}}};
        s_start   = out_ready;
      end
      S_DATA: begin
        rd_ready  = s_in_ready;
        out_valid = s_out_valid;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      st     <= S_IDLE;
      first  <= '0;
      fbytes <= '0;
      fts    <= '0;
    end else begin
      case (st)
        S_IDLE: if (pkt_valid && rd_valid) begin
          first  <= rd_data;
          fbytes <= pkt_bytes;
          fts    <= pkt_ts;
          st     <= S_OHDR;
        end
        S_OHDR:  if (!ok) st <= S_DATA;
                 else if (out_ready) st <= S_OMETA;
        S_OMETA: if (out_ready) st <= S_DATA;
        S_DATA:  if (!s_busy) st <= S_IDLE;
        default: st <= S_IDLE;
      endcase
    end
  end

  wire unused = s_out_last;
endmodule

// ip_rx: IPv4 receive tile processing logic.
//
// Takes ETH messages (header flit, eth_meta_t flit, data flits holding the IP packet)
// and turns each into an IP message (header flit, ip_meta_t flit, data flits holding
// the IP payload) for the tile the protocol number selects.
//
// The first data flit holds the whole IPv4 header (at most 60 bytes). The tile checks
// the version, the header length, the header checksum (the ones' complement sum over
// IHL*4 bytes must be 0xFFFF), that the packet is not a fragment and that its total
// length fits in the frame, and looks the protocol up in its next_hop_table. A packet
// failing any check, or with no next hop, is consumed and dropped (drop pulses).
// Otherwise the tile emits the new header and metadata flits and streams the payload
// through strip_stream, which removes the variable IHL*4-byte header and trims any
// Ethernet padding after total_length.
//
// Timing: streaming; the payload starts leaving three cycles after the first data
// flit arrives and then moves one flit per cycle. Header checksum validation, the
// variable-header shifter and no fragmentation support follow the paper; the checks
// on version/length and the message formats are this design's.
module ip_rx
  import beehive_pkg::*;
#(
  parameter int                        TBL_ENTRIES = 4,
  parameter logic [TBL_ENTRIES-1:0]    INIT_VALID  = '0,
  parameter logic [TBL_ENTRIES*8-1:0]  INIT_KEY    = '0,
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
  input  logic [7:0]                     tbl_wr_key,
  input  noc_dest_t                      tbl_wr_dest,
  output logic                           drop
);
  typedef enum logic [2:0] {S_HDR, S_META, S_FIRST, S_OHDR, S_OMETA, S_DATA} state_t;
  state_t    st;
  eth_meta_t meta;
  flit_t     first;
  eth_meta_t in_meta;
  assign in_meta = eth_meta_t'(in_data[NOC_W-1 -: $bits(eth_meta_t)]);

  // ---- header fields of the first data flit ----
  logic [3:0]  ver, ihl;
  logic [15:0] total_len, frag, hsum;
  logic [7:0]  proto;
  logic [31:0] src_ip, dst_ip;
  logic [5:0]  hbytes;
  logic        ok, hit;
  noc_dest_t   dest;

  always_comb begin
    ver       = first[NOC_W-1 -: 4];
    ihl       = first[NOC_W-5 -: 4];
    total_len = first[NOC_W-17 -: 16];
    frag      = first[NOC_W-49 -: 16];
    proto     = byte_of(first, 9);
    src_ip    = first[NOC_W-97 -: 32];
    dst_ip    = first[NOC_W-129 -: 32];
    hbytes    = {ihl, 2'b00};
    hsum      = csum_fold(flit_sum(mask_bytes(first, 24'(hbytes))));
    ok        = (ver == 4'd4) && (ihl >= 4'd5) && (total_len >= 16'(hbytes)) &&
                (total_len <= meta.data_len) && ((frag & 16'h3FFF) == 16'h0) &&
                (hsum == 16'hFFFF) && hit;
  end

  next_hop_table #(.ENTRIES(TBL_ENTRIES), .KEY_W(8), .INIT_VALID(INIT_VALID),
                   .INIT_KEY(INIT_KEY), .INIT_DEST(INIT_DEST)) u_tbl (
    .clk, .rst, .key(proto), .hit, .dest,
    .wr_en(tbl_wr_en), .wr_idx(tbl_wr_idx), .wr_valid(tbl_wr_valid),
    .wr_key(tbl_wr_key), .wr_dest(tbl_wr_dest));

  logic [23:0] pay_bytes;
  ip_meta_t    om;
  assign pay_bytes = 24'(total_len) - 24'(hbytes);
  always_comb begin
    om.src_ip   = src_ip;
    om.dst_ip   = dst_ip;
    om.protocol = proto;
    om.data_len = 16'(pay_bytes);
    om.ts       = meta.ts;
  end

  // ---- payload realignment ----
  logic  s_start, s_busy, s_in_ready, s_out_valid, s_out_last;
  flit_t s_out_data;
  logic [23:0] s_out_bytes;

  strip_stream u_strip (
    .clk, .rst, .start(s_start), .first(first), .strip(hbytes),
    .in_bytes(24'(meta.data_len)), .out_bytes(s_out_bytes), .busy(s_busy),
    .in_valid(in_valid && st == S_DATA), .in_data(in_data), .in_ready(s_in_ready),
    .out_valid(s_out_valid), .out_data(s_out_data), .out_last(s_out_last),
    .out_ready(out_ready && st == S_DATA));

  always_comb begin
    in_ready    = 1'b0;
    out_valid   = 1'b0;
    out_data    = s_out_data;
    s_start     = 1'b0;
    s_out_bytes = pay_bytes;
    drop        = 1'b0;
    case (st)
      S_HDR, S_META, S_FIRST: in_ready = 1'b1;
      S_OHDR: begin
        if (!ok) begin
          s_start     = 1'b1;
          s_out_bytes = '0;
          drop        = 1'b1;
        end else begin
          out_valid = 1'b1;
          out_data  = mk_hdr_flit(dest, my_x, my_y, LEN_W'(1) + data_flits(pay_bytes), MSG_IP);
        end
      end
      S_OMETA: begin
        out_valid = 1'b1;
        out_data  = {om, {(NOC_W - $bits(ip_meta_t)){1'b0}}};
        s_start   = out_ready;
      end
      S_DATA: begin
        in_ready  = s_in_ready;
        out_valid = s_out_valid;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      st    <= S_HDR;
      meta  <= '0;
      first <= '0;
    end else begin
      case (st)
        S_HDR:   if (in_valid) st <= S_META;
        S_META:  if (in_valid) begin
          meta <= in_meta;
          st   <= (in_meta.data_len == '0) ? S_HDR : S_FIRST;
        end
        S_FIRST: if (in_valid) begin
          first <= in_data;
          st    <= S_OHDR;
        end
        S_OHDR:  if (!ok) st <= S_DATA;
                 else if (out_ready) st <= S_OMETA;
        S_OMETA: if (out_ready) st <= S_DATA;
        S_DATA:  if (!s_busy) st <= S_HDR;
        default: st <= S_HDR;
      endcase
    end
  end

  wire unused = s_out_last;
endmodule

// eth_tx: Ethernet transmit tile processing logic.
//
// Takes ETH messages (header flit, eth_meta_t flit, data flits holding the IP packet),
// puts the 14-byte Ethernet header (destination MAC, source MAC, EtherType, all from
// the metadata) in front of the payload with prepend_stream, and streams the frame to
// the MAC as 512-bit flits with byte-enable keep and last. When the first flit of a
// frame leaves, it reports a latency-log entry {arrival timestamp carried in the
// metadata, current cycle} on log_valid/log_data, the record the paper uses to measure
// the latency through the stack.
//
// Streaming: the first frame flit can leave in the cycle after the metadata flit is
// taken, then one flit per cycle. The function follows the paper (Fig. 4); the frame
// check sequence and padding of short frames to 60 bytes are left to the MAC, which is
// this design's assumption.
module eth_tx
  import beehive_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst,
  input  logic [TS_W-1:0]       now_ts,
  input  logic                  in_valid,
  input  flit_t                 in_data,
  output logic                  in_ready,
  output logic                  mac_valid,
  output flit_t                 mac_data,
  output logic [FLIT_BYTES-1:0] mac_keep,
  output logic                  mac_last,
  input  logic                  mac_ready,
  output logic                  log_valid,
  output logic [127:0]          log_data
);
  typedef enum logic [1:0] {S_HDR, S_META, S_DATA} state_t;
  state_t    st;
  eth_meta_t in_meta, meta;
  logic      first_out;
  logic [23:0] tot;

  assign in_meta = eth_meta_t'(in_data[NOC_W-1 -: $bits(eth_meta_t)]);

  logic  p_start, p_busy, p_in_ready, p_out_valid, p_out_last;
  flit_t p_out_data;

  prepend_stream u_pre (
    .clk, .rst, .start(p_start),
    .hdr({in_meta.dst_mac, in_meta.src_mac, in_meta.ethertype, {(NOC_W-112){1'b0}}}),
    .hlen(6'd14), .in_bytes(24'(in_meta.data_len)), .busy(p_busy),
    .in_valid(in_valid && st == S_DATA), .in_data, .in_ready(p_in_ready),
    .out_valid(p_out_valid), .out_data(p_out_data), .out_last(p_out_last),
    .out_ready(mac_ready && st == S_DATA));

  logic [6:0] last_n;
  assign last_n = (tot[5:0] == 6'd0) ? 7'd64 : {1'b0, tot[5:0]};

  always_comb begin
    in_ready  = 1'b0;
    p_start   = 1'b0;
    mac_valid = 1'b0;
    mac_data  = p_out_data;
    mac_last  = p_out_last;
    mac_keep  = p_out_last ? ~({FLIT_BYTES{1'b1}} >> last_n) : '1;
    case (st)
      S_HDR:  in_ready = 1'b1;
      S_META: begin
        in_ready = 1'b1;
        p_start  = in_valid;
      end
      S_DATA: begin
        in_ready  = p_in_ready;
        mac_valid = p_out_valid;
      end
      default: ;
    endcase
  end

  assign log_valid = mac_valid && mac_ready && first_out;
  assign log_data  = {meta.ts, now_ts};

  always_ff @(posedge clk) begin
    if (rst) begin
      st        <= S_HDR;
      meta      <= '0;
      tot       <= '0;
      first_out <= 1'b0;
    end else begin
      case (st)
        S_HDR:  if (in_valid) st <= S_META;
        S_META: if (in_valid) begin
          meta      <= in_meta;
          tot       <= 24'(in_meta.data_len) + 24'd14;
          first_out <= 1'b1;
          st        <= S_DATA;
        end
        S_DATA: begin
          if (mac_valid && mac_ready) first_out <= 1'b0;
          if (!p_busy) st <= S_HDR;
        end
        default: st <= S_HDR;
      endcase
    end
  end

  // The MAC stream is a valid/ready handshake: data must hold until taken.
  a_mac_hold: assert property (@(posedge clk) disable iff (rst)
    (mac_valid && !mac_ready) |=> (mac_valid && $stable(mac_data)));
endmodule

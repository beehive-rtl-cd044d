// udp_echo_app: the UDP echo application tile used to measure the stack.
//
// For every UDP message it receives (header flit, udp_meta_t flit, payload flits) it
// sends one back through the UDP transmit tile at `next_dest`: same payload and length,
// with source and destination addresses and ports swapped and the arrival timestamp
// kept, so the Ethernet transmit tile can log the latency through the whole stack.
// It also hands one entry per request to its application log
// ({current cycle, payload length, client address}) on log_valid/log_data.
// Streaming: the reply header leaves the cycle after the request metadata is taken,
// then payload flits pass one per cycle. The echo function follows the paper's
// microbenchmarks; the log entry format is this design's.
module udp_echo_app
  import beehive_pkg::*;
(
  input  logic               clk,
  input  logic               rst,
  input  logic [COORD_W-1:0] my_x,
  input  logic [COORD_W-1:0] my_y,
  input  noc_dest_t          next_dest,
  input  logic [TS_W-1:0]    now_ts,
  input  logic               in_valid,
  input  flit_t              in_data,
  output logic               in_ready,
  output logic               out_valid,
  output flit_t              out_data,
  input  logic               out_ready,
  output logic               log_valid,
  output logic [127:0]       log_data
);
  typedef enum logic [2:0] {S_HDR, S_META, S_OHDR, S_OMETA, S_DATA} state_t;
  state_t           st;
  udp_meta_t        meta, in_meta, om;
  logic [LEN_W-1:0] left;

  assign in_meta = udp_meta_t'(in_data[NOC_W-1 -: $bits(udp_meta_t)]);

  always_comb begin
    om.src_ip   = meta.dst_ip;
    om.dst_ip   = meta.src_ip;
    om.src_port = meta.dst_port;
    om.dst_port = meta.src_port;
    om.data_len = meta.data_len;
    om.ts       = meta.ts;
  end

  always_comb begin
    in_ready  = 1'b0;
    out_valid = 1'b0;
    out_data  = in_data;
    case (st)
      S_HDR, S_META: in_ready = 1'b1;
      S_OHDR: begin
        out_valid = 1'b1;
        out_data  = mk_hdr_flit(next_dest, my_x, my_y, LEN_W'(1) + left, MSG_UDP);
      end
      S_OMETA: begin
        out_valid = 1'b1;
        out_data  = {om, {(NOC_W - $bits(udp_meta_t)){1'b0}}};
      end
      S_DATA: begin
        out_valid = in_valid;
        in_ready  = out_ready;
      end
      default: ;
    endcase
  end

  assign log_valid = (st == S_META) && in_valid;
  assign log_data  = {now_ts, 32'(in_meta.data_len), in_meta.src_ip};

  always_ff @(posedge clk) begin
    if (rst) begin
      st   <= S_HDR;
      meta <= '0;
      left <= '0;
    end else begin
      case (st)
        S_HDR:   if (in_valid) st <= S_META;
        S_META:  if (in_valid) begin
          meta <= in_meta;
          left <= data_flits(24'(in_meta.data_len));
          st   <= S_OHDR;
        end
        S_OHDR:  if (out_ready) st <= S_OMETA;
        S_OMETA: if (out_ready) st <= (left == '0) ? S_HDR : S_DATA;
        S_DATA:  if (in_valid && out_ready) begin
          left <= left - 1'b1;
          if (left == LEN_W'(1)) st <= S_HDR;
        end
        default: st <= S_HDR;
      endcase
    end
  end
endmodule

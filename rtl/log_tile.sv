// log_tile: a timestamped log that can be read back over UDP.
//
// Write side: a neighbouring block in the same tile (the echo application, or the
// Ethernet transmit tile for the latency log) presents a 128-bit entry on log_valid /
// log_data; entries go into a LOG_DEPTH-entry circular RAM and `total` counts all
// entries ever written.
//
// Read side: a client sends a UDP request, routed here by the UDP receive tile on the
// log's port, whose payload starts with a 32-bit entry index. Requests wait in a
// REQ_DEPTH-entry buffer; when it is full a new request is consumed and dropped
// (req_drop pulses), and the client is expected to ask again. Each request is answered
// with a UDP message to the UDP transmit tile at `next_dest`, addresses and ports
// swapped, carrying 24 bytes: {index, total, entry[index mod LOG_DEPTH]}. The client
// reads the log one entry at a time.
//
// The per-port log, read one entry per request, with a small request buffer that drops
// when full, follows the paper; the entry width, depths and reply format are this
// design's. Timing: a reply starts two cycles after its request reaches the head of
// the buffer and takes three flits.
module log_tile
  import beehive_pkg::*;
#(
  parameter int LOG_DEPTH = 1024,
  parameter int REQ_DEPTH = 4
) (
  input  logic               clk,
  input  logic               rst,
  input  logic [COORD_W-1:0] my_x,
  input  logic [COORD_W-1:0] my_y,
  input  noc_dest_t          next_dest,
  input  logic               log_valid,
  input  logic [127:0]       log_data,
  input  logic               in_valid,
  input  flit_t              in_data,
  output logic               in_ready,
  output logic               out_valid,
  output flit_t              out_data,
  input  logic               out_ready,
  output logic [31:0]        total,
  output logic               req_drop
);
  localparam int AW = $clog2(LOG_DEPTH);
  typedef struct packed { udp_meta_t m; logic [31:0] idx; } req_t;

  // ---- log RAM ----
  logic [127:0] ram [LOG_DEPTH];
  logic [AW-1:0] wp;
  always_ff @(posedge clk) begin
    if (rst) begin
      wp    <= '0;
      total <= '0;
    end else if (log_valid) begin
      wp    <= wp + 1'b1;
      total <= total + 32'd1;
    end
  end
  always_ff @(posedge clk) if (log_valid) ram[wp] <= log_data;

  // ---- request intake ----
  typedef enum logic [1:0] {S_HDR, S_META, S_DATA} state_t;
  state_t           st;
  udp_meta_t        meta, in_meta;
  logic [LEN_W-1:0] left;
  logic             q_in_valid, q_in_ready, q_valid, q_pop;
  req_t             q_in, q_out;

  assign in_meta = udp_meta_t'(in_data[NOC_W-1 -: $bits(udp_meta_t)]);
  assign in_ready = 1'b1;

  always_comb begin
    q_in_valid = 1'b0;
    q_in.m     = meta;
    q_in.idx   = in_data[NOC_W-1 -: 32];
    if (st == S_META && in_valid && in_meta.data_len == '0) begin
      q_in_valid = 1'b1;                       // empty request reads entry 0
      q_in.m     = in_meta;
      q_in.idx   = '0;
    end else if (st == S_DATA && in_valid && left == data_flits(24'(meta.data_len))) begin
      q_in_valid = 1'b1;                       // first data flit holds the index
    end
  end
  assign req_drop = q_in_valid && !q_in_ready;

  sync_fifo #(.W($bits(req_t)), .DEPTH(REQ_DEPTH)) u_req (
    .clk, .rst, .in_valid(q_in_valid), .in_data(q_in), .in_ready(q_in_ready),
    .out_valid(q_valid), .out_data(q_out), .out_ready(q_pop));

  always_ff @(posedge clk) begin
    if (rst) begin
      st   <= S_HDR;
      meta <= '0;
      left <= '0;
    end else if (in_valid) begin
      case (st)
        S_HDR:  st <= S_META;
        S_META: begin
          meta <= in_meta;
          left <= data_flits(24'(in_meta.data_len));
          st   <= (in_meta.data_len == '0) ? S_HDR : S_DATA;
        end
        S_DATA: begin
          left <= left - 1'b1;
          if (left == LEN_W'(1)) st <= S_HDR;
        end
        default: st <= S_HDR;
      endcase
    end
  end

  // ---- replies ----
  typedef enum logic [1:0] {R_IDLE, R_READ, R_HDR, R_META} rstate_t;
  rstate_t      rs;
  logic [127:0] entry;
  logic         r_data;
  udp_meta_t    om;

  always_comb begin
    om.src_ip   = q_out.m.dst_ip;
    om.dst_ip   = q_out.m.src_ip;
    om.src_port = q_out.m.dst_port;
    om.dst_port = q_out.m.src_port;
    om.data_len = 16'd24;
    om.ts       = q_out.m.ts;
  end

  always_ff @(posedge clk) entry <= ram[q_out.idx[AW-1:0]];

  always_comb begin
    out_valid = 1'b0;
    out_data  = {q_out.idx, total, entry, {(NOC_W-192){1'b0}}};
    q_pop     = 1'b0;
    case (rs)
      R_HDR: begin
        out_valid = 1'b1;
        out_data  = mk_hdr_flit(next_dest, my_x, my_y, LEN_W'(2), MSG_UDP);
      end
      R_META: begin
        out_valid = 1'b1;
        if (!r_data) out_data = {om, {(NOC_W - $bits(udp_meta_t)){1'b0}}};
        q_pop     = r_data && out_ready;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      rs     <= R_IDLE;
      r_data <= 1'b0;
    end else begin
      case (rs)
        R_IDLE: if (q_valid) rs <= R_READ;
        R_READ: rs <= R_HDR;
        R_HDR:  if (out_ready) begin rs <= R_META; r_data <= 1'b0; end
        R_META: if (out_ready) begin
          if (r_data) rs <= R_IDLE;
          r_data <= ~r_data;
        end
        default: rs <= R_IDLE;
      endcase
    end
  end
endmodule

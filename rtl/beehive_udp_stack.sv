// beehive_udp_stack: a complete Beehive UDP network stack with an echo application,
// laid out as the 4x2 tile mesh of the paper's UDP echo experiment (Fig. 9), plus two
// rows holding the paper's Reed-Solomon application: four encoder tiles fed by a
// round-robin scheduler placed in the tile Fig. 9 leaves empty.
//
//            x=0                 x=1      x=2      x=3
//   y=0   ETH RX              IP RX    UDP RX   App + App Log
//   y=1   ETH TX + Lat. Log   IP TX    UDP TX   RR scheduler
//   y=2   (router only)       (router) RS 0+log RS 1+log
//   y=3   (router only)       (router) RS 2+log RS 3+log
//
// Every tile is a noc_router plus processing logic on the router's local port; the two
// shared tiles put a tile_port_mux in front of their two endpoints. Receive path:
// MAC -> ETH RX -> IP RX -> UDP RX -> App (or a log, by UDP port). Transmit path:
// App -> UDP TX -> IP TX -> ETH TX -> MAC. Each tile picks the next tile itself: the
// receive tiles through run-time writable next-hop tables loaded at reset with the
// routes below, the transmit tiles through fixed next destinations. With X-then-Y
// routing this layout never needs a link twice within one chain, so the chains cannot
// deadlock (the paper's resource-ordering argument, Fig. 5/6).
//
// Reed-Solomon: a 4 KiB UDP request to RS_PORT goes from UDP RX to the scheduler,
// which forwards it to the encoders in turn; each encoder replies with 1 KiB of
// parity through UDP TX. Each encoder tile also holds a log, read on RS_LOG_PORT + k,
// with one entry per reply for measuring its bandwidth. An encoder consumes its whole request before it replies, so
// the request never holds a link that the reply needs. The encoders sit in columns 2-3
// so that no request from the scheduler crosses a link of the transmit chain: were an
// encoder in column 0 or 1, a request to it would hold (2,1)->(1,1), which UDP TX needs
// to drain, while that encoder waits for UDP TX to take its previous reply.
//
// Log read-back: a UDP request to LOG_APP_PORT reads the application log (one entry
// per echoed request), one to LOG_LAT_PORT reads the latency log ({cycle the frame
// entered ETH RX, cycle its reply left ETH TX}).
//
// Interfaces: MAC receive and transmit streams (512-bit data, 64-bit byte enable, last,
// valid/ready), the station's MAC addresses, a table write port standing in for the
// control plane (tbl_sel 0 = ETH RX, 1 = IP RX, 2 = UDP RX), drop pulses and the log
// counters. Single clock (250 MHz in the paper), synchronous active-high reset.
// The tile set, placement and the 512-bit mesh follow the paper; port numbers, table
// sizes and the configuration port are this design's.
module beehive_udp_stack
  import beehive_pkg::*;
#(
  parameter logic [15:0] APP_PORT     = 16'd5000,
  parameter logic [15:0] LOG_APP_PORT = 16'd5001,
  parameter logic [15:0] LOG_LAT_PORT = 16'd5002,
  parameter logic [15:0] RS_PORT      = 16'd5003,
  parameter logic [15:0] RS_LOG_PORT  = 16'd5004,   // encoder k's log on RS_LOG_PORT + k
  parameter int          RS_REQ_BYTES = 4096,
  parameter int          BUF_FLITS    = 256,
  parameter int          LOG_DEPTH    = 1024
) (
  input  logic                  clk,
  input  logic                  rst,
  input  logic [47:0]           local_mac,
  input  logic [47:0]           gw_mac,
  // MAC receive stream
  input  logic                  rx_valid,
  input  flit_t                 rx_data,
  input  logic [FLIT_BYTES-1:0] rx_keep,
  input  logic                  rx_last,
  output logic                  rx_ready,
  // MAC transmit stream
  output logic                  tx_valid,
  output flit_t                 tx_data,
  output logic [FLIT_BYTES-1:0] tx_keep,
  output logic                  tx_last,
  input  logic                  tx_ready,
  // next-hop table writes (control plane stand-in)
  input  logic                  tbl_wr_en,
  input  logic [1:0]            tbl_sel,
  input  logic [3:0]            tbl_wr_idx,
  input  logic                  tbl_wr_valid,
  input  logic [15:0]           tbl_wr_key,
  input  noc_dest_t             tbl_wr_dest,
  // status
  output logic [2:0]            drop,        // {udp_rx, ip_rx, eth_rx}
  output logic [1:0]            log_req_drop, // {latency log, app log}
  output logic [31:0]           app_log_total,
  output logic [31:0]           lat_log_total,
  output logic [31:0]           rs_replies,   // parity replies sent by all encoders
  output logic [3:0]            rs_drop       // per encoder: request of the wrong size
);
  localparam int NX = 4, NY = 4;
  localparam int N_RS = 4;

  localparam noc_dest_t D_IP_RX   = '{x: 8'd1, y: 8'd0, fbits: 4'd0};
  localparam noc_dest_t D_UDP_RX  = '{x: 8'd2, y: 8'd0, fbits: 4'd0};
  localparam noc_dest_t D_APP     = '{x: 8'd3, y: 8'd0, fbits: 4'd0};
  localparam noc_dest_t D_APP_LOG = '{x: 8'd3, y: 8'd0, fbits: 4'd1};
  localparam noc_dest_t D_ETH_TX  = '{x: 8'd0, y: 8'd1, fbits: 4'd0};
  localparam noc_dest_t D_LAT_LOG = '{x: 8'd0, y: 8'd1, fbits: 4'd1};
  localparam noc_dest_t D_IP_TX   = '{x: 8'd1, y: 8'd1, fbits: 4'd0};
  localparam noc_dest_t D_UDP_TX  = '{x: 8'd2, y: 8'd1, fbits: 4'd0};
  localparam noc_dest_t D_RR      = '{x: 8'd3, y: 8'd1, fbits: 4'd0};
  localparam noc_dest_t D_RS0     = '{x: 8'd2, y: 8'd2, fbits: 4'd0};
  localparam noc_dest_t D_RS1     = '{x: 8'd3, y: 8'd2, fbits: 4'd0};
  localparam noc_dest_t D_RS2     = '{x: 8'd2, y: 8'd3, fbits: 4'd0};
  localparam noc_dest_t D_RS3     = '{x: 8'd3, y: 8'd3, fbits: 4'd0};
  localparam noc_dest_t D_RS0_LOG = '{x: 8'd2, y: 8'd2, fbits: 4'd1};
  localparam noc_dest_t D_RS1_LOG = '{x: 8'd3, y: 8'd2, fbits: 4'd1};
  localparam noc_dest_t D_RS2_LOG = '{x: 8'd2, y: 8'd3, fbits: 4'd1};
  localparam noc_dest_t D_RS3_LOG = '{x: 8'd3, y: 8'd3, fbits: 4'd1};

  // ---------------- cycle counter for timestamps ----------------
  logic [TS_W-1:0] now_ts;
  always_ff @(posedge clk) begin
    if (rst) now_ts <= '0;
    else     now_ts <= now_ts + 1'b1;
  end

  // ---------------- mesh ----------------
  // Router port p of tile (x,y): r_in_* enter the router, r_out_* leave it.
  logic  r_in_valid  [NX][NY][5];
  flit_t r_in_data   [NX][NY][5];
  logic  r_in_ready  [NX][NY][5];
  logic  r_out_valid [NX][NY][5];
  flit_t r_out_data  [NX][NY][5];
  logic  r_out_ready [NX][NY][5];

  for (genvar x = 0; x < NX; x++) begin : g_x
    for (genvar y = 0; y < NY; y++) begin : g_y
      logic [4:0] iv, ir, ov, orr;
      flit_t      id [5];
      flit_t      od [5];
      for (genvar p = 0; p < 5; p++) begin : g_p
        assign iv[p]                 = r_in_valid[x][y][p];
        assign id[p]                 = r_in_data[x][y][p];
        assign r_in_ready[x][y][p]   = ir[p];
        assign r_out_valid[x][y][p]  = ov[p];
        assign r_out_data[x][y][p]   = od[p];
        assign orr[p]                = r_out_ready[x][y][p];
      end
      noc_router u_router (
        .clk, .rst, .my_x(COORD_W'(x)), .my_y(COORD_W'(y)),
        .in_valid(iv), .in_data(id), .in_ready(ir),
        .out_valid(ov), .out_data(od), .out_ready(orr));

      // north (port 1) <-> south (port 3) of (x, y-1)
      if (y > 0) begin : g_n
        assign r_in_valid[x][y][1]    = r_out_valid[x][y-1][3];
        assign r_in_data[x][y][1]     = r_out_data[x][y-1][3];
        assign r_out_ready[x][y-1][3] = r_in_ready[x][y][1];
      end else begin : g_n_edge
        assign r_in_valid[x][y][1]  = 1'b0;
        assign r_in_data[x][y][1]   = '0;
        assign r_out_ready[x][y][1] = 1'b0;
      end
      if (y == NY - 1) begin : g_s_edge
        assign r_in_valid[x][y][3]  = 1'b0;
        assign r_in_data[x][y][3]   = '0;
        assign r_out_ready[x][y][3] = 1'b0;
      end
      // west (port 4) <-> east (port 2) of (x-1, y)
      if (x > 0) begin : g_w
        assign r_in_valid[x][y][4]    = r_out_valid[x-1][y][2];
        assign r_in_data[x][y][4]     = r_out_data[x-1][y][2];
        assign r_out_ready[x-1][y][2] = r_in_ready[x][y][4];
        assign r_in_valid[x-1][y][2]  = r_out_valid[x][y][4];
        assign r_in_data[x-1][y][2]   = r_out_data[x][y][4];
        assign r_out_ready[x][y][4]   = r_in_ready[x-1][y][2];
      end else begin : g_w_edge
        assign r_in_valid[x][y][4]  = 1'b0;
        assign r_in_data[x][y][4]   = '0;
        assign r_out_ready[x][y][4] = 1'b0;
      end
      if (x == NX - 1) begin : g_e_edge
        assign r_in_valid[x][y][2]  = 1'b0;
        assign r_in_data[x][y][2]   = '0;
        assign r_out_ready[x][y][2] = 1'b0;
      end
    end
  end
  // south links going up: (x,y) port 3 input comes from (x,y+1) north output
  for (genvar x = 0; x < NX; x++) begin : g_sx
    for (genvar y = 0; y < NY - 1; y++) begin : g_sy
      assign r_in_valid[x][y][3]    = r_out_valid[x][y+1][1];
      assign r_in_data[x][y][3]     = r_out_data[x][y+1][1];
      assign r_out_ready[x][y+1][1] = r_in_ready[x][y][3];
    end
  end

  // ---------------- tile (0,0): ETH RX ----------------
  eth_rx #(.BUF_FLITS(BUF_FLITS), .TBL_ENTRIES(4), .INIT_VALID(4'b0001),
           .INIT_KEY({48'd0, ETHERTYPE_IPV4}), .INIT_DEST({60'd0, D_IP_RX})) u_eth_rx (
    .clk, .rst, .my_x(8'd0), .my_y(8'd0), .now_ts,
    .mac_valid(rx_valid), .mac_data(rx_data), .mac_keep(rx_keep), .mac_last(rx_last),
    .mac_ready(rx_ready),
    .out_valid(r_in_valid[0][0][0]), .out_data(r_in_data[0][0][0]),
    .out_ready(r_in_ready[0][0][0]),
    .tbl_wr_en(tbl_wr_en && tbl_sel == 2'd0), .tbl_wr_idx(tbl_wr_idx[1:0]), .tbl_wr_valid,
    .tbl_wr_key, .tbl_wr_dest, .drop(drop[0]));
  assign r_out_ready[0][0][0] = 1'b1;   // nothing is addressed to ETH RX

  // ---------------- tile (1,0): IP RX ----------------
  ip_rx #(.TBL_ENTRIES(4), .INIT_VALID(4'b0001), .INIT_KEY({24'd0, IPPROTO_UDP}),
          .INIT_DEST({60'd0, D_UDP_RX})) u_ip_rx (
    .clk, .rst, .my_x(8'd1), .my_y(8'd0),
    .in_valid(r_out_valid[1][0][0]), .in_data(r_out_data[1][0][0]),
    .in_ready(r_out_ready[1][0][0]),
    .out_valid(r_in_valid[1][0][0]), .out_data(r_in_data[1][0][0]),
    .out_ready(r_in_ready[1][0][0]),
    .tbl_wr_en(tbl_wr_en && tbl_sel == 2'd1), .tbl_wr_idx(tbl_wr_idx[1:0]), .tbl_wr_valid,
    .tbl_wr_key(tbl_wr_key[7:0]), .tbl_wr_dest, .drop(drop[1]));

  // ---------------- tile (2,0): UDP RX ----------------
  udp_rx #(.BUF_FLITS(BUF_FLITS), .TBL_ENTRIES(16), .INIT_VALID(16'h00FF),
           .INIT_KEY({128'd0, RS_LOG_PORT + 16'd3, RS_LOG_PORT + 16'd2, RS_LOG_PORT + 16'd1,
                      RS_LOG_PORT, RS_PORT, LOG_LAT_PORT, LOG_APP_PORT, APP_PORT}),
           .INIT_DEST({{(8 * DEST_W){1'b0}}, D_RS3_LOG, D_RS2_LOG, D_RS1_LOG, D_RS0_LOG,
                       D_RR, D_LAT_LOG, D_APP_LOG, D_APP})) u_udp_rx (
    .clk, .rst, .my_x(8'd2), .my_y(8'd0),
    .in_valid(r_out_valid[2][0][0]), .in_data(r_out_data[2][0][0]),
    .in_ready(r_out_ready[2][0][0]),
    .out_valid(r_in_valid[2][0][0]), .out_data(r_in_data[2][0][0]),
    .out_ready(r_in_ready[2][0][0]),
    .tbl_wr_en(tbl_wr_en && tbl_sel == 2'd2), .tbl_wr_idx, .tbl_wr_valid,
    .tbl_wr_key, .tbl_wr_dest, .drop(drop[2]));

  // ---------------- tile (3,0): App + App Log ----------------
  logic [1:0]   a_in_valid, a_in_ready, a_out_valid, a_out_ready;
  flit_t        a_in_data [2];
  flit_t        a_out_data [2];
  logic         app_log_valid;
  logic [127:0] app_log_data;

  tile_port_mux u_mux_app (
    .clk, .rst,
    .r_out_valid(r_out_valid[3][0][0]), .r_out_data(r_out_data[3][0][0]),
    .r_out_ready(r_out_ready[3][0][0]),
    .r_in_valid(r_in_valid[3][0][0]), .r_in_data(r_in_data[3][0][0]),
    .r_in_ready(r_in_ready[3][0][0]),
    .ep_in_valid(a_in_valid), .ep_in_data(a_in_data), .ep_in_ready(a_in_ready),
    .ep_out_valid(a_out_valid), .ep_out_data(a_out_data), .ep_out_ready(a_out_ready));

  udp_echo_app u_app (
    .clk, .rst, .my_x(8'd3), .my_y(8'd0), .next_dest(D_UDP_TX), .now_ts,
    .in_valid(a_in_valid[0]), .in_data(a_in_data[0]), .in_ready(a_in_ready[0]),
    .out_valid(a_out_valid[0]), .out_data(a_out_data[0]), .out_ready(a_out_ready[0]),
    .log_valid(app_log_valid), .log_data(app_log_data));

  log_tile #(.LOG_DEPTH(LOG_DEPTH)) u_app_log (
    .clk, .rst, .my_x(8'd3), .my_y(8'd0), .next_dest(D_UDP_TX),
    .log_valid(app_log_valid), .log_data(app_log_data),
    .in_valid(a_in_valid[1]), .in_data(a_in_data[1]), .in_ready(a_in_ready[1]),
    .out_valid(a_out_valid[1]), .out_data(a_out_data[1]), .out_ready(a_out_ready[1]),
    .total(app_log_total), .req_drop(log_req_drop[0]));

  // ---------------- tile (0,1): ETH TX + Latency Log ----------------
  logic [1:0]   e_in_valid, e_in_ready, e_out_valid, e_out_ready;
  flit_t        e_in_data [2];
  flit_t        e_out_data [2];
  logic         lat_log_valid;
  logic [127:0] lat_log_data;

  tile_port_mux u_mux_eth (
    .clk, .rst,
    .r_out_valid(r_out_valid[0][1][0]), .r_out_data(r_out_data[0][1][0]),
    .r_out_ready(r_out_ready[0][1][0]),
    .r_in_valid(r_in_valid[0][1][0]), .r_in_data(r_in_data[0][1][0]),
    .r_in_ready(r_in_ready[0][1][0]),
    .ep_in_valid(e_in_valid), .ep_in_data(e_in_data), .ep_in_ready(e_in_ready),
    .ep_out_valid(e_out_valid), .ep_out_data(e_out_data), .ep_out_ready(e_out_ready));

  eth_tx u_eth_tx (
    .clk, .rst, .now_ts,
    .in_valid(e_in_valid[0]), .in_data(e_in_data[0]), .in_ready(e_in_ready[0]),
    .mac_valid(tx_valid), .mac_data(tx_data), .mac_keep(tx_keep), .mac_last(tx_last),
    .mac_ready(tx_ready), .log_valid(lat_log_valid), .log_data(lat_log_data));
  assign e_out_valid[0] = 1'b0;         // ETH TX sends nothing into the NoC
  assign e_out_data[0]  = '0;

  log_tile #(.LOG_DEPTH(LOG_DEPTH)) u_lat_log (
    .clk, .rst, .my_x(8'd0), .my_y(8'd1), .next_dest(D_UDP_TX),
    .log_valid(lat_log_valid), .log_data(lat_log_data),
    .in_valid(e_in_valid[1]), .in_data(e_in_data[1]), .in_ready(e_in_ready[1]),
    .out_valid(e_out_valid[1]), .out_data(e_out_data[1]), .out_ready(e_out_ready[1]),
    .total(lat_log_total), .req_drop(log_req_drop[1]));

  // ---------------- tile (1,1): IP TX ----------------
  ip_tx u_ip_tx (
    .clk, .rst, .my_x(8'd1), .my_y(8'd1), .next_dest(D_ETH_TX),
    .local_mac, .gw_mac,
    .in_valid(r_out_valid[1][1][0]), .in_data(r_out_data[1][1][0]),
    .in_ready(r_out_ready[1][1][0]),
    .out_valid(r_in_valid[1][1][0]), .out_data(r_in_data[1][1][0]),
    .out_ready(r_in_ready[1][1][0]));

  // ---------------- tile (2,1): UDP TX ----------------
  udp_tx #(.BUF_FLITS(BUF_FLITS)) u_udp_tx (
    .clk, .rst, .my_x(8'd2), .my_y(8'd1), .next_dest(D_IP_TX),
    .in_valid(r_out_valid[2][1][0]), .in_data(r_out_data[2][1][0]),
    .in_ready(r_out_ready[2][1][0]),
    .out_valid(r_in_valid[2][1][0]), .out_data(r_in_data[2][1][0]),
    .out_ready(r_in_ready[2][1][0]));

  // ---------------- tile (3,1): round-robin scheduler for the RS encoders ----------------
  rr_dispatch #(.N_TARGETS(N_RS), .TARGETS({D_RS3, D_RS2, D_RS1, D_RS0})) u_rr (
    .clk, .rst,
    .in_valid(r_out_valid[3][1][0]), .in_data(r_out_data[3][1][0]),
    .in_ready(r_out_ready[3][1][0]),
    .out_valid(r_in_valid[3][1][0]), .out_data(r_in_data[3][1][0]),
    .out_ready(r_in_ready[3][1][0]));

  // ---------------- tiles (2..3, 2..3): Reed-Solomon encoder + its log ----------------
  // Each encoder logs {cycle its reply completed, request bytes, replies so far} so that
  // a client can work out the encoder's bandwidth from two entries.
  logic [N_RS-1:0] rs_done;
  for (genvar k = 0; k < N_RS; k++) begin : g_rs
    localparam int RX = 2 + k % 2, RY = 2 + k / 2;
    logic [1:0]   t_in_valid, t_in_ready, t_out_valid, t_out_ready;
    flit_t        t_in_data [2];
    flit_t        t_out_data [2];
    logic [31:0]  n_done, log_total;
    logic         log_drop;

    tile_port_mux u_mux (
      .clk, .rst,
      .r_out_valid(r_out_valid[RX][RY][0]), .r_out_data(r_out_data[RX][RY][0]),
      .r_out_ready(r_out_ready[RX][RY][0]),
      .r_in_valid(r_in_valid[RX][RY][0]), .r_in_data(r_in_data[RX][RY][0]),
      .r_in_ready(r_in_ready[RX][RY][0]),
      .ep_in_valid(t_in_valid), .ep_in_data(t_in_data), .ep_in_ready(t_in_ready),
      .ep_out_valid(t_out_valid), .ep_out_data(t_out_data), .ep_out_ready(t_out_ready));

    rs_encoder #(.REQ_BYTES(RS_REQ_BYTES)) u_rs (
      .clk, .rst, .my_x(COORD_W'(RX)), .my_y(COORD_W'(RY)), .next_dest(D_UDP_TX),
      .in_valid(t_in_valid[0]), .in_data(t_in_data[0]), .in_ready(t_in_ready[0]),
      .out_valid(t_out_valid[0]), .out_data(t_out_data[0]), .out_ready(t_out_ready[0]),
      .drop(rs_drop[k]), .done(rs_done[k]));

    always_ff @(posedge clk) begin
      if (rst)             n_done <= '0;
      else if (rs_done[k]) n_done <= n_done + 32'd1;
    end

    log_tile #(.LOG_DEPTH(LOG_DEPTH)) u_log (
      .clk, .rst, .my_x(COORD_W'(RX)), .my_y(COORD_W'(RY)), .next_dest(D_UDP_TX),
      .log_valid(rs_done[k]), .log_data({now_ts, 32'(RS_REQ_BYTES), n_done + 32'd1}),
      .in_valid(t_in_valid[1]), .in_data(t_in_data[1]), .in_ready(t_in_ready[1]),
      .out_valid(t_out_valid[1]), .out_data(t_out_data[1]), .out_ready(t_out_ready[1]),
      .total(log_total), .req_drop(log_drop));
  end

  // ---------------- tiles (0..1, 2..3): router only ----------------
  for (genvar x = 0; x < 2; x++) begin : g_ex
    for (genvar y = 2; y < NY; y++) begin : g_ey
      assign r_in_valid[x][y][0]  = 1'b0;
      assign r_in_data[x][y][0]   = '0;
      assign r_out_ready[x][y][0] = 1'b1;   // nothing is addressed to these tiles
    end
  end

  always_ff @(posedge clk) begin
    if (rst) rs_replies <= '0;
    else     rs_replies <= rs_replies + 32'($countones(rs_done));
  end
endmodule

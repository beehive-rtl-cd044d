// eth_rx_tb: self-checking test of the Ethernet receive tile.
//
// Frames are built byte by byte and fed as a MAC stream with keep and last, with
// random gaps, while the NoC side stalls at random. Cases: a plain IPv4 frame, a
// VLAN-tagged frame, a frame with an EtherType that has no table entry (dropped, drop
// pulses), a runt shorter than an Ethernet header (discarded), a 9000-byte jumbo
// frame, a table entry written at run time that makes the unknown EtherType routable,
// and a minimum-size frame. Each ETH message is checked against the frame: header
// flit (destination, length, type), metadata (MACs, EtherType, payload length, arrival
// timestamp taken by the testbench) and every payload byte.
module eth_rx_tb;
  import beehive_pkg::*;
  import tb_pkt_pkg::*;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic [63:0] now_ts = 0;
  always_ff @(posedge clk) now_ts <= now_ts + 1;

  logic  mac_valid, mac_last, mac_ready, out_valid, out_ready, drop;
  flit_t mac_data, out_data;
  logic [63:0] mac_keep;
  logic        tbl_wr_en = 0, tbl_wr_valid = 0;
  logic [1:0]  tbl_wr_idx = 0;
  logic [15:0] tbl_wr_key = 0;
  noc_dest_t   tbl_wr_dest = '0;
  int checks = 0, failures = 0, drops = 0;

  localparam noc_dest_t IP_RX  = '{x: 8'd1, y: 8'd0, fbits: 4'd0};
  localparam noc_dest_t OTHER  = '{x: 8'd3, y: 8'd1, fbits: 4'd2};

  eth_rx #(.BUF_FLITS(256), .TBL_ENTRIES(4), .INIT_VALID(4'b0001),
           .INIT_KEY({48'd0, ETHERTYPE_IPV4}), .INIT_DEST({60'd0, IP_RX})) dut (
    .clk, .rst, .my_x(8'd0), .my_y(8'd0), .now_ts,
    .mac_valid, .mac_data, .mac_keep, .mac_last, .mac_ready,
    .out_valid, .out_data, .out_ready,
    .tbl_wr_en, .tbl_wr_idx, .tbl_wr_valid, .tbl_wr_key, .tbl_wr_dest, .drop);

  typedef struct { flit_t d; logic [63:0] k; logic l; bit first; } beat_t;
  beat_t src_q[$];
  flit_t got[$];
  logic [63:0] ts_q[$];
  bit first_pending;
  always_ff @(posedge clk) if (!rst && drop) drops++;

  logic gap;
  always_ff @(posedge clk) gap <= ($urandom % 4) == 0;
  always_ff @(posedge clk) begin
    if (rst) begin
      mac_valid <= 1'b0; mac_data <= '0; mac_keep <= '0; mac_last <= 1'b0;
      first_pending <= 1'b0;
    end else begin
      if (mac_valid && mac_ready && first_pending) ts_q.push_back(now_ts);
      if (!mac_valid || mac_ready) begin
        if (src_q.size() > 0 && !gap) begin
          beat_t b;
          b = src_q.pop_front();
          mac_valid <= 1'b1; mac_data <= b.d; mac_keep <= b.k; mac_last <= b.l;
          first_pending <= b.first;
        end else begin
          mac_valid <= 1'b0;
          first_pending <= 1'b0;
        end
      end
    end
  end
  always_ff @(posedge clk) out_ready <= ($urandom % 3) != 0;
  always_ff @(posedge clk) if (!rst && out_valid && out_ready) got.push_back(out_data);

  task automatic send_frame(bytes_t f);
    int n;
    n = nflits(f.size());
    for (int i = 0; i < n; i++) begin
      beat_t b;
      int v;
      v = f.size() - 64 * i;
      if (v > 64) v = 64;
      b.d = flit_at(f, i);
      b.k = ~(64'hFFFF_FFFF_FFFF_FFFF >> v);
      b.l = (i == n - 1);
      b.first = (i == 0);
      src_q.push_back(b);
    end
  endtask

  task automatic check(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic expect_eth(noc_dest_t d, logic [47:0] dm, logic [47:0] sm, logic [15:0] et,
                            bytes_t pay);
    noc_hdr_t h;
    eth_meta_t m;
    int n;
    n = nflits(pay.size());
    wait (got.size() >= 2 + n);
    h = hdr_of(got.pop_front());
    check(h.dst_x == d.x && h.dst_y == d.y && h.fbits == d.fbits &&
          h.msg_len == LEN_W'(1 + n) && h.msg_type == MSG_ETH, "header flit");
    m = eth_meta_t'(got.pop_front() >> (NOC_W - $bits(eth_meta_t)));
    check(m.dst_mac == dm && m.src_mac == sm && m.ethertype == et &&
          m.data_len == 16'(pay.size()), "eth meta");
    check(ts_q.size() > 0 && m.ts == ts_q[0], "arrival timestamp");
    if (ts_q.size() > 0) void'(ts_q.pop_front());
    for (int i = 0; i < n; i++) check(got.pop_front() == flit_at(pay, i), $sformatf("data flit %0d", i));
  endtask

  localparam logic [47:0] DM = 48'h02_00_00_00_00_01, SM = 48'h02_00_00_00_00_99;

  initial begin
    bytes_t p;
    repeat (3) @(posedge clk);
    rst = 0;
    p = rand_bytes(100);
    send_frame(build_eth(DM, SM, ETHERTYPE_IPV4, p, 0));
    expect_eth(IP_RX, DM, SM, ETHERTYPE_IPV4, p);
    p = rand_bytes(77);
    send_frame(build_eth(DM, SM, ETHERTYPE_IPV4, p, 1));
    expect_eth(IP_RX, DM, SM, ETHERTYPE_IPV4, p);
    send_frame(build_eth(DM, SM, 16'h86DD, rand_bytes(60), 0));   // no entry: dropped
    send_frame(slice(rand_bytes(10), 0, 10));                      // runt: discarded
    wait (drops == 1);
    void'(ts_q.pop_front());                                       // dropped frame
    void'(ts_q.pop_front());                                       // runt
    p = rand_bytes(9000);
    send_frame(build_eth(DM, SM, ETHERTYPE_IPV4, p, 0));
    expect_eth(IP_RX, DM, SM, ETHERTYPE_IPV4, p);
    // run-time table write: route 0x86DD to another tile
    @(posedge clk);
    tbl_wr_en <= 1; tbl_wr_idx <= 2'd1; tbl_wr_valid <= 1; tbl_wr_key <= 16'h86DD;
    tbl_wr_dest <= OTHER;
    @(posedge clk);
    tbl_wr_en <= 0;
    p = rand_bytes(130);
    send_frame(build_eth(DM, SM, 16'h86DD, p, 0));
    expect_eth(OTHER, DM, SM, 16'h86DD, p);
    p = rand_bytes(46);
    send_frame(build_eth(DM, SM, ETHERTYPE_IPV4, p, 0));
    expect_eth(IP_RX, DM, SM, ETHERTYPE_IPV4, p);
    repeat (20) @(posedge clk);
    check(drops == 1, $sformatf("one frame dropped by the table (saw %0d)", drops));
    check(got.size() == 0, "no extra output");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

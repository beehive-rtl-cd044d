// ip_rx_tb: self-checking test of the IPv4 receive tile.
//
// Sends ETH messages holding IPv4 packets built byte by byte (plain header, header
// with options, Ethernet padding after a short packet, bad checksum, unknown protocol,
// fragment) with random stalls on both sides, and checks the IP messages that come
// out, field by field and byte by byte, and that the bad ones are dropped.
module ip_rx_tb;
  import beehive_pkg::*;
  import tb_pkt_pkg::*;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic  in_valid, in_ready, out_valid, out_ready, drop;
  flit_t in_data, out_data;
  int checks = 0, failures = 0, drops = 0;

  localparam noc_dest_t UDP_RX = '{x: 8'd2, y: 8'd0, fbits: 4'd0};

  ip_rx #(.TBL_ENTRIES(2), .INIT_VALID(2'b01), .INIT_KEY({8'd0, IPPROTO_UDP}),
          .INIT_DEST({20'd0, UDP_RX})) dut (
    .clk, .rst, .my_x(8'd1), .my_y(8'd0),
    .in_valid, .in_data, .in_ready, .out_valid, .out_data, .out_ready,
    .tbl_wr_en(1'b0), .tbl_wr_idx(1'b0), .tbl_wr_valid(1'b0), .tbl_wr_key(8'd0),
    .tbl_wr_dest('0), .drop);

  flit_t src_q[$], got[$];
  always_ff @(posedge clk) if (!rst && drop) drops++;

  // source with random gaps
  logic gap;
  always_ff @(posedge clk) gap <= ($urandom % 4) == 0;
  always_ff @(posedge clk) begin
    if (rst) begin
      in_valid <= 1'b0;
      in_data  <= '0;
    end else if (!in_valid || in_ready) begin
      if (src_q.size() > 0 && !gap) begin
        in_valid <= 1'b1;
        in_data  <= src_q.pop_front();
      end else begin
        in_valid <= 1'b0;
      end
    end
  end
  // sink with random back-pressure
  always_ff @(posedge clk) out_ready <= ($urandom % 3) != 0;
  always_ff @(posedge clk) if (!rst && out_valid && out_ready) got.push_back(out_data);

  task automatic send_eth(bytes_t ip, logic [63:0] ts);
    eth_meta_t m;
    m = '{dst_mac: 48'h0, src_mac: 48'h0, ethertype: ETHERTYPE_IPV4,
          data_len: 16'(ip.size()), ts: ts};
    src_q.push_back(mk_hdr_flit('{x: 8'd1, y: 8'd0, fbits: 4'd0}, 8'd0, 8'd0,
                                LEN_W'(1 + nflits(ip.size())), MSG_ETH));
    src_q.push_back({m, {(NOC_W - $bits(eth_meta_t)){1'b0}}});
    for (int i = 0; i < nflits(ip.size()); i++) src_q.push_back(flit_at(ip, i));
  endtask

  task automatic check(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic expect_ip(logic [31:0] sip, logic [31:0] dip, bytes_t pay, logic [63:0] ts);
    noc_hdr_t h;
    ip_meta_t m;
    int n;
    n = nflits(pay.size());
    wait (got.size() >= 2 + n);
    h = hdr_of(got.pop_front());
    check(h.dst_x == 8'd2 && h.dst_y == 8'd0 && h.msg_len == LEN_W'(1 + n) &&
          h.src_x == 8'd1 && h.msg_type == MSG_IP, "header flit");
    m = ip_meta_t'(got.pop_front() >> (NOC_W - $bits(ip_meta_t)));
    check(m.src_ip == sip && m.dst_ip == dip && m.protocol == 8'd17 &&
          m.data_len == 16'(pay.size()) && m.ts == ts, "ip meta");
    for (int i = 0; i < n; i++) check(got.pop_front() == flit_at(pay, i), $sformatf("data flit %0d", i));
  endtask

  initial begin
    bytes_t l4, ip, bad;
    repeat (3) @(posedge clk);
    rst = 0;
    // 1: plain header, 100 payload bytes
    l4 = rand_bytes(100);
    ip = build_ip(32'h0A000001, 32'h0A000002, 8'd17, l4, 0, 16'd1);
    send_eth(ip, 64'd11);
    expect_ip(32'h0A000001, 32'h0A000002, l4, 64'd11);
    // 2: 12 bytes of options (IHL 8), 200 payload bytes
    l4 = rand_bytes(200);
    ip = build_ip(32'h0A000003, 32'h0A000002, 8'd17, l4, 3, 16'd2);
    send_eth(ip, 64'd22);
    expect_ip(32'h0A000003, 32'h0A000002, l4, 64'd22);
    // 3: bad header checksum -> dropped
    ip = build_ip(32'h0A000001, 32'h0A000002, 8'd17, rand_bytes(40), 0, 16'd3);
    ip[10] = ip[10] ^ 8'h01;
    send_eth(ip, 64'd33);
    // 4: unknown protocol (TCP has no next hop here) -> dropped
    send_eth(build_ip(32'h0A000001, 32'h0A000002, 8'd6, rand_bytes(70), 0, 16'd4), 64'd44);
    // 5: fragment (MF set) -> dropped
    bad = build_ip(32'h0A000001, 32'h0A000002, 8'd17, rand_bytes(30), 0, 16'd5);
    bad[6] = 8'h20; bad[10] = 8'h00; bad[11] = 8'h00;
    begin
      logic [15:0] c;
      c = ~ones_sum(slice(bad, 0, 20), 0);
      bad[10] = c[15:8]; bad[11] = c[7:0];
    end
    send_eth(bad, 64'd55);
    // 6: 1-byte payload padded by Ethernet to 46 bytes -> padding trimmed
    l4 = rand_bytes(1);
    ip = build_ip(32'h0A000009, 32'h0A000002, 8'd17, l4, 0, 16'd6);
    while (ip.size() < 46) ip.push_back(8'hEE);
    send_eth(ip, 64'd66);
    expect_ip(32'h0A000009, 32'h0A000002, l4, 64'd66);
    // 7: back-to-back long packet, 1500-byte IP packet
    l4 = rand_bytes(1480);
    ip = build_ip(32'h0A000004, 32'h0A000002, 8'd17, l4, 0, 16'd7);
    send_eth(ip, 64'd77);
    expect_ip(32'h0A000004, 32'h0A000002, l4, 64'd77);
    repeat (20) @(posedge clk);
    check(drops == 3, $sformatf("three packets dropped (saw %0d)", drops));
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

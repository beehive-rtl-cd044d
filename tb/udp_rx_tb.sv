// udp_rx_tb: self-checking test of the UDP receive tile.
//
// Sends IP messages holding UDP datagrams built by the testbench (RFC 768 checksum
// over the pseudo-header) with random gaps while the output stalls at random. Cases:
// datagrams to the two ports in the table (application and log read-back endpoint),
// a datagram sent with checksum 0 (no checksum, accepted), one with a corrupted payload
// byte (checksum fails, dropped), one to a port with no next hop (dropped), an empty
// datagram, payloads that end on and just past a flit boundary, an 8000-byte datagram,
// and a run-time table write that adds a port. Each UDP message is checked: header
// flit toward the table's destination (including the endpoint bits), metadata
// (addresses, ports, payload length, timestamp) and every payload byte.
module udp_rx_tb;
  import beehive_pkg::*;
  import tb_pkt_pkg::*;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic  in_valid, in_ready, out_valid, out_ready, drop;
  flit_t in_data, out_data;
  logic        tbl_wr_en = 0, tbl_wr_valid = 0;
  logic [1:0]  tbl_wr_idx = 0;
  logic [15:0] tbl_wr_key = 0;
  noc_dest_t   tbl_wr_dest = '0;
  int checks = 0, failures = 0, drops = 0;

  localparam noc_dest_t APP = '{x: 8'd3, y: 8'd0, fbits: 4'd0};
  localparam noc_dest_t LOG = '{x: 8'd3, y: 8'd0, fbits: 4'd1};
  localparam noc_dest_t NEW = '{x: 8'd0, y: 8'd1, fbits: 4'd1};

  udp_rx #(.BUF_FLITS(256), .TBL_ENTRIES(4), .INIT_VALID(4'b0011),
           .INIT_KEY({32'd0, 16'd5001, 16'd5000}), .INIT_DEST({40'd0, LOG, APP})) dut (
    .clk, .rst, .my_x(8'd2), .my_y(8'd0), .in_valid, .in_data, .in_ready,
    .out_valid, .out_data, .out_ready,
    .tbl_wr_en, .tbl_wr_idx, .tbl_wr_valid, .tbl_wr_key, .tbl_wr_dest, .drop);

  flit_t src_q[$], got[$];
  always_ff @(posedge clk) if (!rst && drop) drops++;
  logic gap;
  always_ff @(posedge clk) gap <= ($urandom % 4) == 0;
  always_ff @(posedge clk) begin
    if (rst) begin
      in_valid <= 1'b0; in_data <= '0;
    end else if (!in_valid || in_ready) begin
      if (src_q.size() > 0 && !gap) begin
        in_valid <= 1'b1; in_data <= src_q.pop_front();
      end else in_valid <= 1'b0;
    end
  end
  always_ff @(posedge clk) out_ready <= ($urandom % 3) != 0;
  always_ff @(posedge clk) if (!rst && out_valid && out_ready) got.push_back(out_data);

  task automatic check(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  localparam logic [31:0] SIP = 32'hC0A80105, DIP = 32'hC0A80101;

  task automatic send_ip(bytes_t u, logic [63:0] ts);
    ip_meta_t m;
    m = '{src_ip: SIP, dst_ip: DIP, protocol: 8'd17, data_len: 16'(u.size()), ts: ts};
    src_q.push_back(mk_hdr_flit('{x: 8'd2, y: 8'd0, fbits: 4'd0}, 8'd1, 8'd0,
                                LEN_W'(1 + nflits(u.size())), MSG_IP));
    src_q.push_back({m, {(NOC_W - $bits(ip_meta_t)){1'b0}}});
    for (int i = 0; i < nflits(u.size()); i++) src_q.push_back(flit_at(u, i));
  endtask

  task automatic expect_udp(noc_dest_t d, logic [15:0] sp, logic [15:0] dp, bytes_t pay,
                            logic [63:0] ts);
    noc_hdr_t h;
    udp_meta_t m;
    int n;
    n = nflits(pay.size());
    wait (got.size() >= 2 + n);
    h = hdr_of(got.pop_front());
    check(h.dst_x == d.x && h.dst_y == d.y && h.fbits == d.fbits &&
          h.msg_len == LEN_W'(1 + n) && h.msg_type == MSG_UDP, "header flit");
    m = udp_meta_t'(got.pop_front() >> (NOC_W - $bits(udp_meta_t)));
    check(m.src_ip == SIP && m.dst_ip == DIP && m.src_port == sp && m.dst_port == dp &&
          m.data_len == 16'(pay.size()) && m.ts == ts, "udp meta");
    for (int i = 0; i < n; i++) check(got.pop_front() == flit_at(pay, i), $sformatf("payload flit %0d", i));
  endtask

  initial begin
    bytes_t p, u;
    static int lens[5] = '{0, 56, 57, 120, 8000};
    repeat (3) @(posedge clk);
    rst = 0;
    p = rand_bytes(100);
    send_ip(build_udp(SIP, DIP, 16'd1234, 16'd5000, p), 64'd1);
    expect_udp(APP, 16'd1234, 16'd5000, p, 64'd1);
    p = rand_bytes(4);
    send_ip(build_udp(SIP, DIP, 16'd1235, 16'd5001, p), 64'd2);
    expect_udp(LOG, 16'd1235, 16'd5001, p, 64'd2);
    // checksum 0: not computed by the sender, accepted
    p = rand_bytes(33);
    u = build_udp(SIP, DIP, 16'd1, 16'd5000, p);
    u[6] = 8'h00; u[7] = 8'h00;
    send_ip(u, 64'd3);
    expect_udp(APP, 16'd1, 16'd5000, p, 64'd3);
    // corrupted payload: dropped
    u = build_udp(SIP, DIP, 16'd1, 16'd5000, rand_bytes(300));
    u[200] = u[200] ^ 8'h10;
    send_ip(u, 64'd4);
    // unknown port: dropped
    send_ip(build_udp(SIP, DIP, 16'd1, 16'd7777, rand_bytes(20)), 64'd5);
    for (int i = 0; i < 5; i++) begin
      p = rand_bytes(lens[i]);
      send_ip(build_udp(SIP, DIP, 16'(10 + i), 16'd5000, p), 64'(10 + i));
      expect_udp(APP, 16'(10 + i), 16'd5000, p, 64'(10 + i));
    end
    check(drops == 2, $sformatf("two datagrams dropped (saw %0d)", drops));
    @(posedge clk);
    tbl_wr_en <= 1; tbl_wr_idx <= 2'd2; tbl_wr_valid <= 1; tbl_wr_key <= 16'd7777;
    tbl_wr_dest <= NEW;
    @(posedge clk);
    tbl_wr_en <= 0;
    p = rand_bytes(20);
    send_ip(build_udp(SIP, DIP, 16'd1, 16'd7777, p), 64'd30);
    expect_udp(NEW, 16'd1, 16'd7777, p, 64'd30);
    repeat (20) @(posedge clk);
    check(drops == 2, "no further drops");
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

// udp_tx_tb: self-checking test of the UDP transmit tile.
//
// Sends UDP messages (payload lengths 0, 1, 2, 55, 56, 57, 64, 1472 and 8000 bytes)
// with random gaps while the output stalls at random. Each IP message that comes out
// is checked: header flit toward the IP transmit tile, metadata (addresses, protocol
// 17, UDP length, timestamp) and the data bytes, which must equal a UDP datagram built
// by the testbench from RFC 768, checksum over the pseudo-header included (a computed
// 0 sent as 0xFFFF). A back-to-back pair checks that one datagram's buffering does not
// corrupt the next.
module udp_tx_tb;
  import beehive_pkg::*;
  import tb_pkt_pkg::*;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic  in_valid, in_ready, out_valid, out_ready;
  flit_t in_data, out_data;
  int checks = 0, failures = 0;

  localparam noc_dest_t IP_TX = '{x: 8'd1, y: 8'd1, fbits: 4'd0};

  udp_tx #(.BUF_FLITS(256)) dut (.clk, .rst, .my_x(8'd2), .my_y(8'd1), .next_dest(IP_TX),
    .in_valid, .in_data, .in_ready, .out_valid, .out_data, .out_ready);

  flit_t src_q[$], got[$];
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

  task automatic send_udp(udp_meta_t m, bytes_t pay);
    src_q.push_back(mk_hdr_flit('{x: 8'd2, y: 8'd1, fbits: 4'd0}, 8'd3, 8'd0,
                                LEN_W'(1 + nflits(pay.size())), MSG_UDP));
    src_q.push_back({m, {(NOC_W - $bits(udp_meta_t)){1'b0}}});
    for (int i = 0; i < nflits(pay.size()); i++) src_q.push_back(flit_at(pay, i));
  endtask

  task automatic expect_ip(udp_meta_t m, bytes_t pay);
    bytes_t u;
    noc_hdr_t h;
    ip_meta_t im;
    int k;
    u = build_udp(m.src_ip, m.dst_ip, m.src_port, m.dst_port, pay);
    k = nflits(u.size());
    wait (got.size() >= 2 + k);
    h = hdr_of(got.pop_front());
    check(h.dst_x == IP_TX.x && h.dst_y == IP_TX.y && h.msg_len == LEN_W'(1 + k) &&
          h.msg_type == MSG_IP, "header flit");
    im = ip_meta_t'(got.pop_front() >> (NOC_W - $bits(ip_meta_t)));
    check(im.src_ip == m.src_ip && im.dst_ip == m.dst_ip && im.protocol == 8'd17 &&
          im.data_len == 16'(u.size()) && im.ts == m.ts, "ip meta");
    for (int i = 0; i < k; i++)
      check(got.pop_front() == flit_at(u, i), $sformatf("datagram flit %0d (%0d-byte payload)", i, pay.size()));
  endtask

  function automatic udp_meta_t mk(int i, int n);
    udp_meta_t m;
    m.src_ip = 32'hC0A80101; m.dst_ip = 32'hC0A80100 + 32'(i);
    m.src_port = 16'd5000; m.dst_port = 16'(40000 + i);
    m.data_len = 16'(n); m.ts = 64'(100 + i);
    return m;
  endfunction

  initial begin
    static int lens[9] = '{0, 1, 2, 55, 56, 57, 64, 1472, 8000};
    bytes_t p, p2;
    repeat (3) @(posedge clk);
    rst = 0;
    for (int i = 0; i < 9; i++) begin
      p = rand_bytes(lens[i]);
      send_udp(mk(i, lens[i]), p);
      expect_ip(mk(i, lens[i]), p);
    end
    p = rand_bytes(300); p2 = rand_bytes(70);
    send_udp(mk(20, 300), p);
    send_udp(mk(21, 70), p2);
    expect_ip(mk(20, 300), p);
    expect_ip(mk(21, 70), p2);
    repeat (10) @(posedge clk);
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

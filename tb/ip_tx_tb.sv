// ip_tx_tb: self-checking test of the IPv4 transmit tile.
//
// Sends IP messages (segment lengths 0, 1, 8, 44, 45, 100, 1480 and 8972 bytes) with
// random gaps while the output stalls at random. Each ETH message that comes out is
// checked: header flit toward the configured Ethernet transmit tile, metadata (gateway
// MAC as destination, local MAC as source, EtherType 0x0800, length, timestamp) and the
// data bytes, which must equal an IPv4 packet built by the testbench from RFC 791
// (IHL 5, DF, TTL 64, identification counting from 0, header checksum) followed by the
// segment. With no stalls, the output header must follow the input metadata within
// two cycles and a 1480-byte segment must stream at one flit per cycle.
module ip_tx_tb;
  import beehive_pkg::*;
  import tb_pkt_pkg::*;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int cyc = 0;
  always_ff @(posedge clk) cyc <= cyc + 1;

  logic  in_valid, in_ready, out_valid, out_ready;
  flit_t in_data, out_data;
  int checks = 0, failures = 0;
  bit stall_en = 1;

  localparam noc_dest_t ETH_TX = '{x: 8'd0, y: 8'd1, fbits: 4'd0};
  localparam logic [47:0] LMAC = 48'h02_00_00_00_00_01, GMAC = 48'h02_00_00_00_00_FE;

  ip_tx dut (.clk, .rst, .my_x(8'd1), .my_y(8'd1), .next_dest(ETH_TX),
             .local_mac(LMAC), .gw_mac(GMAC),
             .in_valid, .in_data, .in_ready, .out_valid, .out_data, .out_ready);

  flit_t src_q[$], got[$];
  int    got_t[$];
  int    meta_t;
  logic gap;
  always_ff @(posedge clk) gap <= stall_en && (($urandom % 4) == 0);
  always_ff @(posedge clk) begin
    if (rst) begin
      in_valid <= 1'b0; in_data <= '0;
    end else if (!in_valid || in_ready) begin
      if (src_q.size() > 0 && !gap) begin
        in_valid <= 1'b1; in_data <= src_q.pop_front();
      end else in_valid <= 1'b0;
    end
  end
  always_ff @(posedge clk) out_ready <= !stall_en || (($urandom % 3) != 0);
  always_ff @(posedge clk) if (!rst && out_valid && out_ready) begin
    got.push_back(out_data);
    got_t.push_back(cyc);
  end

  task automatic check(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic send_and_check(int n, logic [15:0] id, logic [63:0] ts, bit timed);
    bytes_t l4, ip;
    ip_meta_t m;
    eth_meta_t em;
    noc_hdr_t h;
    int k, t0, t1;
    l4 = rand_bytes(n);
    m = '{src_ip: 32'h0A000002, dst_ip: 32'h0A000001 + 32'(id), protocol: 8'd17,
          data_len: 16'(n), ts: ts};
    src_q.push_back(mk_hdr_flit('{x: 8'd1, y: 8'd1, fbits: 4'd0}, 8'd2, 8'd1,
                                LEN_W'(1 + nflits(n)), MSG_IP));
    src_q.push_back({m, {(NOC_W - $bits(ip_meta_t)){1'b0}}});
    for (int i = 0; i < nflits(n); i++) src_q.push_back(flit_at(l4, i));
    ip = build_ip(m.src_ip, m.dst_ip, 8'd17, l4, 0, id);
    k = nflits(ip.size());
    wait (got.size() >= 2 + k);
    h = hdr_of(got.pop_front());
    t0 = got_t.pop_front();
    check(h.dst_x == ETH_TX.x && h.dst_y == ETH_TX.y && h.msg_len == LEN_W'(1 + k) &&
          h.msg_type == MSG_ETH && h.src_x == 8'd1 && h.src_y == 8'd1, "header flit");
    em = eth_meta_t'(got.pop_front() >> (NOC_W - $bits(eth_meta_t)));
    void'(got_t.pop_front());
    check(em.dst_mac == GMAC && em.src_mac == LMAC && em.ethertype == ETHERTYPE_IPV4 &&
          em.data_len == 16'(ip.size()) && em.ts == ts, "eth meta");
    for (int i = 0; i < k; i++) begin
      check(got.pop_front() == flit_at(ip, i), $sformatf("packet flit %0d of %0d-byte segment", i, n));
      t1 = got_t.pop_front();
    end
    if (timed) check(t1 - t0 == k + 1, $sformatf("%0d flits in %0d cycles", k + 2, t1 - t0 + 1));
  endtask

  initial begin
    static int lens[8] = '{0, 1, 8, 44, 45, 100, 1480, 8972};
    repeat (3) @(posedge clk);
    rst = 0;
    foreach (lens[i]) send_and_check(lens[i], 16'(i), 64'(500 + i), 0);
    stall_en = 0;
    repeat (5) @(posedge clk);
    send_and_check(1480, 16'd8, 64'd9, 1);
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

// beehive_udp_stack_tb: end-to-end test of the 4x4 UDP stack at default parameters.
//
// Acts as the MAC: sends Ethernet frames built byte by byte and collects the frames
// the stack transmits, comparing each with an independently built expected reply.
// Mechanisms exercised and counted: echo of several sizes (1 byte to a 9000-byte jumbo
// frame), VLAN tag, IP options, Ethernet padding, drops at each receive tile (unknown
// EtherType, bad IP checksum, bad UDP checksum, unknown port), run-time next-hop table
// rewrite, transmit back-pressure, reading the application and latency logs over UDP,
// the log request buffer dropping when full, and erasure coding. For the latter,
// 4 KiB requests are spread round-robin over the four encoder tiles, interleaved with
// echoes while the MAC holds off transmission; each reply's parity is compared with a
// byte-level model, a request of the wrong size must be dropped, and each encoder's
// log is read back. It also measures the one-packet echo latency (the paper reports
// 92 cycles for its implementation) and checks it against the latency log's own record.
module beehive_udp_stack_tb;
  import beehive_pkg::*;
  import tb_pkt_pkg::*;

  localparam logic [47:0] MY_MAC = 48'h02_00_00_00_00_01;
  localparam logic [47:0] GW_MAC = 48'h02_00_00_00_00_fe;
  localparam logic [47:0] CL_MAC = 48'h02_00_00_00_00_aa;
  localparam logic [31:0] MY_IP  = 32'hC0A8_0001;
  localparam logic [31:0] CL_IP  = 32'hC0A8_0064;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic rx_valid, rx_ready, rx_last, tx_valid, tx_ready, tx_last;
  flit_t rx_data, tx_data;
  logic [63:0] rx_keep, tx_keep;
  logic tbl_wr_en = 0, tbl_wr_valid = 0;
  logic [1:0] tbl_sel = 0;
  logic [3:0] tbl_wr_idx = 0;
  logic [15:0] tbl_wr_key = 0;
  noc_dest_t tbl_wr_dest = '0;
  logic [2:0] drop;
  logic [1:0] log_req_drop;
  logic [31:0] app_log_total, lat_log_total;
  logic [31:0] rs_replies;
  logic [3:0] rs_drop;

  beehive_udp_stack dut (
    .clk, .rst, .local_mac(MY_MAC), .gw_mac(GW_MAC),
    .rx_valid, .rx_data, .rx_keep, .rx_last, .rx_ready,
    .tx_valid, .tx_data, .tx_keep, .tx_last, .tx_ready,
    .tbl_wr_en, .tbl_sel, .tbl_wr_idx, .tbl_wr_valid, .tbl_wr_key, .tbl_wr_dest,
    .drop, .log_req_drop, .app_log_total, .lat_log_total, .rs_replies, .rs_drop);

  int checks = 0, failures = 0;
  int n_echo = 0, n_vlan = 0, n_opt = 0, n_jumbo = 0, n_tblwr = 0, n_bp = 0,
      n_logrd = 0, n_reqdrop = 0, n_rs = 0, n_rsdrop = 0, n_rslog = 0;
  int n_rs_tile [4] = '{0, 0, 0, 0};
  int n_drop [3] = '{0, 0, 0};
  longint cyc = 0;
  always_ff @(posedge clk) cyc <= cyc + 1;

  task automatic check(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  always_ff @(posedge clk) if (!rst) begin
    for (int i = 0; i < 3; i++) if (drop[i]) n_drop[i]++;
    if (|log_req_drop) n_reqdrop++;
    if (|rs_drop) n_rsdrop++;
    for (int k = 0; k < 4; k++) if (dut.rs_done[k]) n_rs_tile[k]++;
    if (tx_valid && !tx_ready) n_bp++;
  end

  // ---------------- MAC receive side ----------------
  typedef struct { flit_t d; logic [63:0] k; bit l; } beat_t;
  beat_t rxq[$];
  longint rx_first_cyc[$];
  bit rx_sof = 1;
  // registered source: a new beat is loaded when the current one is taken
  always_ff @(posedge clk) begin
    if (rst) begin
      rx_valid <= 1'b0;
      rx_data  <= '0;
      rx_keep  <= '0;
      rx_last  <= 1'b0;
    end else begin
      if (rx_valid && rx_ready) begin
        if (rx_sof) rx_first_cyc.push_back(cyc);
        rx_sof <= rx_last;
      end
      if (!rx_valid || rx_ready) begin
        if (rxq.size() > 0) begin
          beat_t b;
          b = rxq.pop_front();
          rx_valid <= 1'b1;
          rx_data  <= b.d;
          rx_keep  <= b.k;
          rx_last  <= b.l;
        end else begin
          rx_valid <= 1'b0;
        end
      end
    end
  end

  task automatic send_frame(bytes_t f);
    int n;
    n = nflits(f.size());
    for (int i = 0; i < n; i++) begin
      beat_t b;
      int nb;
      nb  = (i == n - 1) ? f.size() - 64 * i : 64;
      b.d = flit_at(f, i);
      b.k = ~(64'hFFFF_FFFF_FFFF_FFFF >> nb);
      b.l = (i == n - 1);
      rxq.push_back(b);
    end
  endtask

  // ---------------- MAC transmit side ----------------
  bit    tx_stall = 0;
  bytes_t cur;
  bytes_t txf[$];
  longint tx_first_cyc[$];
  bit tx_sof = 1;
  always_ff @(posedge clk) tx_ready <= !tx_stall && (($urandom % 4) != 0);
  always_ff @(posedge clk) if (tx_valid && tx_ready) begin
    if (tx_sof) tx_first_cyc.push_back(cyc);
    for (int i = 0; i < 64; i++) if (tx_keep[63 - i]) cur.push_back(tx_data[511 - 8*i -: 8]);
    tx_sof <= tx_last;
    if (tx_last) begin
      txf.push_back(cur);
      cur = {};
    end
  end

  // ---------------- expected replies ----------------
  int ip_id = 0;     // IP TX numbers every packet it sends

  function automatic bytes_t client_frame(logic [15:0] sport, logic [15:0] dport, bytes_t pay,
                                          int opt, bit vlan);
    bytes_t f;
    f = build_eth(MY_MAC, CL_MAC, 16'h0800,
                  build_ip(CL_IP, MY_IP, 8'd17, build_udp(CL_IP, MY_IP, sport, dport, pay),
                           opt, 16'h1234), vlan);
    while (f.size() < 60) f.push_back(8'h00);   // Ethernet minimum frame, no FCS
    return f;
  endfunction

  function automatic bytes_t reply_frame(logic [15:0] sport, logic [15:0] dport, bytes_t pay);
    bytes_t f;
    f = build_eth(GW_MAC, MY_MAC, 16'h0800,
                  build_ip(MY_IP, CL_IP, 8'd17, build_udp(MY_IP, CL_IP, sport, dport, pay),
                           0, 16'(ip_id)), 0);
    ip_id++;
    return f;
  endfunction

  task automatic get_frame(output bytes_t f);
    wait (txf.size() > 0);
    f = txf.pop_front();
  endtask

  task automatic expect_echo(bytes_t pay, logic [15:0] cport, string what);
    bytes_t got, exp;
    exp = reply_frame(16'd5000, cport, pay);
    get_frame(got);
    check(got == exp, $sformatf("%s: echo frame of %0d payload bytes (got %0d bytes)",
                                what, pay.size(), got.size()));
  endtask

  // reads entry idx of a log on port lport, returns {index, total, entry}
  task automatic read_log(logic [15:0] lport, int idx, output bytes_t rsp);
    bytes_t req, got;
    put32(req, 32'(idx));
    send_frame(client_frame(16'd7777, lport, req, 0, 0));
    get_frame(got);
    rsp = slice(got, 42, 24);
    check(got.size() == 66 && slice(got, 0, 42) == slice(reply_frame(lport, 16'd7777, rsp), 0, 42),
          $sformatf("log read reply headers (port %0d)", lport));
    n_logrd++;
  endtask

  function automatic logic [63:0] get64(bytes_t b, int at);
    logic [63:0] v;
    v = '0;
    for (int i = 0; i < 8; i++) v = {v[55:0], b[at + i]};
    return v;
  endfunction

  initial begin
    bytes_t p, f, rsp;
    longint lat, log_lat;
    repeat (4) @(posedge clk);
    rst = 0;
    repeat (2) @(posedge clk);

    // 1. single 1-byte echo in an idle stack: latency
    p = rand_bytes(1);
    send_frame(client_frame(16'd4000, 16'd5000, p, 0, 0));
    expect_echo(p, 16'd4000, "1-byte");
    lat = tx_first_cyc[$] - rx_first_cyc[$];
    n_echo++;
    $display("one-packet echo latency: %0d cycles (MAC first flit in to first flit out)", lat);
    read_log(16'd5002, 0, rsp);
    log_lat = longint'(get64(rsp, 16)) - longint'(get64(rsp, 8));
    check(get64(rsp, 0) == {32'd0, 32'd1}, "latency log holds one entry");
    check(log_lat == lat, $sformatf("latency log %0d = measured %0d", log_lat, lat));

    // 2. echoes of several sizes, back to back
    for (int i = 0; i < 4; i++) begin
      int sz;
      sz = (i == 0) ? 64 : (i == 1) ? 200 : (i == 2) ? 1024 : 1472;
      p = rand_bytes(sz);
      send_frame(client_frame(16'(4001 + i), 16'd5000, p, 0, 0));
      expect_echo(p, 16'(4001 + i), "sizes");
      n_echo++;
    end

    // 3. VLAN tag and IP options
    p = rand_bytes(100);
    send_frame(client_frame(16'd4100, 16'd5000, p, 0, 1));
    expect_echo(p, 16'd4100, "vlan"); n_vlan++; n_echo++;
    p = rand_bytes(77);
    send_frame(client_frame(16'd4101, 16'd5000, p, 4, 0));
    expect_echo(p, 16'd4101, "ip options"); n_opt++; n_echo++;

    // 4. jumbo frame
    p = rand_bytes(8972);
    send_frame(client_frame(16'd4102, 16'd5000, p, 0, 0));
    expect_echo(p, 16'd4102, "jumbo"); n_jumbo++; n_echo++;

    // 5. drops at each receive tile, then a good packet that must still come through
    f = client_frame(16'd4200, 16'd5000, rand_bytes(20), 0, 0);
    f[12] = 8'h08; f[13] = 8'h06;                    // ARP EtherType: no next hop
    send_frame(f);
    f = client_frame(16'd4201, 16'd5000, rand_bytes(20), 0, 0);
    f[14 + 10] = f[14 + 10] ^ 8'h40;                              // bad IP header checksum
    send_frame(f);
    f = client_frame(16'd4202, 16'd5000, rand_bytes(20), 0, 0);
    f[14 + 20 + 8] = f[14 + 20 + 8] ^ 8'h01;                          // payload corrupted: bad UDP checksum
    send_frame(f);
    send_frame(client_frame(16'd4203, 16'd6000, rand_bytes(20), 0, 0));  // no such port
    p = rand_bytes(33);
    send_frame(client_frame(16'd4204, 16'd5000, p, 0, 0));
    expect_echo(p, 16'd4204, "after drops"); n_echo++;
    check(n_drop[0] == 1 && n_drop[1] == 1 && n_drop[2] == 2,
          $sformatf("drops eth/ip/udp = %0d/%0d/%0d", n_drop[0], n_drop[1], n_drop[2]));

    // 6. run-time table rewrite: port 6000 now also goes to the application
    @(posedge clk);
    tbl_wr_en <= 1; tbl_sel <= 2; tbl_wr_idx <= 8; tbl_wr_valid <= 1; tbl_wr_key <= 16'd6000;
    tbl_wr_dest <= '{x: 8'd3, y: 8'd0, fbits: 4'd0};
    @(posedge clk);
    tbl_wr_en <= 0;
    n_tblwr++;
    p = rand_bytes(50);
    send_frame(client_frame(16'd4300, 16'd6000, p, 0, 0));
    begin
      bytes_t got, exp;
      exp = reply_frame(16'd6000, 16'd4300, p);
      get_frame(got);
      check(got == exp, "echo through rewritten table entry");
      n_echo++;
    end

    // 7. application log: one entry per echo so far
    read_log(16'd5001, 1, rsp);
    check(get64(rsp, 0) == {32'd1, 32'(n_echo)}, $sformatf("app log index/total (%0d echoes)", n_echo));
    check(get64(rsp, 16) == {32'd64, CL_IP}, "app log entry 1: length 64, client address");

    // 8. request buffer overflow: stall the MAC, flood the application log with requests
    //    (its replies back up through UDP TX while its tile still takes requests)
    tx_stall = 1;
    for (int i = 0; i < 64; i++) begin
      bytes_t req;
      put32(req, 32'(0));
      send_frame(client_frame(16'd7777, 16'd5001, req, 0, 0));
    end
    repeat (3000) @(posedge clk);
    tx_stall = 0;
    wait (rxq.size() == 0 && !rx_valid);
    repeat (4000) @(posedge clk);
    check(n_reqdrop > 0, "log request buffer dropped requests when full");
    check(txf.size() == 64 - n_reqdrop, $sformatf("answered %0d of 64 requests, %0d dropped",
                                                   txf.size(), n_reqdrop));
    check(n_bp > 0, "transmit back-pressure seen");
    begin
      int k;
      k = txf.size();
      for (int i = 0; i < k; i++) begin
        bytes_t got;
        get_frame(got);
        check(got.size() == 66, "flood reply size");
        ip_id++;
      end
    end

    // 9. erasure coding: 4 KiB requests on port 5003 spread round-robin over the four
    //    encoders, each answered with 1 KiB of parity, interleaved with echoes while the
    //    MAC holds off transmission; then one request of the wrong size
    begin
      bytes_t reqs [8];
      bytes_t echos [8];
      int seen [8];
      tx_stall = 1;                        // replies back up into the stack while requests arrive
      for (int i = 0; i < 8; i++) begin
        reqs[i]  = rand_bytes(4096);
        echos[i] = rand_bytes(1472);
        seen[i]  = 0;
        send_frame(client_frame(16'(5100 + i), 16'd5003, reqs[i], 0, 0));
        send_frame(client_frame(16'(6100 + i), 16'd5000, echos[i], 0, 0));
      end
      repeat (3000) @(posedge clk);
      tx_stall = 0;
      for (int i = 0; i < 16; i++) begin
        bytes_t got, exp;
        int c;
        get_frame(got);
        c = int'({got[36], got[37]});
        if ({got[34], got[35]} == 16'd5000 && c >= 6100 && c < 6108) begin
          exp = reply_frame(16'd5000, 16'(c), echos[c - 6100]);
          check(got == exp, $sformatf("echo %0d among erasure-coding traffic", c - 6100));
          n_echo++;
        end else if ({got[34], got[35]} == 16'd5003 && c >= 5100 && c < 5108) begin
          exp = reply_frame(16'd5003, 16'(c), rs_parity(reqs[c - 5100]));
          check(got == exp, $sformatf("parity reply for request %0d (%0d bytes)", c - 5100, got.size()));
          seen[c - 5100]++;
          n_rs++;
        end else begin
          check(0, $sformatf("unexpected reply to port %0d", c));
          ip_id++;
        end
      end
      for (int i = 0; i < 8; i++) check(seen[i] == 1, $sformatf("request %0d answered once", i));
      send_frame(client_frame(16'd5200, 16'd5003, rand_bytes(1000), 0, 0));
      repeat (300) @(posedge clk);
      check(n_rsdrop == 1 && txf.size() == 0, "short erasure-coding request dropped, no reply");
      check(rs_replies == 8, $sformatf("encoders report %0d replies", rs_replies));
      for (int k = 0; k < 4; k++)
        check(n_rs_tile[k] == 2, $sformatf("encoder %0d answered %0d requests", k, n_rs_tile[k]));
      // each encoder's log: two entries {reply cycle, 4096, reply number}
      for (int k = 0; k < 4; k++) begin
        bytes_t r0, r1;
        read_log(16'(5004 + k), 0, r0);
        read_log(16'(5004 + k), 1, r1);
        check(get64(r0, 0) == {32'd0, 32'd2} && get64(r1, 0) == {32'd1, 32'd2},
              $sformatf("encoder %0d log index/total", k));
        check(get64(r0, 16) == {32'd4096, 32'd1} && get64(r1, 16) == {32'd4096, 32'd2},
              $sformatf("encoder %0d log entries: bytes and reply number", k));
        check(get64(r1, 8) > get64(r0, 8), $sformatf("encoder %0d log cycles increase", k));
        n_rslog++;
      end
    end

    $display("mechanisms: echo=%0d vlan=%0d ipopt=%0d jumbo=%0d drop_eth=%0d drop_ip=%0d drop_udp=%0d tbl_write=%0d tx_backpressure_cycles=%0d log_reads=%0d log_req_drops=%0d rs_replies=%0d rs_drops=%0d rs_log_reads=%0d rr_per_encoder=%0d/%0d/%0d/%0d",
             n_echo, n_vlan, n_opt, n_jumbo, n_drop[0], n_drop[1], n_drop[2], n_tblwr, n_bp,
             n_logrd, n_reqdrop, n_rs, n_rsdrop, n_rslog, n_rs_tile[0], n_rs_tile[1], n_rs_tile[2],
             n_rs_tile[3]);
    check(n_echo > 0 && n_vlan > 0 && n_opt > 0 && n_jumbo > 0 && n_drop[0] > 0 &&
          n_drop[1] > 0 && n_drop[2] > 0 && n_tblwr > 0 && n_bp > 0 && n_logrd > 0 &&
          n_reqdrop > 0 && n_rs > 0 && n_rsdrop > 0 && n_rs_tile[0] > 0 && n_rs_tile[1] > 0 &&
          n_rs_tile[2] > 0 && n_rs_tile[3] > 0 && n_rslog > 0, "every mechanism happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog (rs replies %0d, rs drops %0d, frames waiting %0d)", rs_replies, n_rsdrop, txf.size());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

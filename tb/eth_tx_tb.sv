// eth_tx_tb: self-checking test of the Ethernet transmit tile.
//
// Sends ETH messages (payload lengths 1, 50, 63, 64, 100, 1500 and 9000 bytes) with
// random input gaps while the MAC side stalls at random, and rebuilds each frame from
// the MAC stream using keep and last. Every frame must equal the 14-byte header built
// by the testbench (destination MAC, source MAC, EtherType from the metadata) followed
// by the payload. For each frame one latency-log entry must appear, holding the
// metadata timestamp and the cycle the first frame flit left. With the MAC always
// ready and no input gaps, a 1500-byte payload (24 frame flits) must leave in 24
// consecutive cycles.
module eth_tx_tb;
  import beehive_pkg::*;
  import tb_pkt_pkg::*;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic [63:0] now_ts = 0;
  always_ff @(posedge clk) now_ts <= now_ts + 1;

  logic  in_valid, in_ready, mac_valid, mac_last, mac_ready, log_valid;
  flit_t in_data, mac_data;
  logic [63:0]  mac_keep;
  logic [127:0] log_data;
  int checks = 0, failures = 0;
  bit stall_en = 1;

  eth_tx dut (.clk, .rst, .now_ts, .in_valid, .in_data, .in_ready,
              .mac_valid, .mac_data, .mac_keep, .mac_last, .mac_ready, .log_valid, .log_data);

  flit_t src_q[$];
  bytes_t frames[$];
  bytes_t cur;
  logic [63:0] first_t[$], last_t[$];
  logic [127:0] logs[$];
  bit in_frame = 0;
  logic [63:0] last_ft;

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
  always_ff @(posedge clk) mac_ready <= !stall_en || (($urandom % 3) != 0);
  always_ff @(posedge clk) begin
    if (!rst && log_valid) logs.push_back(log_data);
    if (!rst && mac_valid && mac_ready) begin
      if (!in_frame) first_t.push_back(now_ts);
      for (int i = 0; i < 64; i++) if (mac_keep[63 - i]) cur.push_back(mac_data[511 - 8*i -: 8]);
      in_frame = !mac_last;
      if (mac_last) begin
        frames.push_back(cur);
        cur.delete();
        last_t.push_back(now_ts);
      end
    end
  end

  task automatic check(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  localparam logic [47:0] DM = 48'h02_00_00_00_00_77, SM = 48'h02_00_00_00_00_01;

  task automatic send_and_check(int n, logic [63:0] ts);
    bytes_t pay, exp, f;
    eth_meta_t m;
    logic [127:0] l;
    logic [63:0] ft;
    pay = rand_bytes(n);
    m = '{dst_mac: DM, src_mac: SM, ethertype: ETHERTYPE_IPV4, data_len: 16'(n), ts: ts};
    src_q.push_back(mk_hdr_flit('{x: 8'd0, y: 8'd1, fbits: 4'd0}, 8'd1, 8'd1,
                                LEN_W'(1 + nflits(n)), MSG_ETH));
    src_q.push_back({m, {(NOC_W - $bits(eth_meta_t)){1'b0}}});
    for (int i = 0; i < nflits(n); i++) src_q.push_back(flit_at(pay, i));
    exp = build_eth(DM, SM, ETHERTYPE_IPV4, pay, 0);
    wait (frames.size() > 0);
    f = frames.pop_front();
    check(f == exp, $sformatf("frame of %0d payload bytes (got %0d bytes)", n, f.size()));
    wait (logs.size() > 0);
    l = logs.pop_front();
    ft = first_t.pop_front();
    check(l[127:64] == ts && l[63:0] == ft, "latency log entry");
    last_ft = ft;
  endtask

  initial begin
    static int lens[7] = '{1, 50, 63, 64, 100, 1500, 9000};
    repeat (3) @(posedge clk);
    rst = 0;
    foreach (lens[i]) send_and_check(lens[i], 64'(1000 + i));
    stall_en = 0;
    repeat (5) @(posedge clk);
    send_and_check(1500, 64'd77);
    check(last_t[$] - last_ft == 64'd23,
          $sformatf("24-flit frame in 24 cycles (took %0d)", last_t[$] - last_ft + 1));
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

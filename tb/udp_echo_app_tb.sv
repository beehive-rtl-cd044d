// udp_echo_app_tb: self-checking test of the UDP echo application tile.
//
// Sends UDP requests (payload lengths 0, 1, 64, 65, 1000 and 8000 bytes) with random
// gaps while the output stalls at random. Each reply must go to the UDP transmit tile
// with addresses and ports swapped, the same length and timestamp, and the same
// payload bytes; each request must produce exactly one log entry holding the cycle it
// arrived, the payload length and the client's address. With no stalls a 1000-byte
// payload must pass at one flit per cycle.
module udp_echo_app_tb;
  import beehive_pkg::*;
  import tb_pkt_pkg::*;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic [63:0] now_ts = 0;
  always_ff @(posedge clk) now_ts <= now_ts + 1;

  logic  in_valid, in_ready, out_valid, out_ready, log_valid;
  flit_t in_data, out_data;
  logic [127:0] log_data;
  int checks = 0, failures = 0;
  bit stall_en = 1;

  localparam noc_dest_t UDP_TX = '{x: 8'd2, y: 8'd1, fbits: 4'd0};

  udp_echo_app dut (.clk, .rst, .my_x(8'd3), .my_y(8'd0), .next_dest(UDP_TX), .now_ts,
    .in_valid, .in_data, .in_ready, .out_valid, .out_data, .out_ready, .log_valid, .log_data);

  flit_t src_q[$], got[$];
  logic [63:0] got_t[$], meta_in_t[$];
  logic [127:0] logs[$];
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
  always_ff @(posedge clk) begin
    if (!rst && out_valid && out_ready) begin got.push_back(out_data); got_t.push_back(now_ts); end
    if (!rst && log_valid) begin logs.push_back(log_data); meta_in_t.push_back(now_ts); end
  end

  task automatic check(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run(int i, int n, bit timed);
    bytes_t pay;
    udp_meta_t m, r;
    noc_hdr_t h;
    logic [127:0] l;
    logic [63:0] t0, t1;
    pay = rand_bytes(n);
    m.src_ip = 32'h0A000000 + 32'(i); m.dst_ip = 32'h0A0000FE;
    m.src_port = 16'(30000 + i); m.dst_port = 16'd5000;
    m.data_len = 16'(n); m.ts = 64'(7000 + i);
    src_q.push_back(mk_hdr_flit('{x: 8'd3, y: 8'd0, fbits: 4'd0}, 8'd2, 8'd0,
                                LEN_W'(1 + nflits(n)), MSG_UDP));
    src_q.push_back({m, {(NOC_W - $bits(udp_meta_t)){1'b0}}});
    for (int k = 0; k < nflits(n); k++) src_q.push_back(flit_at(pay, k));
    wait (got.size() >= 2 + nflits(n));
    h = hdr_of(got.pop_front());
    t0 = got_t.pop_front();
    check(h.dst_x == UDP_TX.x && h.dst_y == UDP_TX.y && h.msg_len == LEN_W'(1 + nflits(n)) &&
          h.msg_type == MSG_UDP && h.src_x == 8'd3 && h.src_y == 8'd0, "reply header");
    r = udp_meta_t'(got.pop_front() >> (NOC_W - $bits(udp_meta_t)));
    t1 = got_t.pop_front();
    check(r.src_ip == m.dst_ip && r.dst_ip == m.src_ip && r.src_port == m.dst_port &&
          r.dst_port == m.src_port && r.data_len == m.data_len && r.ts == m.ts, "reply meta");
    for (int k = 0; k < nflits(n); k++) begin
      check(got.pop_front() == flit_at(pay, k), $sformatf("payload flit %0d", k));
      t1 = got_t.pop_front();
    end
    if (timed) check(t1 - t0 == 64'(1 + nflits(n)), $sformatf("reply streamed (%0d cycles)", t1 - t0 + 1));
    check(logs.size() == 1, "one log entry per request");
    l = logs.pop_front();
    check(l == {meta_in_t.pop_front(), 32'(n), m.src_ip}, "log entry");
  endtask

  initial begin
    static int lens[6] = '{0, 1, 64, 65, 1000, 8000};
    repeat (3) @(posedge clk);
    rst = 0;
    for (int i = 0; i < 6; i++) run(i, lens[i], 0);
    stall_en = 0;
    repeat (3) @(posedge clk);
    run(9, 1000, 1);
    repeat (10) @(posedge clk);
    check(got.size() == 0 && logs.size() == 0, "no extra output");
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

// log_tile_tb: self-checking test of the log tile.
//
// Runs with a 16-entry log so the circular buffer wraps. The testbench writes 20
// entries on the sideband, keeping its own copy, then reads entries back with UDP
// requests and checks every reply: header toward the UDP transmit tile, addresses and
// ports swapped, length 24, and a payload of {index, total written, entry at index
// mod 16} matching the copy. An empty request must read entry 0. With the output
// stalled, ten requests arrive: four fit in the request buffer and six must be
// dropped (req_drop); after the stall the four are answered in order.
module log_tile_tb;
  import beehive_pkg::*;
  import tb_pkt_pkg::*;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic  in_valid, in_ready, out_valid, out_ready, log_valid, req_drop;
  flit_t in_data, out_data;
  logic [127:0] log_data;
  logic [31:0]  total;
  int checks = 0, failures = 0, drops = 0;
  bit stall = 0;

  localparam noc_dest_t UDP_TX = '{x: 8'd2, y: 8'd1, fbits: 4'd0};

  log_tile #(.LOG_DEPTH(16), .REQ_DEPTH(4)) dut (.clk, .rst, .my_x(8'd3), .my_y(8'd0),
    .next_dest(UDP_TX), .log_valid, .log_data, .in_valid, .in_data, .in_ready,
    .out_valid, .out_data, .out_ready, .total, .req_drop);

  flit_t src_q[$], got[$];
  logic [127:0] model [16];
  int written = 0;
  always_ff @(posedge clk) if (!rst && req_drop) drops++;
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
  always_ff @(posedge clk) out_ready <= !stall && (($urandom % 3) != 0);
  always_ff @(posedge clk) if (!rst && out_valid && out_ready) got.push_back(out_data);

  task automatic check(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic udp_meta_t req_meta(int i, int n);
    udp_meta_t m;
    m.src_ip = 32'h0A000005; m.dst_ip = 32'h0A000001;
    m.src_port = 16'(20000 + i); m.dst_port = 16'd5001;
    m.data_len = 16'(n); m.ts = 64'(i);
    return m;
  endfunction

  task automatic send_req(int i, logic [31:0] idx, bit empty);
    bytes_t p;
    udp_meta_t m;
    if (!empty) begin put32(p, idx); put32(p, 32'hDEADBEEF); end
    m = req_meta(i, p.size());
    src_q.push_back(mk_hdr_flit('{x: 8'd3, y: 8'd0, fbits: 4'd1}, 8'd2, 8'd0,
                                LEN_W'(1 + nflits(p.size())), MSG_UDP));
    src_q.push_back({m, {(NOC_W - $bits(udp_meta_t)){1'b0}}});
    if (!empty) src_q.push_back(flit_at(p, 0));
  endtask

  task automatic expect_reply(int i, logic [31:0] idx);
    noc_hdr_t h;
    udp_meta_t r, m;
    flit_t d;
    m = req_meta(i, 0);
    wait (got.size() >= 3);
    h = hdr_of(got.pop_front());
    check(h.dst_x == UDP_TX.x && h.dst_y == UDP_TX.y && h.msg_len == LEN_W'(2) &&
          h.msg_type == MSG_UDP, "reply header");
    r = udp_meta_t'(got.pop_front() >> (NOC_W - $bits(udp_meta_t)));
    check(r.src_ip == m.dst_ip && r.dst_ip == m.src_ip && r.src_port == m.dst_port &&
          r.dst_port == m.src_port && r.data_len == 16'd24 && r.ts == m.ts, "reply meta");
    d = got.pop_front();
    check(d[511:320] == {idx, 32'(written), model[idx[3:0]]} && d[319:0] == '0,
          $sformatf("reply payload for index %0d", idx));
  endtask

  initial begin
    log_valid = 0; log_data = '0;
    repeat (3) @(posedge clk);
    rst = 0;
    for (int i = 0; i < 20; i++) begin
      logic [127:0] e;
      e = {$urandom, $urandom, $urandom, $urandom};
      @(negedge clk); log_valid = 1; log_data = e;
      model[i % 16] = e; written++;
      @(negedge clk); log_valid = 0;
    end
    @(posedge clk);
    check(total == 32'd20, "total counts all entries");
    send_req(0, 32'd3, 0);  expect_reply(0, 32'd3);
    send_req(1, 32'd19, 0); expect_reply(1, 32'd19);
    send_req(2, 32'd0, 1);  expect_reply(2, 32'd0);
    // overflow of the request buffer
    stall = 1;
    for (int i = 0; i < 10; i++) send_req(10 + i, 32'(i), 0);
    wait (src_q.size() == 0);
    repeat (10) @(posedge clk);
    check(drops == 6, $sformatf("six requests dropped (saw %0d)", drops));
    stall = 0;
    for (int i = 0; i < 4; i++) expect_reply(10 + i, 32'(i));
    repeat (20) @(posedge clk);
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

// tile_port_mux_tb: self-checking test of the two-endpoint tile port.
//
// Split direction: 60 messages from the router side, random length and endpoint bits,
// must reach endpoint 0 (fbits 0) or endpoint 1 (any other fbits) whole and in order.
// Merge direction: both endpoints send 30 messages each at the same time; on the
// router side every message must arrive with its flits together (no interleaving) and
// each endpoint's messages in order, and both endpoints must get turns. All sinks
// stall at random.
module tile_port_mux_tb;
  import beehive_pkg::*;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic       r_out_valid, r_out_ready, r_in_valid, r_in_ready;
  flit_t      r_out_data, r_in_data;
  logic [1:0] ep_in_valid, ep_in_ready, ep_out_valid, ep_out_ready;
  flit_t      ep_in_data [2];
  flit_t      ep_out_data [2];
  int checks = 0, failures = 0;

  tile_port_mux dut (.clk, .rst, .r_out_valid, .r_out_data, .r_out_ready,
    .r_in_valid, .r_in_data, .r_in_ready, .ep_in_valid, .ep_in_data, .ep_in_ready,
    .ep_out_valid, .ep_out_data, .ep_out_ready);

  task automatic check(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  // flit tags: [31:24] origin (0/1 endpoint, 2 router), [23:8] message, [7:0] flit
  flit_t rq[$], eq[2][$];
  flit_t exp_ep[2][$];
  int    got_ep[2], got_r = 0, exp_r = 0;
  int    r_cur_src = -1, r_rem = 0, last_msg[2], turns[2];

  logic g0, g1, g2;
  always_ff @(posedge clk) begin
    g0 <= ($urandom % 4) == 0; g1 <= ($urandom % 4) == 0; g2 <= ($urandom % 4) == 0;
  end
  always_ff @(posedge clk) begin
    if (rst) begin
      r_out_valid <= 0; r_out_data <= '0; ep_out_valid <= '0;
      ep_out_data[0] <= '0; ep_out_data[1] <= '0;
    end else begin
      if (!r_out_valid || r_out_ready) begin
        if (rq.size() > 0 && !g0) begin r_out_valid <= 1; r_out_data <= rq.pop_front(); end
        else r_out_valid <= 0;
      end
      if (!ep_out_valid[0] || ep_out_ready[0]) begin
        if (eq[0].size() > 0 && !g1) begin ep_out_valid[0] <= 1; ep_out_data[0] <= eq[0].pop_front(); end
        else ep_out_valid[0] <= 0;
      end
      if (!ep_out_valid[1] || ep_out_ready[1]) begin
        if (eq[1].size() > 0 && !g2) begin ep_out_valid[1] <= 1; ep_out_data[1] <= eq[1].pop_front(); end
        else ep_out_valid[1] <= 0;
      end
    end
  end
  always_ff @(posedge clk) begin
    ep_in_ready <= 2'($urandom);
    r_in_ready  <= ($urandom % 3) != 0;
  end

  always_ff @(posedge clk) if (!rst) begin
    for (int e = 0; e < 2; e++) if (ep_in_valid[e] && ep_in_ready[e]) begin
      check(exp_ep[e].size() > 0 && ep_in_data[e] == exp_ep[e][0], $sformatf("endpoint %0d flit", e));
      if (exp_ep[e].size() > 0) void'(exp_ep[e].pop_front());
      got_ep[e]++;
    end
    if (r_in_valid && r_in_ready) begin
      int src, msg;
      src = int'(r_in_data[31:24]);
      msg = int'(r_in_data[23:8]);
      if (r_rem == 0) begin
        noc_hdr_t h;
        h = hdr_of(r_in_data);
        check(msg == last_msg[src] + 1, $sformatf("endpoint %0d message order", src));
        last_msg[src] = msg;
        r_cur_src = src;
        r_rem = int'(h.msg_len);
        turns[src]++;
      end else begin
        check(src == r_cur_src, "messages interleaved at the router port");
        r_rem--;
      end
      got_r++;
    end
  end

  function automatic void make_msg(int origin, int m, ref flit_t q[$], ref flit_t e[$],
                                   input logic [3:0] fb);
    int len;
    flit_t f;
    len = $urandom % 5;
    f = mk_hdr_flit('{x: 8'd3, y: 8'd0, fbits: fb}, 8'd0, 8'd0, LEN_W'(len), 6'd3);
    f[31:0] = {8'(origin), 16'(m), 8'd0};
    q.push_back(f); e.push_back(f);
    for (int i = 1; i <= len; i++) begin
      f = {15{$urandom}};
      f[31:0] = {8'(origin), 16'(m), 8'(i)};
      q.push_back(f); e.push_back(f);
    end
  endfunction

  initial begin
    flit_t dummy[$];
    int total_ep;
    got_ep = '{0, 0}; last_msg = '{-1, -1}; turns = '{0, 0};
    repeat (3) @(posedge clk);
    rst = 0;
    total_ep = 0;
    for (int m = 0; m < 60; m++) begin
      logic [3:0] fb;
      fb = ($urandom % 2) ? 4'(1 + $urandom % 15) : 4'd0;
      make_msg(2, m, rq, exp_ep[fb != 0], fb);
    end
    total_ep = exp_ep[0].size() + exp_ep[1].size();
    for (int m = 0; m < 30; m++) begin
      make_msg(0, m, eq[0], dummy, 4'd0);
      make_msg(1, m, eq[1], dummy, 4'd0);
    end
    exp_r = dummy.size();
    wait (got_ep[0] + got_ep[1] == total_ep && got_r == exp_r);
    repeat (5) @(posedge clk);
    check(exp_ep[0].size() == 0 && exp_ep[1].size() == 0, "split: all delivered");
    check(last_msg[0] == 29 && last_msg[1] == 29, "merge: all delivered");
    check(r_rem == 0, "merge: no partial message");
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

// noc_router_tb: one router at (1,1) with traffic on all five inputs at once.
//
// Each input sends 40 messages to random destinations in a 3x3 neighbourhood with
// random body lengths (0..5 flits); outputs stall at random. Every body flit is tagged
// with its input, message number and position. The testbench checks that each message
// leaves on the port that X-then-Y routing gives (computed here independently), that
// its flits stay together (wormhole, no interleaving), that messages between one
// input and one output keep their order, and that nothing is lost. A lone message on
// an idle router is timed: header out two cycles after it is offered, then one flit
// per cycle.
module noc_router_tb;
  import beehive_pkg::*;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic [4:0] in_valid, in_ready, out_valid, out_ready;
  flit_t      in_data [5];
  flit_t      out_data [5];
  int checks = 0, failures = 0;

  noc_router dut (.clk, .rst, .my_x(8'd1), .my_y(8'd1), .in_valid, .in_data, .in_ready,
                  .out_valid, .out_data, .out_ready);

  task automatic check(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int xy_port(int dx, int dy);
    if (dx > 1) return 2;
    if (dx < 1) return 4;
    if (dy > 1) return 3;
    if (dy < 1) return 1;
    return 0;
  endfunction

  flit_t q [5][$];
  int    exp_cnt = 0, got_cnt = 0;
  bit    stall_en = 1;

  for (genvar p = 0; p < 5; p++) begin : g_src
    logic gap;
    always_ff @(posedge clk) gap <= stall_en && (($urandom % 4) == 0);
    always_ff @(posedge clk) begin
      if (rst) in_valid[p] <= 1'b0;
      else if (!in_valid[p] || in_ready[p]) begin
        if (q[p].size() > 0 && !gap) begin
          in_valid[p] <= 1'b1;
          in_data[p]  <= q[p].pop_front();
        end else in_valid[p] <= 1'b0;
      end
    end
    always_ff @(posedge clk) out_ready[p] <= !stall_en || (($urandom % 3) != 0);
  end

  // sink checker per output
  int  o_rem [5];
  int  o_src [5];
  int  o_id [5];
  int  last_id [5][5];
  always_ff @(posedge clk) if (!rst) begin
    for (int o = 0; o < 5; o++) if (out_valid[o] && out_ready[o]) begin
      if (o_rem[o] == 0) begin
        noc_hdr_t h;
        h = hdr_of(out_data[o]);
        check(xy_port(int'(h.dst_x), int'(h.dst_y)) == o,
              $sformatf("message to (%0d,%0d) left on port %0d", h.dst_x, h.dst_y, o));
        o_src[o] = int'(h.src_x);
        o_id[o]  = int'(h.src_y);
        check(o_id[o] > last_id[o_src[o]][o], "order between one input and one output");
        last_id[o_src[o]][o] = o_id[o];
        o_rem[o] = int'(h.msg_len);
        got_cnt++;
      end else begin
        check(out_data[o][31:0] == {8'(o_src[o]), 8'(o_id[o]), 16'(o_rem[o])},
              $sformatf("body flit of in %0d msg %0d on out %0d", o_src[o], o_id[o], o));
        o_rem[o]--;
      end
    end
  end

  initial begin
    for (int o = 0; o < 5; o++) begin
      o_rem[o] = 0;
      for (int i = 0; i < 5; i++) last_id[i][o] = -1;
    end
    repeat (3) @(posedge clk);
    rst = 0;
    for (int p = 0; p < 5; p++) begin
      for (int m = 0; m < 40; m++) begin
        int len;
        noc_dest_t d;
        len = $urandom % 6;
        d.x = 8'($urandom % 3); d.y = 8'($urandom % 3); d.fbits = 4'd0;
        q[p].push_back(mk_hdr_flit(d, 8'(p), 8'(m), LEN_W'(len), 6'd0));
        for (int k = len; k >= 1; k--) q[p].push_back(flit_t'({8'(p), 8'(m), 16'(k)}));
        exp_cnt++;
      end
    end
    wait (got_cnt == exp_cnt);
    repeat (10) @(posedge clk);
    check(got_cnt == exp_cnt, "all messages delivered");
    for (int o = 0; o < 5; o++) check(o_rem[o] == 0, "no partial message left");
    // latency and rate of a lone 4-flit-body message, west in, east out
    stall_en = 0;
    repeat (5) @(posedge clk);
    begin
      int t, first_t, last_t, n;
      n = got_cnt;
      q[4].push_back(mk_hdr_flit('{x: 8'd2, y: 8'd1, fbits: 4'd0}, 8'd4, 8'd200, LEN_W'(4), 6'd0));
      for (int k = 4; k >= 1; k--) q[4].push_back(flit_t'({8'd4, 8'd200, 16'(k)}));
      t = 0; first_t = -1; last_t = -1;
      while (t < 50) begin
        @(posedge clk); t++;
        if (out_valid[2] && out_ready[2] && first_t < 0) first_t = t;
        if (out_valid[2] && out_ready[2]) last_t = t;
      end
      check(last_t - first_t == 4, $sformatf("5 flits on consecutive cycles (%0d..%0d)", first_t, last_t));
      $display("lone message: header out at cycle %0d after queueing", first_t);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

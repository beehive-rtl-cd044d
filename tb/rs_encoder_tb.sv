// rs_encoder_tb: self-checking test of the Reed-Solomon (8,2) encoder tile.
//
// Sends 4 KiB requests of random data (and one of all-zero shards but one) with random
// gaps while the output stalls at random, and checks each 1 KiB reply: header toward
// the UDP transmit tile, swapped addresses and ports, length 1024, and every parity
// byte against a model that multiplies in GF(2^8) through log/antilog tables built
// here from the polynomial 0x11D, with the parity coefficients of the Backblaze (8,2)
// matrix. It also checks that a 1000-byte request is dropped without a reply, that the
// tile takes one data flit per cycle when not stalled, and that the reply's parity
// lets two lost data shards be rebuilt (solving the 2x2 system per byte).
module rs_encoder_tb;
  import beehive_pkg::*;
  import tb_pkt_pkg::*;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int cyc = 0;
  always_ff @(posedge clk) cyc <= cyc + 1;

  logic  in_valid, in_ready, out_valid, out_ready, drop, done;
  flit_t in_data, out_data;
  int checks = 0, failures = 0, drops = 0, dones = 0;
  bit stall_en = 1;
  int first_in, last_in;

  localparam noc_dest_t UDP_TX = '{x: 8'd2, y: 8'd1, fbits: 4'd0};

  rs_encoder #(.REQ_BYTES(4096)) dut (.clk, .rst, .my_x(8'd1), .my_y(8'd2), .next_dest(UDP_TX),
    .in_valid, .in_data, .in_ready, .out_valid, .out_data, .out_ready, .drop, .done);

  byte unsigned gexp [512];
  byte unsigned glog [256];
  byte unsigned coef [2][8] = '{'{8'h1a, 8'h84, 8'hba, 8'h33, 8'he7, 8'h10, 8'hc6, 8'h27},
                               '{8'h84, 8'h1a, 8'h33, 8'hba, 8'h10, 8'he7, 8'h27, 8'hc6}};

  function automatic byte unsigned gmul(byte unsigned a, byte unsigned b);
    if (a == 0 || b == 0) return 0;
    return gexp[int'(glog[a]) + int'(glog[b])];
  endfunction
  function automatic byte unsigned ginv(byte unsigned a);
    return gexp[255 - int'(glog[a])];
  endfunction

  flit_t src_q[$], got[$];
  always_ff @(posedge clk) if (!rst) begin
    if (drop) drops++;
    if (done) dones++;
  end
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
  always_ff @(posedge clk) if (!rst && out_valid && out_ready) got.push_back(out_data);
  always_ff @(posedge clk) if (!rst && in_valid && in_ready) begin
    if (src_q.size() == 63) first_in = cyc;
    if (src_q.size() == 0) last_in = cyc;
  end

  task automatic check(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic udp_meta_t mk(int i, int n);
    udp_meta_t m;
    m.src_ip = 32'h0A000010 + 32'(i); m.dst_ip = 32'h0A000001;
    m.src_port = 16'(41000 + i); m.dst_port = 16'd5003;
    m.data_len = 16'(n); m.ts = 64'(300 + i);
    return m;
  endfunction

  task automatic send(udp_meta_t m, bytes_t d);
    src_q.push_back(mk_hdr_flit('{x: 8'd1, y: 8'd2, fbits: 4'd0}, 8'd3, 8'd1,
                                LEN_W'(1 + nflits(d.size())), MSG_UDP));
    src_q.push_back({m, {(NOC_W - $bits(udp_meta_t)){1'b0}}});
    for (int i = 0; i < nflits(d.size()); i++) src_q.push_back(flit_at(d, i));
  endtask

  task automatic expect_parity(udp_meta_t m, bytes_t d);
    bytes_t par, exp;
    noc_hdr_t h;
    udp_meta_t r;
    for (int p = 0; p < 2; p++)
      for (int k = 0; k < 512; k++) begin
        byte unsigned s;
        s = 0;
        for (int i = 0; i < 8; i++) s ^= gmul(coef[p][i], d[i*512 + k]);
        exp.push_back(s);
      end
    wait (got.size() >= 18);
    h = hdr_of(got.pop_front());
    check(h.dst_x == UDP_TX.x && h.dst_y == UDP_TX.y && h.msg_len == LEN_W'(17) &&
          h.msg_type == MSG_UDP, "reply header");
    r = udp_meta_t'(got.pop_front() >> (NOC_W - $bits(udp_meta_t)));
    check(r.src_ip == m.dst_ip && r.dst_ip == m.src_ip && r.src_port == m.dst_port &&
          r.dst_port == m.src_port && r.data_len == 16'd1024 && r.ts == m.ts, "reply meta");
    for (int f = 0; f < 16; f++) begin
      flit_t g;
      g = got.pop_front();
      check(g == flit_at(exp, f), $sformatf("parity flit %0d", f));
      for (int b = 0; b < 64; b++) par.push_back(g[511 - 8*b -: 8]);
    end
    // erase data shards 2 and 5 and rebuild them from the other six and both parities
    begin
      bit ok;
      ok = 1;
      for (int k = 0; k < 512; k++) begin
        byte unsigned r0, r1, a, b, c, e, det, x2, x5;
        r0 = par[k]; r1 = par[512 + k];
        for (int i = 0; i < 8; i++) if (i != 2 && i != 5) begin
          r0 ^= gmul(coef[0][i], d[i*512 + k]);
          r1 ^= gmul(coef[1][i], d[i*512 + k]);
        end
        a = coef[0][2]; b = coef[0][5]; c = coef[1][2]; e = coef[1][5];
        det = gmul(a, e) ^ gmul(b, c);
        x2 = gmul(ginv(det), gmul(e, r0) ^ gmul(b, r1));
        x5 = gmul(ginv(det), gmul(a, r1) ^ gmul(c, r0));
        if (x2 != d[2*512 + k] || x5 != d[5*512 + k]) ok = 0;
      end
      check(ok, "two erased data shards rebuilt from the parity");
    end
  endtask

  initial begin
    bytes_t d;
    int x;
    x = 1;
    for (int i = 0; i < 255; i++) begin
      gexp[i] = 8'(x); glog[x] = 8'(i);
      x = x << 1;
      if (x & 'h100) x ^= 'h11D;
    end
    for (int i = 255; i < 512; i++) gexp[i] = gexp[i - 255];
    repeat (3) @(posedge clk);
    rst = 0;
    for (int n = 0; n < 3; n++) begin
      d = rand_bytes(4096);
      send(mk(n, 4096), d);
      expect_parity(mk(n, 4096), d);
    end
    // a single nonzero shard: parity = coefficient times that shard
    d.delete();
    for (int i = 0; i < 4096; i++) d.push_back((i / 512 == 6) ? 8'($urandom) : 8'h00);
    send(mk(7, 4096), d);
    expect_parity(mk(7, 4096), d);
    // wrong size: dropped, no reply
    send(mk(8, 1000), rand_bytes(1000));
    wait (drops == 1);
    // rate: 64 data flits in 64 cycles without stalls
    stall_en = 0;
    repeat (5) @(posedge clk);
    d = rand_bytes(4096);
    send(mk(9, 4096), d);
    expect_parity(mk(9, 4096), d);
    check(last_in - first_in == 63, $sformatf("64 data flits in %0d cycles", last_in - first_in + 1));
    repeat (10) @(posedge clk);
    check(dones == 5, $sformatf("five replies (saw %0d)", dones));
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

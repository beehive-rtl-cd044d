// strip_stream_tb: random strip amounts (0..63), input lengths and output lengths with
// random stalls; every output flit is compared with the byte string cut from the input
// by the testbench. A stall-free 10-flit run must take one flit per cycle.
module strip_stream_tb;
  import beehive_pkg::*;
  import tb_pkt_pkg::*;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic        start, busy, in_valid, in_ready, out_valid, out_last, out_ready;
  flit_t       first, in_data, out_data;
  logic [5:0]  strip;
  logic [23:0] in_bytes, out_bytes;
  int checks = 0, failures = 0;
  bit stalls = 1;

  strip_stream dut (.*);

  flit_t src_q[$], got[$];
  bit    lasts[$];
  logic  gap;
  always_ff @(posedge clk) gap <= stalls && (($urandom % 3) == 0);
  always_ff @(posedge clk) begin
    if (rst) in_valid <= 1'b0;
    else if (!in_valid || in_ready) begin
      if (src_q.size() > 0 && !gap) begin
        in_valid <= 1'b1;
        in_data  <= src_q.pop_front();
      end else in_valid <= 1'b0;
    end
  end
  always_ff @(posedge clk) out_ready <= !stalls || (($urandom % 3) != 0);
  always_ff @(posedge clk) if (!rst && out_valid && out_ready) begin
    got.push_back(out_data);
    lasts.push_back(out_last);
  end

  task automatic check(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run(int s, int nin, int nout);
    bytes_t b, e;
    b = rand_bytes(nin);
    e = slice(b, s, nout);
    got = {}; lasts = {};
    for (int i = 1; i < nflits(nin); i++) src_q.push_back(flit_at(b, i));
    @(posedge clk);
    start <= 1; first <= flit_at(b, 0); strip <= 6'(s);
    in_bytes <= 24'(nin); out_bytes <= 24'(nout);
    @(posedge clk);
    start <= 0;
    @(posedge clk);
    while (busy) @(posedge clk);
    @(posedge clk);
    check(got.size() == nflits(nout) && src_q.size() == 0 && !in_valid,
          $sformatf("flit counts s=%0d in=%0d out=%0d got=%0d", s, nin, nout, got.size()));
    for (int i = 0; i < got.size() && i < nflits(nout); i++) begin
      check(got[i] == flit_at(e, i), $sformatf("flit %0d s=%0d in=%0d out=%0d", i, s, nin, nout));
      check(lasts[i] == (i == nflits(nout) - 1), "out_last");
    end
  endtask

  initial begin
    start = 0; first = '0; strip = '0; in_bytes = '0; out_bytes = '0;
    repeat (3) @(posedge clk);
    rst = 0;
    run(14, 100, 86);
    run(0, 128, 128);
    run(63, 64, 1);
    run(20, 60, 0);           // drop: consume everything, output nothing
    run(8, 65, 57);
    run(18, 1500, 1000);      // trailing surplus discarded
    for (int t = 0; t < 60; t++) begin
      int s, ni, no;
      s  = $urandom % 64;
      ni = s + 1 + ($urandom % 400);
      no = $urandom % (ni - s + 1);
      run(s, ni, no);
    end
    // rate: no stalls, 640 bytes with a 14-byte strip -> 10 output flits
    stalls = 0;
    begin
      longint t0;
      bytes_t b;
      b = rand_bytes(654);
      for (int i = 1; i < nflits(654); i++) src_q.push_back(flit_at(b, i));
      repeat (3) @(posedge clk);
      got = {};
      @(posedge clk);
      start <= 1; first <= flit_at(b, 0); strip <= 6'd14; in_bytes <= 24'd654; out_bytes <= 24'd640;
      @(posedge clk);
      start <= 0;
      t0 = 0;
      while (got.size() < 10 && t0 < 100) begin @(posedge clk); t0++; end
      check(t0 <= 13, $sformatf("10 flits in %0d cycles (one per cycle expected)", t0));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

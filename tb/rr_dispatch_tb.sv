// rr_dispatch_tb: self-checking test of the round-robin dispatch tile.
//
// Sends 40 messages of random length (0..6 body flits) with random gaps while the
// output stalls at random. Message k must come out addressed to target k mod 4, with
// every other header field and every body flit unchanged, and flits must pass in the
// same cycle they are offered (no added latency).
module rr_dispatch_tb;
  import beehive_pkg::*;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic  in_valid, in_ready, out_valid, out_ready;
  flit_t in_data, out_data;
  int checks = 0, failures = 0;

  localparam noc_dest_t T0 = '{x: 8'd1, y: 8'd2, fbits: 4'd0};
  localparam noc_dest_t T1 = '{x: 8'd2, y: 8'd2, fbits: 4'd0};
  localparam noc_dest_t T2 = '{x: 8'd1, y: 8'd3, fbits: 4'd1};
  localparam noc_dest_t T3 = '{x: 8'd2, y: 8'd3, fbits: 4'd2};
  localparam noc_dest_t TG [4] = '{T0, T1, T2, T3};

  rr_dispatch #(.N_TARGETS(4), .TARGETS({T3, T2, T1, T0})) dut (
    .clk, .rst, .in_valid, .in_data, .in_ready, .out_valid, .out_data, .out_ready);

  flit_t src_q[$], exp_q[$];
  int n_out = 0;
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

  task automatic check(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  always_ff @(posedge clk) if (!rst) begin
    if (out_valid != in_valid) begin checks++; failures++; $display("FAIL: valid not passed through"); end
    if (out_valid && out_ready) begin
      check(out_data == exp_q[0], $sformatf("flit %0d", n_out));
      void'(exp_q.pop_front());
      n_out++;
    end
  end

  initial begin
    int total;
    repeat (3) @(posedge clk);
    rst = 0;
    total = 0;
    for (int k = 0; k < 40; k++) begin
      int len;
      noc_dest_t d, t;
      flit_t hf, ef;
      len = $urandom % 7;
      d = '{x: 8'($urandom), y: 8'($urandom), fbits: 4'($urandom)};
      hf = mk_hdr_flit(d, 8'd5, 8'd6, LEN_W'(len), 6'(k));
      hf[447:0] = {14{$urandom}};
      t = TG[k % 4];
      ef = hf;
      ef[511:492] = {t.x, t.y, t.fbits};
      src_q.push_back(hf); exp_q.push_back(ef);
      for (int i = 0; i < len; i++) begin
        flit_t b;
        b = {16{$urandom}};
        src_q.push_back(b); exp_q.push_back(b);
      end
      total += 1 + len;
    end
    wait (n_out == total);
    repeat (5) @(posedge clk);
    check(exp_q.size() == 0, "all flits out");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// next_hop_table_tb: self-checking test of the next-hop table.
//
// Starts from two entries given by the parameters and checks lookups against a model
// kept in the testbench: hits return the entry's destination, misses clear `hit`,
// duplicates resolve to the lowest index, writes at run time add, change and remove
// entries, and reset restores the parameter contents. Random keys and writes follow.
module next_hop_table_tb;
  import beehive_pkg::*;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic [15:0] key, wr_key;
  logic        hit, wr_en, wr_valid;
  logic [1:0]  wr_idx;
  noc_dest_t   dest, wr_dest;
  int checks = 0, failures = 0;

  localparam noc_dest_t D0 = '{x: 8'd1, y: 8'd0, fbits: 4'd0};
  localparam noc_dest_t D1 = '{x: 8'd3, y: 8'd1, fbits: 4'd1};

  next_hop_table #(.ENTRIES(4), .KEY_W(16), .INIT_VALID(4'b0011),
                   .INIT_KEY({16'd0, 16'd0, 16'h86DD, 16'h0800}),
                   .INIT_DEST({40'd0, D1, D0})) dut (
    .clk, .rst, .key, .hit, .dest, .wr_en, .wr_idx, .wr_valid, .wr_key, .wr_dest);

  bit          m_v [4];
  logic [15:0] m_k [4];
  noc_dest_t   m_d [4];

  task automatic check(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic model_reset();
    m_v = '{1, 1, 0, 0}; m_k = '{16'h0800, 16'h86DD, 16'd0, 16'd0}; m_d = '{D0, D1, '0, '0};
  endtask

  task automatic look(logic [15:0] k);
    bit h;
    noc_dest_t d;
    h = 0; d = '0;
    for (int i = 3; i >= 0; i--) if (m_v[i] && m_k[i] == k) begin h = 1; d = m_d[i]; end
    key = k;
    #1;
    check(hit == h && (!h || dest == d), $sformatf("lookup of %h", k));
  endtask

  task automatic write(int i, bit v, logic [15:0] k, noc_dest_t d);
    @(negedge clk);
    wr_en = 1; wr_idx = 2'(i); wr_valid = v; wr_key = k; wr_dest = d;
    @(negedge clk);
    wr_en = 0;
    m_v[i] = v; m_k[i] = k; m_d[i] = d;
  endtask

  initial begin
    wr_en = 0; wr_idx = 0; wr_valid = 0; wr_key = 0; wr_dest = '0; key = 0;
    model_reset();
    repeat (2) @(negedge clk);
    rst = 0;
    look(16'h0800); look(16'h86DD); look(16'h0806); look(16'h0000);
    write(2, 1, 16'h0806, '{x: 8'd2, y: 8'd2, fbits: 4'd3});
    look(16'h0806);
    write(3, 1, 16'h0800, '{x: 8'd7, y: 8'd7, fbits: 4'd0});   // duplicate: index 0 wins
    look(16'h0800);
    write(0, 0, 16'h0800, '0);                                  // remove: index 3 now
    look(16'h0800);
    for (int n = 0; n < 200; n++) begin
      if ($urandom % 3 == 0)
        write($urandom % 4, $urandom % 4 != 0, 16'($urandom % 8),
              '{x: 8'($urandom), y: 8'($urandom), fbits: 4'($urandom)});
      look(16'($urandom % 8));
    end
    @(negedge clk); rst = 1; @(negedge clk); rst = 0;
    model_reset();
    look(16'h0800); look(16'h86DD); look(16'h0806);
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

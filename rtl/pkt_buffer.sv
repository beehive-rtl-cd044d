// pkt_buffer: store-and-forward packet buffer with commit/abort.
//
// A writer pushes the flits of one packet (wr_valid/wr_ready) and then, in the cycle
// of its last flit or any later cycle, commits it (commit_valid with commit_keep = 1)
// or throws it away (commit_keep = 0, the write pointer rolls back). A committed
// packet gets a descriptor: its byte count and SIDE_W bits of side data (metadata the
// writer wants to travel with it). The reader sees the oldest descriptor on
// pkt_valid/pkt_bytes/pkt_side, pops it with pkt_pop, and reads the packet's
// ceil(bytes/64) flits on rd_valid/rd_data/rd_ready; rd_valid only covers committed
// flits. commit_ready is low while the descriptor queue is full.
// Tiles use it where a field cannot be known until the whole packet has been seen: the
// frame length in Ethernet receive, the UDP checksum in UDP receive and transmit.
// Depth and the commit/abort scheme are this design's; the paper reports only that
// these tiles use block RAM (Table V).
module pkt_buffer
  import beehive_pkg::*;
#(
  parameter int DEPTH  = 256,    // flits
  parameter int SIDE_W = 64,
  parameter int PKTS   = 8
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              wr_valid,
  input  flit_t             wr_data,
  output logic              wr_ready,
  input  logic              commit_valid,
  input  logic              commit_keep,
  input  logic [23:0]       commit_bytes,
  input  logic [SIDE_W-1:0] commit_side,
  output logic              commit_ready,
  output logic              pkt_valid,
  output logic [23:0]       pkt_bytes,
  output logic [SIDE_W-1:0] pkt_side,
  input  logic              pkt_pop,
  output logic              rd_valid,
  output flit_t             rd_data,
  input  logic              rd_ready
);
  localparam int AW = $clog2(DEPTH);

  flit_t       mem [DEPTH];
  logic [AW:0] wp_t, wp_c, rp;

  wire do_wr = wr_valid && wr_ready;
  wire do_rd = rd_valid && rd_ready;

  assign wr_ready = ((wp_t - rp) != (AW+1)'(DEPTH));
  assign rd_valid = (rp != wp_c);
  assign rd_data  = mem[rp[AW-1:0]];

  logic desc_in_ready;
  assign commit_ready = desc_in_ready;

  sync_fifo #(.W(24 + SIDE_W), .DEPTH(PKTS)) u_desc (
    .clk, .rst,
    .in_valid(commit_valid && commit_keep), .in_data({commit_bytes, commit_side}),
    .in_ready(desc_in_ready),
    .out_valid(pkt_valid), .out_data({pkt_bytes, pkt_side}), .out_ready(pkt_pop));

  always_ff @(posedge clk) begin
    if (rst) begin
      wp_t <= '0;
      wp_c <= '0;
      rp   <= '0;
    end else begin
      if (commit_valid && commit_ready) begin
        if (commit_keep) begin
          wp_c <= wp_t + (AW+1)'(do_wr);
          wp_t <= wp_t + (AW+1)'(do_wr);
        end else begin
          wp_t <= wp_c;
        end
      end else if (do_wr) begin
        wp_t <= wp_t + 1'b1;
      end
      if (do_rd) rp <= rp + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (do_wr) mem[wp_t[AW-1:0]] <= wr_data;
  end

  a_commit: assert property (@(posedge clk) disable iff (rst) commit_valid |-> commit_ready);
endmodule

// next_hop_table: the per-tile table that decides where a message goes next.
//
// ENTRIES exact-match entries map a KEY_W-bit key (an EtherType, an IP protocol
// number or a UDP port) to a destination tile and endpoint. Lookup is combinational:
// `hit` is high when a valid entry matches, and `dest` is that entry's destination
// (the lowest-numbered match wins). A miss means the tile drops the message, which
// filters traffic the stack does not support. The table is loaded from the INIT_*
// parameters at reset (the compile-time routes) and any entry can be rewritten at run
// time through the write port, as a control plane would. Matching, dropping on a miss,
// compile-time setup and run-time rewrite follow the paper; the paper also mentions
// hashing the 4-tuple to spread flows over replicated tiles, which this table does not
// do.
module next_hop_table
  import beehive_pkg::*;
#(
  parameter int                       ENTRIES    = 4,
  parameter int                       KEY_W      = 16,
  parameter logic [ENTRIES-1:0]       INIT_VALID = '0,
  parameter logic [ENTRIES*KEY_W-1:0] INIT_KEY   = '0,
  parameter logic [ENTRIES*DEST_W-1:0] INIT_DEST = '0
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic [KEY_W-1:0]           key,
  output logic                       hit,
  output noc_dest_t                  dest,
  input  logic                       wr_en,
  input  logic [$clog2(ENTRIES)-1:0] wr_idx,
  input  logic                       wr_valid,
  input  logic [KEY_W-1:0]           wr_key,
  input  noc_dest_t                  wr_dest
);
  logic [ENTRIES-1:0] valid;
  logic [KEY_W-1:0]   keys  [ENTRIES];
  noc_dest_t          dests [ENTRIES];

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int e = 0; e < ENTRIES; e++) begin
        valid[e] <= INIT_VALID[e];
        keys[e]  <= INIT_KEY[e*KEY_W +: KEY_W];
        dests[e] <= noc_dest_t'(INIT_DEST[e*DEST_W +: DEST_W]);
      end
    end else if (wr_en) begin
      valid[wr_idx] <= wr_valid;
      keys[wr_idx]  <= wr_key;
      dests[wr_idx] <= wr_dest;
    end
  end

  always_comb begin
    hit  = 1'b0;
    dest = '0;
    for (int e = ENTRIES - 1; e >= 0; e--) begin
      if (valid[e] && keys[e] == key) begin
        hit  = 1'b1;
        dest = dests[e];
      end
    end
  end
endmodule

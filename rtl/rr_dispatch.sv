// rr_dispatch: round-robin scheduler tile for replicated, stateless tiles.
//
// Every message that arrives is forwarded unchanged except for the destination in its
// header flit, which is replaced by the next of N_TARGETS destinations in turn (the
// next-hop choice advances once per message, after the header flit has been sent). The
// paper uses such a front-end tile to spread Reed-Solomon requests over four encoder
// tiles and, as a load-balancing tile, to spread traffic over two duplicated UDP
// stacks. Pure round robin fits stateless targets; the paper's flow-affine balancing
// for stateful targets is not modelled here.
// Interface: valid/ready flit streams, combinational pass-through (no added latency),
// one flit per cycle.
module rr_dispatch
  import beehive_pkg::*;
#(
  parameter int                          N_TARGETS = 4,
  parameter logic [N_TARGETS*DEST_W-1:0] TARGETS   = '0
) (
  input  logic  clk,
  input  logic  rst,
  input  logic  in_valid,
  input  flit_t in_data,
  output logic  in_ready,
  output logic  out_valid,
  output flit_t out_data,
  input  logic  out_ready
);
  localparam int PW = (N_TARGETS > 1) ? $clog2(N_TARGETS) : 1;

  logic             busy;
  logic [LEN_W-1:0] left;
  logic [PW-1:0]    ptr;
  noc_hdr_t         h;
  noc_dest_t        d;

  assign h = hdr_of(in_data);
  assign d = noc_dest_t'(TARGETS[ptr*DEST_W +: DEST_W]);

  always_comb begin
    noc_hdr_t nh;
    nh        = h;
    nh.dst_x  = d.x;
    nh.dst_y  = d.y;
    nh.fbits  = d.fbits;
    out_valid = in_valid;
    in_ready  = out_ready;
    out_data  = busy ? in_data : {nh, in_data[NOC_W-65:0]};
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      busy <= 1'b0;
      left <= '0;
      ptr  <= '0;
    end else if (in_valid && out_ready) begin
      if (!busy) begin
        ptr <= (ptr == PW'(N_TARGETS - 1)) ? '0 : ptr + 1'b1;
        if (h.msg_len != '0) begin
          busy <= 1'b1;
          left <= h.msg_len;
        end
      end else begin
        left <= left - 1'b1;
        if (left == LEN_W'(1)) busy <= 1'b0;
      end
    end
  end
endmodule

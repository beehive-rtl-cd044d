// noc_router: one router of the 2D-mesh data NoC.
//
// Five full-duplex ports: 0 = local tile, 1 = north (y-1), 2 = east (x+1),
// 3 = south (y+1), 4 = west (x-1). Routing is wormhole and dimension ordered: a
// message first travels along X until dst_x matches, then along Y, then leaves on the
// local port. The route is taken from the routing header in the top 64 bits of the
// first flit; msg_len there says how many body flits follow, and the output stays
// locked to that input until the last of them has passed.
//
// Each input has an INPUT_DEPTH-flit FIFO. An idle output picks among the inputs whose
// head flit is a header routed to it, round-robin, and locks in the cycle after; from
// then on one flit per cycle moves while both sides are ready. The lock costs one
// idle cycle per message on each output hop.
//
// Interface: plain valid/ready per link; a flit moves on a cycle where valid and ready
// are both high. The mesh, wormhole switching and dimension-ordered routing follow the
// paper (it reuses the OpenPiton mesh); the valid/ready handshake in place of
// OpenPiton's credit signalling, the FIFO depth and the arbitration are this design's
// own choices.
module noc_router
  import beehive_pkg::*;
#(
  parameter int W           = NOC_W,
  parameter int INPUT_DEPTH = 2
) (
  input  logic               clk,
  input  logic               rst,
  input  logic [COORD_W-1:0] my_x,
  input  logic [COORD_W-1:0] my_y,
  input  logic [4:0]         in_valid,
  input  logic [W-1:0]       in_data  [5],
  output logic [4:0]         in_ready,
  output logic [4:0]         out_valid,
  output logic [W-1:0]       out_data [5],
  input  logic [4:0]         out_ready
);
  localparam int P_LOCAL = 0, P_N = 1, P_E = 2, P_S = 3, P_W = 4;

  logic [4:0]       q_valid, q_ready;
  logic [W-1:0]     q_data [5];
  logic [4:0]       busy;             // input is inside a message (head is a body flit)
  logic [LEN_W-1:0] rem [5];          // body flits still to come for that message
  logic [2:0]       route [5];        // output requested by the head header flit
  logic [LEN_W-1:0] hlen [5];         // msg_len of the head flit read as a header
  logic [4:0]       lock;             // output owned by an input
  logic [2:0]       own [5];          // owner of each output
  logic [4:0]       held;             // input owned by some output
  logic [2:0]       rr [5];           // round-robin pointer per output

  for (genvar i = 0; i < 5; i++) begin : g_in
    sync_fifo #(.W(W), .DEPTH(INPUT_DEPTH)) u_q (
      .clk, .rst,
      .in_valid(in_valid[i]), .in_data(in_data[i]), .in_ready(in_ready[i]),
      .out_valid(q_valid[i]), .out_data(q_data[i]), .out_ready(q_ready[i]));

    noc_hdr_t h;
    assign h       = noc_hdr_t'(q_data[i][W-1 -: 64]);
    assign hlen[i] = h.msg_len;
    always_comb begin
      if (h.dst_x > my_x)      route[i] = 3'(P_E);
      else if (h.dst_x < my_x) route[i] = 3'(P_W);
      else if (h.dst_y > my_y) route[i] = 3'(P_S);
      else if (h.dst_y < my_y) route[i] = 3'(P_N);
      else                     route[i] = 3'(P_LOCAL);
    end
  end

  always_comb begin
    held = '0;
    for (int o = 0; o < 5; o++)
      if (lock[o]) held[own[o]] = 1'b1;
  end

  // Output side: drive from the owning input's FIFO head.
  always_comb begin
    q_ready = '0;
    for (int o = 0; o < 5; o++) begin
      out_valid[o] = lock[o] && q_valid[own[o]];
      out_data[o]  = q_data[own[o]];
      if (lock[o] && out_ready[o]) q_ready[own[o]] = 1'b1;
    end
  end

  // Arbitration: pick requesters for idle outputs.
  logic [4:0] grant_v;
  logic [2:0] grant_i [5];
  always_comb begin
    logic [4:0] taken;
    logic [2:0] i;
    taken = held;
    i     = '0;
    for (int o = 0; o < 5; o++) begin
      grant_v[o] = 1'b0;
      grant_i[o] = '0;
      if (!lock[o]) begin
        for (int k = 0; k < 5; k++) begin
          i = 3'((int'(rr[o]) + k) % 5);
          if (!grant_v[o] && q_valid[i] && !busy[i] && !taken[i] && route[i] == 3'(o)) begin
            grant_v[o] = 1'b1;
            grant_i[o] = i;
          end
        end
        if (grant_v[o]) taken[grant_i[o]] = 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      lock <= '0;
      busy <= '0;
      for (int o = 0; o < 5; o++) begin
        own[o] <= '0;
        rr[o]  <= '0;
        rem[o] <= '0;
      end
    end else begin
      for (int o = 0; o < 5; o++) begin
        if (!lock[o] && grant_v[o]) begin
          lock[o] <= 1'b1;
          own[o]  <= grant_i[o];
          rr[o]   <= (grant_i[o] == 3'd4) ? 3'd0 : grant_i[o] + 3'd1;
        end else if (lock[o] && out_valid[o] && out_ready[o]) begin
          if (!busy[own[o]]) begin
            // header flit
            if (hlen[own[o]] == '0) begin
              lock[o] <= 1'b0;
            end else begin
              busy[own[o]] <= 1'b1;
              rem[own[o]]  <= hlen[own[o]];
            end
          end else begin
            rem[own[o]] <= rem[own[o]] - 1'b1;
            if (rem[own[o]] == LEN_W'(1)) begin
              busy[own[o]] <= 1'b0;
              lock[o]      <= 1'b0;
            end
          end
        end
      end
    end
  end

  // A locked output must not change owner while a flit is offered but not taken.
  for (genvar o = 0; o < 5; o++) begin : g_chk
    a_hold: assert property (@(posedge clk) disable iff (rst)
      (out_valid[o] && !out_ready[o]) |=> (out_valid[o] && $stable(out_data[o])));
  end
endmodule

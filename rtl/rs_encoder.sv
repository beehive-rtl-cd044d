// rs_encoder: Reed-Solomon (8,2) erasure-coding application tile on UDP.
//
// A client sends a REQ_BYTES (4 KiB) block in one UDP datagram. The tile treats it as
// eight data shards of REQ_BYTES/8 bytes each (shard i = bytes [i*S, (i+1)*S)) and
// replies to the client with the two parity shards, 2*S bytes (1 KiB), parity shard 0
// first. Parity byte k of shard p is the GF(2^8) sum over i of C[p][i] * shard_i[k].
// The field uses the generator polynomial x^8+x^4+x^3+x^2+1 (0x11D). The coefficients
// are the parity rows of the systematic matrix V * inv(V_top), where V[r][c] = r^c is
// the 10x8 Vandermonde matrix and V_top its upper 8x8 square. That is the
// construction of the Backblaze Reed-Solomon library, which the paper's CPU baseline
// runs, so the tile's output equals that library's parity.
//
// How it works: data flits are taken one per cycle. Flit f belongs to shard f / FPS at
// position f % FPS (FPS = S/64 flits per shard). It is multiplied byte-wise by both
// coefficients of its shard and XORed into two FPS-flit accumulators (the first shard
// loads them). After the last flit the tile sends a UDP message toward `next_dest` (the
// UDP transmit tile): header, metadata with addresses and ports swapped and the
// request's timestamp, then the 2*FPS parity flits, one per cycle. A request of any
// other length is consumed and dropped (`drop` pulses). `done` pulses once per reply,
// so the surrounding design can count requests for bandwidth.
//
// From the paper: the (8,2) code, 4 KiB requests, the 1 KiB reply, the tile being a
// stateless UDP application that is replicated behind a round-robin scheduler. This
// design's choices: the shard layout, the coefficient construction (the paper only
// names the Backblaze library for its CPU comparison), and the fully streaming
// datapath (one flit per cycle, where the paper measures 15 Gbit/s per instance).
module rs_encoder
  import beehive_pkg::*;
#(
  parameter int REQ_BYTES = 4096
) (
  input  logic               clk,
  input  logic               rst,
  input  logic [COORD_W-1:0] my_x,
  input  logic [COORD_W-1:0] my_y,
  input  noc_dest_t          next_dest,
  input  logic               in_valid,
  input  flit_t              in_data,
  output logic               in_ready,
  output logic               out_valid,
  output flit_t              out_data,
  input  logic               out_ready,
  output logic               drop,
  output logic               done
);
  localparam int DATA_SHARDS = 8;
  localparam int FPS         = REQ_BYTES / DATA_SHARDS / FLIT_BYTES;   // flits per shard
  localparam int NFLITS      = DATA_SHARDS * FPS;
  localparam int FW          = $clog2(NFLITS + 1);
  localparam int OW          = $clog2(2 * FPS + 1);
  localparam logic [7:0] C0 [DATA_SHARDS] = '{8'h1a, 8'h84, 8'hba, 8'h33, 8'he7, 8'h10, 8'hc6, 8'h27};
  localparam logic [7:0] C1 [DATA_SHARDS] = '{8'h84, 8'h1a, 8'h33, 8'hba, 8'h10, 8'he7, 8'h27, 8'hc6};

  function automatic logic [7:0] gf_mul(logic [7:0] a, logic [7:0] b);
    logic [7:0] p, x;
    p = '0;
    x = a;
    for (int i = 0; i < 8; i++) begin
      if (b[i]) p ^= x;
      x = {x[6:0], 1'b0} ^ (x[7] ? 8'h1D : 8'h00);
    end
    return p;
  endfunction

  function automatic flit_t gf_scale(flit_t f, logic [7:0] c);
    flit_t r;
    for (int k = 0; k < FLIT_BYTES; k++) r[8*k +: 8] = gf_mul(f[8*k +: 8], c);
    return r;
  endfunction

  typedef enum logic [2:0] {S_HDR, S_META, S_DATA, S_SKIP, S_OHDR, S_OMETA, S_OUT} state_t;
  state_t           st;
  udp_meta_t        meta, in_meta, om;
  logic [FW-1:0]    fcnt;
  logic [LEN_W-1:0] skip;
  logic [OW-1:0]    ocnt;
  flit_t            acc0 [FPS];
  flit_t            acc1 [FPS];
  logic [$clog2(DATA_SHARDS)-1:0] shard;
  logic [(FPS > 1 ? $clog2(FPS) : 1)-1:0] pos;
  flit_t            m0, m1;

  assign in_meta = udp_meta_t'(in_data[NOC_W-1 -: $bits(udp_meta_t)]);
  assign shard   = $bits(shard)'(fcnt / FW'(FPS));
  assign pos     = $bits(pos)'(fcnt % FW'(FPS));
  assign m0      = gf_scale(in_data, C0[shard]);
  assign m1      = gf_scale(in_data, C1[shard]);

  always_comb begin
    om.src_ip   = meta.dst_ip;
    om.dst_ip   = meta.src_ip;
    om.src_port = meta.dst_port;
    om.dst_port = meta.src_port;
    om.data_len = 16'(2 * FPS * FLIT_BYTES);
    om.ts       = meta.ts;
  end

  always_comb begin
    in_ready  = 1'b0;
    out_valid = 1'b0;
    out_data  = '0;
    drop      = 1'b0;
    done      = 1'b0;
    case (st)
      S_HDR, S_DATA, S_SKIP: in_ready = 1'b1;
      S_META: begin
        in_ready = 1'b1;
        drop     = in_valid && (in_meta.data_len != 16'(REQ_BYTES));
      end
      S_OHDR: begin
        out_valid = 1'b1;
        out_data  = mk_hdr_flit(next_dest, my_x, my_y, LEN_W'(1 + 2 * FPS), MSG_UDP);
      end
      S_OMETA: begin
        out_valid = 1'b1;
        out_data  = {om, {(NOC_W - $bits(udp_meta_t)){1'b0}}};
      end
      S_OUT: begin
        out_valid = 1'b1;
        out_data  = (ocnt < OW'(FPS)) ? acc0[ocnt[$bits(pos)-1:0]] : acc1[ocnt[$bits(pos)-1:0]];
        done      = out_ready && (ocnt == OW'(2 * FPS - 1));
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (st == S_DATA && in_valid) begin
      acc0[pos] <= (shard == '0) ? m0 : (acc0[pos] ^ m0);
      acc1[pos] <= (shard == '0) ? m1 : (acc1[pos] ^ m1);
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      st   <= S_HDR;
      meta <= '0;
      fcnt <= '0;
      skip <= '0;
      ocnt <= '0;
    end else begin
      case (st)
        S_HDR:  if (in_valid) st <= S_META;
        S_META: if (in_valid) begin
          meta <= in_meta;
          fcnt <= '0;
          skip <= data_flits(24'(in_meta.data_len));
          if (in_meta.data_len == 16'(REQ_BYTES)) st <= S_DATA;
          else if (in_meta.data_len == '0)        st <= S_HDR;
          else                                    st <= S_SKIP;
        end
        S_DATA: if (in_valid) begin
          fcnt <= fcnt + 1'b1;
          if (fcnt == FW'(NFLITS - 1)) st <= S_OHDR;
        end
        S_SKIP: if (in_valid) begin
          skip <= skip - 1'b1;
          if (skip == LEN_W'(1)) st <= S_HDR;
        end
        S_OHDR:  if (out_ready) st <= S_OMETA;
        S_OMETA: if (out_ready) begin
          ocnt <= '0;
          st   <= S_OUT;
        end
        S_OUT: if (out_ready) begin
          ocnt <= ocnt + 1'b1;
          if (ocnt == OW'(2 * FPS - 1)) st <= S_HDR;
        end
        default: st <= S_HDR;
      endcase
    end
  end

  initial begin
    assert (REQ_BYTES % (DATA_SHARDS * FLIT_BYTES) == 0 && FPS >= 2)
      else $error("REQ_BYTES must be a multiple of 512 and at least 1024");
  end
endmodule

// strip_stream: removes the first `strip` bytes (0..63) of a flit stream and realigns
// what follows so that the next byte lands in byte 0 of the first output flit.
//
// How: the engine keeps the previous input flit, appends the current one to it (two
// lines of data, 1024 bits) and shifts the pair left by strip bytes; the top 512 bits
// are the output flit. This is how the paper removes variable-length protocol headers
// (IP and TCP options) from the stream.
//
// Use: the owner of the stream has already consumed the first flit, because it parsed
// the header out of it. It pulses `start` with that flit, the byte count of the whole
// input (`in_bytes`, first flit included) and the number of bytes wanted on the output
// (`out_bytes`, at most in_bytes - strip). The engine then takes the remaining
// ceil(in_bytes/64)-1 input flits and gives ceil(out_bytes/64) output flits, the last
// one flagged out_last and with unused bytes zeroed. Surplus input (Ethernet padding,
// or everything when out_bytes = 0 to drop a message) is consumed and discarded.
// `busy` is high from the cycle after start until the last flit has moved. One flit
// per cycle in steady state; no added latency beyond the flit it holds.
module strip_stream
  import beehive_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        start,
  input  flit_t       first,
  input  logic [5:0]  strip,
  input  logic [23:0] in_bytes,
  input  logic [23:0] out_bytes,
  output logic        busy,
  input  logic        in_valid,
  input  flit_t       in_data,
  output logic        in_ready,
  output logic        out_valid,
  output flit_t       out_data,
  output logic        out_last,
  input  logic        out_ready
);
  flit_t            prev;
  logic [5:0]       sh;
  logic [LEN_W-1:0] in_left, out_left;
  logic [23:0]      out_b;

  logic [LEN_W-1:0] in_left_nx, out_left_nx;
  assign in_left_nx  = in_left  - LEN_W'(in_valid && in_ready);
  assign out_left_nx = out_left - LEN_W'(out_valid && out_ready);

  logic [2*NOC_W-1:0] pair;
  always_comb begin
    pair = {prev, (in_left != '0) ? in_data : flit_t'('0)} << (32'(sh) * 8);
  end

  always_comb begin
    in_ready  = 1'b0;
    out_valid = 1'b0;
    out_data  = mask_bytes(pair[2*NOC_W-1 -: NOC_W], out_b);
    out_last  = (out_left == LEN_W'(1));
    if (busy) begin
      if (out_left == '0) begin
        in_ready = (in_left != '0);      // discard surplus input
      end else if (in_left != '0) begin
        out_valid = in_valid;
        in_ready  = out_ready;
      end else begin
        out_valid = 1'b1;                // last output comes from prev alone
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      busy     <= 1'b0;
      in_left  <= '0;
      out_left <= '0;
      out_b    <= '0;
      sh       <= '0;
      prev     <= '0;
    end else if (!busy) begin
      if (start) begin
        busy     <= 1'b1;
        prev     <= first;
        sh       <= strip;
        in_left  <= data_flits(in_bytes) - 1'b1;
        out_left <= data_flits(out_bytes);
        out_b    <= out_bytes;
      end
    end else begin
      if (in_valid && in_ready) begin
        prev    <= in_data;
        in_left <= in_left - 1'b1;
      end
      if (out_valid && out_ready) begin
        out_left <= out_left - 1'b1;
        out_b    <= (out_b > 24'(FLIT_BYTES)) ? out_b - 24'(FLIT_BYTES) : '0;
      end
      if (in_left_nx == '0 && out_left_nx == '0) busy <= 1'b0;
    end
  end
endmodule

// prepend_stream: puts `hlen` header bytes (0..63) in front of a flit stream.
//
// The header arrives left-aligned in `hdr` with `start`, together with the payload
// byte count `in_bytes`. Each output flit is the carry (header bytes, or the tail of
// the previous payload flit) followed by the head of the current payload flit shifted
// right by hlen bytes. ceil(in_bytes/64) payload flits in give
// ceil((in_bytes+hlen)/64) flits out; the last is flagged out_last and has its unused
// bytes zeroed. With in_bytes = 0 the output is the header alone. This is the transmit
// counterpart of strip_stream: the paper's transmit tiles add their header in front of
// the data flits (Fig. 4); the carry/shift structure is this design's.
// `busy` is high from the cycle after start until the last output flit has moved.
module prepend_stream
  import beehive_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        start,
  input  flit_t       hdr,
  input  logic [5:0]  hlen,
  input  logic [23:0] in_bytes,
  output logic        busy,
  input  logic        in_valid,
  input  flit_t       in_data,
  output logic        in_ready,
  output logic        out_valid,
  output flit_t       out_data,
  output logic        out_last,
  input  logic        out_ready
);
  flit_t            carry;
  logic [5:0]       hl;
  logic [LEN_W-1:0] in_left, out_left;
  logic [23:0]      out_b;
  logic [LEN_W-1:0] in_left_nx, out_left_nx;

  assign in_left_nx  = in_left  - LEN_W'(in_valid && in_ready);
  assign out_left_nx = out_left - LEN_W'(out_valid && out_ready);

  always_comb begin
    in_ready  = 1'b0;
    out_valid = 1'b0;
    out_last  = (out_left == LEN_W'(1));
    if (in_left != '0) out_data = mask_bytes(carry | (in_data >> (32'(hl) * 8)), out_b);
    else               out_data = mask_bytes(carry, out_b);
    if (busy) begin
      if (in_left != '0) begin
        out_valid = in_valid;
        in_ready  = out_ready;
      end else if (out_left != '0) begin
        out_valid = 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      busy     <= 1'b0;
      carry    <= '0;
      hl       <= '0;
      in_left  <= '0;
      out_left <= '0;
      out_b    <= '0;
    end else if (!busy) begin
      if (start) begin
        busy     <= 1'b1;
        carry    <= mask_bytes(hdr, 24'(hlen));
        hl       <= hlen;
        in_left  <= data_flits(in_bytes);
        out_left <= data_flits(in_bytes + 24'(hlen));
        out_b    <= in_bytes + 24'(hlen);
      end
    end else begin
      if (in_valid && in_ready) begin
        carry <= (hl == '0) ? flit_t'('0) : (in_data << (32'(7'd64 - 7'(hl)) * 8));
      end
      if (out_valid && out_ready) begin
        out_b <= (out_b > 24'(FLIT_BYTES)) ? out_b - 24'(FLIT_BYTES) : '0;
      end
      in_left  <= in_left_nx;
      out_left <= out_left_nx;
      if (in_left_nx == '0 && out_left_nx == '0) busy <= 1'b0;
    end
  end
endmodule

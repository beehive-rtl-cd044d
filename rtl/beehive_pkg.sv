// beehive_pkg: types, constants and helper functions shared by every tile of the
// Beehive network stack.
//
// A NoC message is one header flit followed by msg_len body flits. Flits are 512 bits
// wide, the width of the Ethernet MAC stream. The top 64 bits of the header flit are
// the routing header the mesh routers look at (noc_hdr_t); the remaining 448 bits are
// zero. In this design every protocol message then carries one metadata flit, holding
// the parsed header fields of the layer below (eth_meta_t, ip_meta_t or udp_meta_t,
// left-aligned in the flit), followed by ceil(data_len/64) data flits.
//
// Byte order: byte 0 of a data flit (the first byte on the wire) sits in bits
// [511:504], so a big-endian network header reads straight out of the top bits.
// The flit width, the 64-bit routing header and the header/metadata/data layout follow
// the paper; the field order inside the header and the metadata formats are this
// design's own.
package beehive_pkg;

  localparam int NOC_W       = 512;          // data NoC flit width in bits
  localparam int FLIT_BYTES  = NOC_W / 8;    // 64 bytes per flit
  localparam int COORD_W     = 8;
  localparam int LEN_W       = 22;           // body-flit count: 2^22 flits * 64 B = 256 MiB
  localparam int TS_W        = 64;           // cycle timestamp width

  typedef logic [NOC_W-1:0] flit_t;

  // Routing header, the top 64 bits of a message's first flit.
  typedef struct packed {
    logic [COORD_W-1:0] dst_x;
    logic [COORD_W-1:0] dst_y;
    logic [3:0]         fbits;     // endpoint select inside the destination tile
    logic [LEN_W-1:0]   msg_len;   // number of body flits that follow
    logic [COORD_W-1:0] src_x;
    logic [COORD_W-1:0] src_y;
    logic [5:0]         msg_type;
  } noc_hdr_t;

  // Where a message goes: tile coordinates plus endpoint select.
  typedef struct packed {
    logic [COORD_W-1:0] x;
    logic [COORD_W-1:0] y;
    logic [3:0]         fbits;
  } noc_dest_t;

  localparam int DEST_W = $bits(noc_dest_t);

  // Message types carried in noc_hdr_t.msg_type.
  localparam logic [5:0] MSG_ETH = 6'd1;   // body = eth_meta_t + Ethernet payload
  localparam logic [5:0] MSG_IP  = 6'd2;   // body = ip_meta_t + IP payload
  localparam logic [5:0] MSG_UDP = 6'd3;   // body = udp_meta_t + UDP payload

  typedef struct packed {
    logic [47:0]     dst_mac;
    logic [47:0]     src_mac;
    logic [15:0]     ethertype;
    logic [15:0]     data_len;   // bytes of Ethernet payload that follow
    logic [TS_W-1:0] ts;         // cycle the frame entered the stack
  } eth_meta_t;

  typedef struct packed {
    logic [31:0]     src_ip;
    logic [31:0]     dst_ip;
    logic [7:0]      protocol;
    logic [15:0]     data_len;   // bytes of IP payload that follow
    logic [TS_W-1:0] ts;
  } ip_meta_t;

  typedef struct packed {
    logic [31:0]     src_ip;
    logic [31:0]     dst_ip;
    logic [15:0]     src_port;
    logic [15:0]     dst_port;
    logic [15:0]     data_len;   // bytes of UDP payload that follow
    logic [TS_W-1:0] ts;
  } udp_meta_t;

  localparam logic [15:0] ETHERTYPE_IPV4 = 16'h0800;
  localparam logic [15:0] ETHERTYPE_VLAN = 16'h8100;
  localparam logic [7:0]  IPPROTO_UDP    = 8'd17;
  localparam logic [7:0]  IPPROTO_TCP    = 8'd6;

  function automatic flit_t mk_hdr_flit(noc_dest_t d, logic [COORD_W-1:0] sx,
                                        logic [COORD_W-1:0] sy, logic [LEN_W-1:0] len,
                                        logic [5:0] mtype);
    noc_hdr_t h;
    h.dst_x = d.x; h.dst_y = d.y; h.fbits = d.fbits; h.msg_len = len;
    h.src_x = sx;  h.src_y = sy;  h.msg_type = mtype;
    return {h, {(NOC_W-64){1'b0}}};
  endfunction

  function automatic noc_hdr_t hdr_of(flit_t f);
    return noc_hdr_t'(f[NOC_W-1 -: 64]);
  endfunction

  // Data flits needed for n bytes.
  function automatic logic [LEN_W-1:0] data_flits(logic [23:0] n);
    logic [23:0] t;
    t = (n + 24'(FLIT_BYTES - 1)) >> 6;
    return LEN_W'(t);
  endfunction

  // Keep only the first n bytes of a flit (n >= 64 keeps all).
  function automatic flit_t mask_bytes(flit_t f, logic [23:0] n);
    flit_t m;
    if (n >= 24'(FLIT_BYTES)) m = '1;
    else m = ~({NOC_W{1'b1}} >> (n * 8));
    return f & m;
  endfunction

  // Sum of the 32 big-endian 16-bit words of a flit, unfolded.
  function automatic logic [31:0] flit_sum(flit_t f);
    logic [31:0] s;
    s = '0;
    for (int i = 0; i < NOC_W / 16; i++) s += 32'(f[NOC_W-1-16*i -: 16]);
    return s;
  endfunction

  // Fold a 32-bit sum into a 16-bit ones' complement sum.
  function automatic logic [15:0] csum_fold(logic [31:0] s);
    logic [31:0] t;
    t = {16'h0, s[31:16]} + {16'h0, s[15:0]};
    t = {16'h0, t[31:16]} + {16'h0, t[15:0]};
    return t[15:0];
  endfunction

  // Byte i (0 = first on the wire) of a flit.
  function automatic logic [7:0] byte_of(flit_t f, int i);
    return f[NOC_W-1-8*i -: 8];
  endfunction

endpackage

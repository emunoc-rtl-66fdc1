// emunoc_pkg: types and helper functions shared by the transactor, the PEs and the NIs.
//
// Packet word (32 bits, one AXI4-Stream beat): the software describes every packet by its
// source, destination and length; a tag is added so that ejected packets can be matched to
// the copy kept by the software. The field layout is this design's choice:
//   [7:0] src node id, [15:8] dst node id, [19:16] length in flits, [31:20] tag.
// Node id = y * NOC_X + x.
// Flit: a 2-bit type plus 32 data bits. The header flit carries the packet word unchanged, so
// conv (packet -> header flit) and iconv (header flit -> packet word) are pure re-labelling.
// Payload flits carry dummy data (tag and flit index), as the emulated traffic has no payload.
package emunoc_pkg;

  localparam int unsigned AXIS_W = 32;

  typedef struct packed {
    logic [11:0] tag;
    logic [3:0]  len;
    logic [7:0]  dst;
    logic [7:0]  src;
  } pkt_t;

  typedef enum logic [1:0] {
    FLIT_HEAD     = 2'd0,
    FLIT_BODY     = 2'd1,
    FLIT_TAIL     = 2'd2,
    FLIT_HEADTAIL = 2'd3
  } flit_type_e;

  typedef struct packed {
    flit_type_e  ftype;
    logic [31:0] data;
  } flit_t;

  // conv: packet word -> header flit
  function automatic flit_t conv(pkt_t p);
    flit_t f;
    f.ftype = (p.len <= 4'd1) ? FLIT_HEADTAIL : FLIT_HEAD;
    f.data  = p;
    return f;
  endfunction

  // iconv: header flit -> packet word
  function automatic pkt_t iconv(flit_t f);
    return pkt_t'(f.data);
  endfunction

  // dummy payload flit number idx (1 .. len-1) of the packet whose header is h
  function automatic flit_t payload_flit(pkt_t h, logic [3:0] idx);
    flit_t f;
    f.ftype = (idx == h.len - 4'd1) ? FLIT_TAIL : FLIT_BODY;
    f.data  = {h.tag, 4'd0, 12'd0, idx};
    return f;
  endfunction

  function automatic logic is_head(flit_t f);
    return (f.ftype == FLIT_HEAD) || (f.ftype == FLIT_HEADTAIL);
  endfunction

endpackage

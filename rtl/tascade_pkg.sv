// tascade_pkg: types, constants and pure functions shared by the Tascade tile.
//
// A task invocation travels the NoC as one 64-bit flit: a 32-bit global
// array index followed by a 32-bit value, as in the data-local execution
// model where the first task argument is the index that decides the owner
// tile (no routing header). The channel id (which task the flit invokes)
// is carried on sideband lines next to the 64 data bits, because each task
// type has its own channel sharing the NoC.
//
// Address mapping (this design's choice, the paper only says arrays are cut
// into equal chunks): owner tile id = index >> log_chunk; the tile id's low
// log2(GRID_W) bits are X, the rest Y.
//
// Proxy regions: the region mask is the 4-bit mask of the cascading router
// snippet; the within-region coordinate of X is {x[5:2] & mask, x[1:0]}, so a
// mask of 4'b0011 gives 16-wide regions. A contiguous mask from bit 0 is
// assumed, giving region widths 4, 8, 16, 32 and 64.
package tascade_pkg;

  localparam int unsigned IDX_W    = 32;          // global array index
  localparam int unsigned DATA_W   = 32;          // 4-byte reduction element
  localparam int unsigned NOC_W    = IDX_W + DATA_W;  // 64-bit NoC
  localparam int unsigned COORD_W  = 16;          // tile coordinate registers
  localparam int unsigned NUM_CHAN = 4;           // task channels / IQs / OQs
  localparam int unsigned CHAN_W   = $clog2(NUM_CHAN);
  localparam int unsigned MASK_W   = 4;           // proxy_mask_x / proxy_mask_y
  localparam int unsigned WITHIN_W = 6;           // id_x_within / id_y_within

  typedef logic [IDX_W-1:0]   idx_t;
  typedef logic [DATA_W-1:0]  data_t;
  typedef logic [CHAN_W-1:0]  chan_t;
  typedef logic [COORD_W-1:0] coord_t;

  // One task invocation on the NoC.
  typedef struct packed {
    chan_t chan;   // sideband: task channel
    idx_t  idx;    // first argument, global index, decides the destination
    data_t val;    // second argument
  } msg_t;

  // Router port numbering; N,S,E,W order follows the input_port comment of
  // the snippet. N is towards y-1, E towards x+1.
  typedef enum logic [2:0] {
    P_N = 3'd0, P_S = 3'd1, P_E = 3'd2, P_W = 3'd3, P_L = 3'd4
  } port_e;
  localparam int unsigned NPORTS = 5;

  // P-cache write-propagation policy.
  typedef enum logic { WRITE_THROUGH = 1'b0, WRITE_BACK = 1'b1 } wpolicy_e;

  // How a channel's destination is computed.
  typedef enum logic {
    DST_OWNER = 1'b0,   // the tile that owns the index (e.g. CQ3 -> T3)
    DST_PROXY = 1'b1    // the proxy of the index inside the current region (CQ2 -> T3')
  } dstmode_e;

  // Per-channel routing configuration (the 'channel(...)' declarations).
  typedef struct packed {
    dstmode_e dst;        // owner or region proxy
    logic     cap_en;     // a proxy en route may capture this channel
    chan_t    cap_chan;   // IQ (proxy task) a captured message is put into
  } chan_cfg_t;

  // Configuration of one tile. Router part: proxy_enabled and the two masks
  // of the snippet. P-cache part: its five configuration registers.
  // log_chunk and chan are system settings of the task model.
  typedef struct packed {
    logic                     proxy_enabled;
    logic [MASK_W-1:0]        proxy_mask_x;
    logic [MASK_W-1:0]        proxy_mask_y;
    logic [4:0]               log_chunk;      // log2(elements per tile chunk)
    chan_cfg_t [NUM_CHAN-1:0] chan;
    // P-cache configuration registers
    logic [IDX_W-1:0]         pc_local_size;  // local proxy array fraction (elements)
    logic [4:0]               pc_log_lines;   // P-cache size: log2(lines in use)
    wpolicy_e                 pc_policy;      // write-propagation policy
    chan_t                    pc_chan;        // channel id to propagate updates
    data_t                    pc_default;     // value returned on a miss
  } tile_cfg_t;

  // log2 of the region width along one axis for a given mask.
  function automatic logic [2:0] region_log_w(input logic [MASK_W-1:0] mask);
    return 3'd2 + 3'(mask[0]) + 3'(mask[1]) + 3'(mask[2]) + 3'(mask[3]);
  endfunction

  // Coordinate bits that lie inside the region ({x[5:2] & mask, x[1:0]}),
  // as a mask over the full coordinate.
  function automatic coord_t within_mask(input logic [MASK_W-1:0] mask);
    return coord_t'({mask, 2'b11});
  endfunction

  // Owner tile coordinates of a global index.
  function automatic void owner_xy(input idx_t idx, input logic [4:0] log_chunk,
                                   input int unsigned log_gw,
                                   output coord_t ox, output coord_t oy);
    idx_t tile;
    tile = idx >> log_chunk;
    ox = coord_t'(tile & ((idx_t'(1) << log_gw) - 1));
    oy = coord_t'(tile >> log_gw);
  endfunction

  // Next hop on a torus with dimension-ordered routing, X first then Y,
  // taking the shorter way around each ring. Returns P_L at the destination.
  function automatic port_e torus_dir(input coord_t cx, input coord_t cy,
                                      input coord_t dx, input coord_t dy,
                                      input int unsigned gw, input int unsigned gh);
    coord_t fwd;
    if (dx != cx) begin
      fwd = (dx >= cx) ? coord_t'(dx - cx) : coord_t'(dx + coord_t'(gw) - cx);
      return (32'(fwd) <= gw / 2) ? P_E : P_W;
    end else if (dy != cy) begin
      fwd = (dy >= cy) ? coord_t'(dy - cy) : coord_t'(dy + coord_t'(gh) - cy);
      return (32'(fwd) <= gh / 2) ? P_S : P_N;
    end
    return P_L;
  endfunction

endpackage

// pcache: the proxy cache (P-cache) of a Tascade tile.
//
// The P-cache holds the tile's share of its region's copy of a reduction
// array (the proxy array). It is direct-mapped with one element per line;
// valid bit, tag and data sit together in one SRAM word, so besides the
// reserved SRAM the hardware is the tag compare and the configuration
// registers (held by the tile, passed in through cfg):
//   pc_local_size  local proxy array fraction, in elements
//   pc_log_lines   P-cache size, log2 of the lines in use (<= log2(LINES))
//   pc_policy      write-through or write-back
//   pc_chan        channel on which updates are sent to the owner
//   pc_default     value returned by a read that misses
//
// The PU addresses the P-cache with the element's global index. The index is
// turned into an offset inside the local proxy array fraction,
//   local = ((owner_region_y * regions_x + owner_region_x) << log_chunk) | chunk_offset,
// whose low pc_log_lines bits select the line and whose upper bits are the
// tag. On an eviction the global index is rebuilt from tag, line number and
// this tile's position inside its region.
//
// Operations (one at a time, two cycles each: SRAM read, then compare/write):
//   read   rsp_valid one cycle after acceptance with the data, or pc_default
//          on a miss.
//   write  a hit or an empty line is overwritten; a miss on a valid line
//          evicts it. Write-through: every write sends {index, new value} on
//          pc_chan and a victim is dropped. Write-back: the write stays
//          local and a victim is sent {victim index, victim value}.
//   flush  write-back only: while the TSU reports the PU idle with all OQs
//          empty, a pointer walks the lines and sends and invalidates each
//          valid one (self-invalidation), one line per OQ drain.
// The TSU guarantees room in the OQ for the one push a PU write can cause, so
// pushes are not back-pressured (asserted); flush pushes wait for oq_ready.
// After reset the lines are invalidated one per cycle; req_ready is low until
// that sweep is done.
//
// From the paper: direct mapping, one element per line, tag+valid in SRAM,
// default on miss, the two policies, eviction handling, self-invalidation
// condition and the five registers. The index-to-line mapping, the two-cycle
// timing, the reset sweep and the PU port are this design's own.
module pcache
  import tascade_pkg::*;
#(
  parameter int unsigned GRID_W = 128,
  parameter int unsigned LINES  = 16384,  // SRAM lines reserved (64 KiB of 4-byte elements)
  parameter int unsigned TAG_W  = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  input  tile_cfg_t   cfg,
  input  coord_t      id_x,
  input  coord_t      id_y,
  // PU access port
  input  logic        req_valid,
  output logic        req_ready,
  input  logic        req_we,
  input  idx_t        req_idx,
  input  data_t       req_wdata,
  output logic        rsp_valid,
  output data_t       rsp_data,
  output logic        rsp_hit,
  // push into the output queue of cfg.pc_chan
  output logic        push_valid,
  output msg_t        push_msg,
  input  logic        oq_ready,     // that OQ has room
  input  logic        flush_ok,     // PU idle and all OQs empty
  output logic        clean,        // no valid line
  output logic        cfg_err,      // accessed index outside the local fraction
  // event strobes
  output logic        ev_hit,
  output logic        ev_miss,
  output logic        ev_evict,
  output logic        ev_flush
);

  localparam int unsigned LW     = $clog2(LINES);
  localparam int unsigned LOG_GW = (GRID_W > 1) ? $clog2(GRID_W) : 1;
  localparam int unsigned CNT_W  = $clog2(LINES + 1);

  typedef struct packed {
    logic              valid;
    logic [TAG_W-1:0]  tag;
    data_t             data;
  } line_t;

  line_t sram [LINES];

  typedef enum logic [2:0] {S_INIT, S_IDLE, S_OP, S_FLUSH} state_e;
  state_e state;

  logic [LW-1:0]    init_ptr, flush_ptr, op_set;
  logic [TAG_W-1:0] op_tag;
  logic             op_we;
  idx_t             op_idx;
  data_t            op_wdata;
  line_t            rd_line;
  logic [CNT_W-1:0] valid_cnt;

  // ------------------------------------------------------ index mapping
  function automatic idx_t to_local(input idx_t idx);
    idx_t tile, off, rx, ry;
    logic [2:0] lw, lh;
    tile = idx >> cfg.log_chunk;
    off  = idx & ((idx_t'(1) << cfg.log_chunk) - 1);
    lw   = region_log_w(cfg.proxy_mask_x);
    lh   = region_log_w(cfg.proxy_mask_y);
    rx   = (tile & ((idx_t'(1) << LOG_GW) - 1)) >> lw;
    ry   = (tile >> LOG_GW) >> lh;
    return ((((ry << (LOG_GW - 32'(lw))) | rx)) << cfg.log_chunk) | off;
  endfunction

  function automatic idx_t to_global(input logic [TAG_W-1:0] tag, input logic [LW-1:0] set);
    idx_t loc, off, r, rx, ry, ox, oy;
    logic [2:0] lw, lh;
    lw  = region_log_w(cfg.proxy_mask_x);
    lh  = region_log_w(cfg.proxy_mask_y);
    loc = (idx_t'(tag) << cfg.pc_log_lines) | (idx_t'(set) & ((idx_t'(1) << cfg.pc_log_lines) - 1));
    off = loc & ((idx_t'(1) << cfg.log_chunk) - 1);
    r   = loc >> cfg.log_chunk;
    rx  = r & ((idx_t'(1) << (LOG_GW - 32'(lw))) - 1);
    ry  = r >> (LOG_GW - 32'(lw));
    ox  = (rx << lw) | (idx_t'(id_x) & ((idx_t'(1) << lw) - 1));
    oy  = (ry << lh) | (idx_t'(id_y) & ((idx_t'(1) << lh) - 1));
    return (((oy << LOG_GW) | ox) << cfg.log_chunk) | off;
  endfunction

  idx_t             req_local;
  logic [LW-1:0]    req_set;
  logic [TAG_W-1:0] req_tag;
  idx_t             set_mask;

  always_comb begin
    set_mask  = (idx_t'(1) << cfg.pc_log_lines) - 1;
    req_local = to_local(req_idx);
    req_set   = LW'(req_local & set_mask);
    req_tag   = TAG_W'(req_local >> cfg.pc_log_lines);
  end

  assign req_ready = (state == S_IDLE);
  assign clean     = (valid_cnt == '0);

  // ------------------------------------------------------ control
  logic  hit, do_write, do_evict, flush_go;
  line_t new_line;

  always_comb begin
    hit       = rd_line.valid && (rd_line.tag == op_tag);
    do_write  = (state == S_OP) && op_we;
    do_evict  = do_write && rd_line.valid && !hit;
    new_line  = '{valid: 1'b1, tag: op_tag, data: op_wdata};
    flush_go  = (state == S_FLUSH) && rd_line.valid && oq_ready;

    push_valid = 1'b0;
    push_msg   = '{chan: cfg.pc_chan, idx: op_idx, val: op_wdata};
    if (do_write) begin
      if (cfg.pc_policy == WRITE_THROUGH) begin
        push_valid = 1'b1;
      end else if (do_evict) begin
        push_valid   = 1'b1;
        push_msg.idx = to_global(rd_line.tag, op_set);
        push_msg.val = rd_line.data;
      end
    end else if (flush_go) begin
      push_valid   = 1'b1;
      push_msg.idx = to_global(rd_line.tag, flush_ptr);
      push_msg.val = rd_line.data;
    end

    rsp_valid = (state == S_OP) && !op_we;
    rsp_hit   = hit;
    rsp_data  = hit ? rd_line.data : cfg.pc_default;

    ev_hit   = (state == S_OP) && hit;
    ev_miss  = (state == S_OP) && !hit;
    ev_evict = do_evict;
    ev_flush = flush_go;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_INIT;
      init_ptr  <= '0;
      flush_ptr <= '0;
      op_set    <= '0;
      op_tag    <= '0;
      op_we     <= 1'b0;
      op_idx    <= '0;
      op_wdata  <= '0;
      valid_cnt <= '0;
      cfg_err   <= 1'b0;
    end else begin
      case (state)
        S_INIT: begin
          init_ptr <= init_ptr + 1'b1;
          if (init_ptr == LW'(LINES - 1)) state <= S_IDLE;
        end
        S_IDLE: begin
          if (req_valid) begin
            state    <= S_OP;
            op_set   <= req_set;
            op_tag   <= req_tag;
            op_we    <= req_we;
            op_idx   <= req_idx;
            op_wdata <= req_wdata;
            if (req_local >= cfg.pc_local_size ||
                (req_local >> cfg.pc_log_lines) >= (idx_t'(1) << TAG_W))
              cfg_err <= 1'b1;
          end else if (flush_ok && cfg.pc_policy == WRITE_BACK && !clean) begin
            state <= S_FLUSH;
          end
        end
        S_OP: begin
          state <= S_IDLE;
          if (do_write && !rd_line.valid) valid_cnt <= valid_cnt + 1'b1;
        end
        S_FLUSH: begin
          // one line looked at per visit; an invalid line or a sent line
          // advances the pointer, a valid line waits for OQ room
          state <= S_IDLE;
          if (!rd_line.valid || flush_go)
            flush_ptr <= LW'((idx_t'(flush_ptr) + 1) & set_mask);
          if (flush_go) valid_cnt <= valid_cnt - 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // ------------------------------------------------------ SRAM
  // one read port (registered read) and one write port
  logic [LW-1:0] rd_addr;
  always_comb rd_addr = (state == S_IDLE && req_valid) ? req_set : flush_ptr;

  always_ff @(posedge clk) begin
    rd_line <= sram[rd_addr];
    if (state == S_INIT)
      sram[init_ptr] <= '0;
    else if (do_write)
      sram[op_set] <= new_line;
    else if (flush_go)
      sram[flush_ptr] <= '0;
  end

  // PU-triggered pushes rely on the TSU's OQ reservation.
  a_oq_reserved: assert property (@(posedge clk) disable iff (!rst_n)
                                  (do_write && push_valid) |-> oq_ready);

endmodule

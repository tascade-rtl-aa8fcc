// noc_router: five-port task-invocation router of a Tascade tile, with the
// cascading (proxy capture) logic.
//
// Ports N, S, E, W connect to the neighbouring tiles of a 2D torus and port L
// to the tile's TSU. Every task channel has its own buffer of IN_DEPTH
// one-flit messages at every input (the task-specific channels sharing the
// NoC), with a ready flag per channel, so a channel whose input queue at the
// destination is full does not block the others. A
// message carries no header: its destination is computed at every hop from
// its global index (owner tile = index >> log_chunk). A channel configured as
// DST_PROXY (like CQ2 -> T3') is sent to the tile holding the same
// within-region coordinates as the owner inside the current proxy region;
// a DST_OWNER channel (like CQ3 -> T3) goes to the owner itself.
// Routing is dimension-ordered, X first, then Y, taking the shorter way round
// each torus ring.
//
// For messages arriving on N,S,E,W, cascade_select decides whether the tile is
// the owner (deliver to the channel's own IQ) or a proxy that captures the
// message (deliver to the proxy task's IQ, by rewriting the channel id to
// cap_chan). A capture is only attempted when that IQ has room. Messages
// injected by the local TSU are never captured by the tile that sent them.
//
// Each output (N,S,E,W and the ejection to the TSU) has a round-robin arbiter
// over the five inputs x NUM_CHAN channel buffers; only heads whose
// downstream buffer (same channel at the neighbour, or the target IQ) has room
// take part, and the winner moves in that cycle: one hop per cycle. Outputs
// are combinational from the buffer heads. out_valid comes with room already
// known (the per-channel ready flags are the receiving buffers' not-full).
// The cascade decision uses, as "the output buffer opposite to the input
// port", that output's buffer of the message's own channel.
//
// The paper gives the ports (N,S,E,W,TSU), the torus, the 64-bit width, the
// dimension-ordered routing and the cascade logic; the FIFO depth, the
// arbitration and the per-hop timing are this design's own choices. The torus
// is built without virtual channels, so a ring whose buffers all fill can
// deadlock; the paper does not describe the deadlock avoidance of its NoC.
module noc_router
  import tascade_pkg::*;
#(
  parameter int unsigned GRID_W   = 128,
  parameter int unsigned GRID_H   = 128,
  parameter int unsigned IN_DEPTH = 4
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  tile_cfg_t                        cfg,
  input  coord_t                           id_x,
  input  coord_t                           id_y,
  // inputs: N,S,E,W from neighbours, L from the TSU
  input  logic [NPORTS-1:0]                in_valid,
  input  msg_t [NPORTS-1:0]                in_msg,
  output logic [NPORTS-1:0][NUM_CHAN-1:0]  in_ready,      // per channel buffer not full
  // outputs to neighbours N,S,E,W
  output logic [3:0]                       out_valid,
  output msg_t [3:0]                       out_msg,
  input  logic [3:0][NUM_CHAN-1:0]         out_ready,     // neighbour's buffer per channel
  // ejection into the TSU's input queues; ej_msg.chan selects the IQ
  output logic                             ej_valid,
  output msg_t                             ej_msg,
  input  logic [NUM_CHAN-1:0]              iq_ready,      // IQ not full
  input  logic [NUM_CHAN-1:0]              iq_lt_half,    // IQ occupancy < half
  // event strobes for counters
  output logic                             ev_capture,    // a message was captured as a proxy task
  output logic                             ev_pass_proxy  // a proxy let a capturable message pass
);

  localparam int unsigned LOG_GW = (GRID_W > 1) ? $clog2(GRID_W) : 1;
  localparam int unsigned NOUT   = 5;                  // N,S,E,W, core
  localparam int unsigned NREQ   = NPORTS * NUM_CHAN;  // buffers, r = p*NUM_CHAN + c
  localparam int unsigned RW     = $clog2(NREQ);

  // ---------------------------------------------------------------- inputs
  msg_t [NREQ-1:0]  head;
  logic [NREQ-1:0]  hempty, hfull, pop;

  for (genvar r = 0; r < NREQ; r++) begin : g_in
    localparam int unsigned P = r / NUM_CHAN;
    localparam int unsigned C = r % NUM_CHAN;
    sync_fifo #(.T(msg_t), .DEPTH(IN_DEPTH)) u_fifo (
      .clk, .rst_n,
      .push(in_valid[P] && in_msg[P].chan == chan_t'(C) && !hfull[r]),
      .wdata(in_msg[P]),
      .pop(pop[r]), .rdata(head[r]),
      .full(hfull[r]), .empty(hempty[r]), .count()
    );
    assign in_ready[P][C] = !hfull[r];
  end

  // ---------------------------------------------------- destination per head
  coord_t [NREQ-1:0] dest_x, dest_y;

  always_comb begin
    for (int r = 0; r < NREQ; r++) begin
      coord_t ox, oy, wmx, wmy;
      owner_xy(head[r].idx, cfg.log_chunk, LOG_GW, ox, oy);
      wmx = within_mask(cfg.proxy_mask_x);
      wmy = within_mask(cfg.proxy_mask_y);
      if (cfg.chan[r % NUM_CHAN].dst == DST_PROXY) begin
        dest_x[r] = (id_x & ~wmx) | (ox & wmx);
        dest_y[r] = (id_y & ~wmy) | (oy & wmy);
      end else begin
        dest_x[r] = ox;
        dest_y[r] = oy;
      end
    end
  end

  // cascade decision: one instance per channel, covering the N,S,E,W buffers
  logic [NUM_CHAN-1:0][3:0] is_dest, go_to_proxy, route_to_core;

  for (genvar c = 0; c < NUM_CHAN; c++) begin : g_cas
    coord_t [3:0] dx, dy;
    logic   [3:0] cap_en, full_c;
    chan_t  [3:0] cap_chan;
    for (genvar p = 0; p < 4; p++) begin : g_p
      assign dx[p]       = dest_x[p * NUM_CHAN + c];
      assign dy[p]       = dest_y[p * NUM_CHAN + c];
      assign cap_en[p]   = cfg.chan[c].cap_en && iq_ready[cfg.chan[c].cap_chan];
      assign cap_chan[p] = cfg.chan[c].cap_chan;
      assign full_c[p]   = !out_ready[p][c];
    end
    cascade_select u_cascade (
      .clk, .rst_n,
      .proxy_enabled (cfg.proxy_enabled),
      .proxy_mask_x  (cfg.proxy_mask_x),
      .proxy_mask_y  (cfg.proxy_mask_y),
      .id_x, .id_y,
      .out_full      (full_c),
      .iq_lt_half,
      .dest_x        (dx),
      .dest_y        (dy),
      .cap_en, .cap_chan,
      .is_dest       (is_dest[c]),
      .go_to_proxy   (go_to_proxy[c]),
      .route_to_core (route_to_core[c])
    );
  end

  // -------------------------------------------------------- route per head
  // req[r] is one-hot over the 5 outputs and only set when the receiving
  // buffer has room; ej_chan[r] is the IQ on ejection.
  logic [NREQ-1:0][NOUT-1:0] req;
  chan_t [NREQ-1:0]          ej_chan;
  logic  [NREQ-1:0]          is_cap, at_proxy;

  always_comb begin
    for (int r = 0; r < NREQ; r++) begin
      int unsigned p, c;
      port_e dir;
      p = r / NUM_CHAN;
      c = r % NUM_CHAN;
      req[r]      = '0;
      ej_chan[r]  = chan_t'(c);
      is_cap[r]   = 1'b0;
      at_proxy[r] = 1'b0;
      dir = torus_dir(id_x, id_y, dest_x[r], dest_y[r], GRID_W, GRID_H);
      if (!hempty[r]) begin
        if (p < 4 && route_to_core[c][p]) begin
          if (!is_dest[c][p]) begin
            ej_chan[r] = cfg.chan[c].cap_chan;
            is_cap[r]  = 1'b1;
          end
          req[r][P_L] = iq_ready[ej_chan[r]];
        end else begin
          if (dir == P_L) req[r][P_L] = iq_ready[c];
          else            req[r][dir] = out_ready[dir][c];
          // a capturable message standing at one of its proxies, let through
          at_proxy[r] = (p < 4) && cfg.proxy_enabled && cfg.chan[c].cap_en &&
              ({dest_x[r][5:2] & cfg.proxy_mask_x, dest_x[r][1:0]} ==
               {id_x[5:2] & cfg.proxy_mask_x, id_x[1:0]}) &&
              ({dest_y[r][5:2] & cfg.proxy_mask_y, dest_y[r][1:0]} ==
               {id_y[5:2] & cfg.proxy_mask_y, id_y[1:0]});
        end
      end
    end
  end

  // ------------------------------------------------ round-robin per output
  logic [NOUT-1:0][NREQ-1:0] gnt;
  logic [NOUT-1:0][RW-1:0]   rr;

  always_comb begin
    gnt = '0;
    for (int o = 0; o < NOUT; o++) begin
      for (int k = 0; k < NREQ; k++) begin
        int unsigned r;
        r = (32'(rr[o]) + k) % NREQ;
        if (req[r][o] && gnt[o] == '0) gnt[o][r] = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rr <= '0;
    else
      for (int o = 0; o < NOUT; o++)
        for (int r = 0; r < NREQ; r++)
          if (gnt[o][r]) rr[o] <= RW'((r + 1) % NREQ);
  end

  // ------------------------------------------------------------- outputs
  always_comb begin
    pop           = '0;
    out_valid     = '0;
    out_msg       = '0;
    ej_valid      = 1'b0;
    ej_msg        = '0;
    ev_capture    = 1'b0;
    ev_pass_proxy = 1'b0;
    for (int r = 0; r < NREQ; r++) begin
      for (int o = 0; o < 4; o++)
        if (gnt[o][r]) begin
          out_valid[o] = 1'b1;
          out_msg[o]   = head[r];
          pop[r]       = 1'b1;
          if (at_proxy[r]) ev_pass_proxy = 1'b1;
        end
      if (gnt[P_L][r]) begin
        ej_valid    = 1'b1;
        ej_msg      = head[r];
        ej_msg.chan = ej_chan[r];
        pop[r]      = 1'b1;
        ev_capture  = is_cap[r];
      end
    end
  end

  // Handshake rules: a message only leaves into a buffer with room.
  a_ej_room: assert property (@(posedge clk) disable iff (!rst_n)
                              ej_valid |-> iq_ready[ej_msg.chan]);
  for (genvar o = 0; o < 4; o++) begin : g_a
    a_out_room: assert property (@(posedge clk) disable iff (!rst_n)
                                 out_valid[o] |-> out_ready[o][out_msg[o].chan]);
  end

endmodule

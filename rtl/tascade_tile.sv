// tascade_tile: one tile of the Tascade grid without its PU.
//
// Holds the tile's configuration registers (the router's proxy-enable and
// region masks and the P-cache's five registers, loaded together through
// cfg_we/cfg_wdata, a stand-in for their memory-mapped writes), the router
// with cascading logic, the TSU and the P-cache. The PU, which runs the task
// code, sits outside: it receives tasks from the TSU, accesses the P-cache
// through its port (reads and writes of the proxy array), and pushes the
// tasks it spawns into the TSU's output queues. The rest of the tile's
// scratchpad (dataset chunk, owner copy of the reduction array) belongs to
// the PU side and is not modelled here.
//
// Network ports carry one 64-bit message (plus channel id) per cycle in each
// direction; nin_ready gives, per channel, whether the tile's input buffer
// has room, and nout_ready the same for the neighbour. A message is only
// sent into a buffer with room, so valid alone completes a transfer.
module tascade_tile
  import tascade_pkg::*;
#(
  parameter int unsigned GRID_W   = 128,
  parameter int unsigned GRID_H   = 128,
  parameter int unsigned IN_DEPTH = 4,
  parameter int unsigned IQ_DEPTH = 8,
  parameter int unsigned OQ_DEPTH = 8,
  parameter int unsigned PC_LINES = 16384,
  parameter int unsigned PC_TAG_W = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  input  coord_t      id_x,
  input  coord_t      id_y,
  // configuration register write
  input  logic        cfg_we,
  input  tile_cfg_t   cfg_wdata,
  // network, N,S,E,W
  input  logic [3:0]                nin_valid,
  input  msg_t [3:0]                nin_msg,
  output logic [3:0][NUM_CHAN-1:0]  nin_ready,
  output logic [3:0]                nout_valid,
  output msg_t [3:0]                nout_msg,
  input  logic [3:0][NUM_CHAN-1:0]  nout_ready,
  // PU: task dispatch
  output logic        task_valid,
  output msg_t        task_msg,
  input  logic        task_ready,
  input  logic        task_done,
  // PU: spawned tasks
  input  logic        pu_push_valid,
  input  msg_t        pu_push_msg,
  output logic        pu_push_ready,
  // PU: P-cache port
  input  logic        pc_req_valid,
  output logic        pc_req_ready,
  input  logic        pc_req_we,
  input  idx_t        pc_req_idx,
  input  data_t       pc_req_wdata,
  output logic        pc_rsp_valid,
  output data_t       pc_rsp_data,
  output logic        pc_clean,
  output logic        pc_cfg_err
);

  tile_cfg_t cfg_r;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      cfg_r <= '0;
    else if (cfg_we) cfg_r <= cfg_wdata;
  end

  // router <-> tsu
  logic                ej_valid, inj_valid;
  logic [NUM_CHAN-1:0] inj_ready, pc_task_mask;
  msg_t                ej_msg, inj_msg;
  logic [NUM_CHAN-1:0] iq_ready, iq_lt_half;
  logic [NPORTS-1:0]   rin_valid;
  logic [NPORTS-1:0][NUM_CHAN-1:0] rin_ready;
  msg_t [NPORTS-1:0]   rin_msg;

  // tsu <-> pcache
  logic  pc_push_valid, pc_oq_ready, flush_ok;
  msg_t  pc_push_msg;

  // event strobes, visible to testbenches and counters
  logic ev_capture, ev_pass_proxy, ev_oq_hold;
  logic ev_hit, ev_miss, ev_evict, ev_flush, pc_rsp_hit;

  assign rin_valid = {inj_valid, nin_valid};
  assign rin_msg   = {inj_msg, nin_msg};
  assign nin_ready = rin_ready[3:0];
  assign inj_ready = rin_ready[P_L];

  // Task types that write the P-cache: the proxy tasks, i.e. channels routed
  // to a region proxy and the IQs captured messages are put into.
  always_comb begin
    pc_task_mask = '0;
    for (int c = 0; c < NUM_CHAN; c++) begin
      if (cfg_r.chan[c].dst == DST_PROXY) pc_task_mask[c] = 1'b1;
      if (cfg_r.chan[c].cap_en) pc_task_mask[cfg_r.chan[c].cap_chan] = 1'b1;
    end
  end

  noc_router #(.GRID_W(GRID_W), .GRID_H(GRID_H), .IN_DEPTH(IN_DEPTH)) u_router (
    .clk, .rst_n, .cfg(cfg_r), .id_x, .id_y,
    .in_valid(rin_valid), .in_msg(rin_msg), .in_ready(rin_ready),
    .out_valid(nout_valid), .out_msg(nout_msg), .out_ready(nout_ready),
    .ej_valid, .ej_msg, .iq_ready, .iq_lt_half,
    .ev_capture, .ev_pass_proxy
  );

  tsu #(.IQ_DEPTH(IQ_DEPTH), .OQ_DEPTH(OQ_DEPTH)) u_tsu (
    .clk, .rst_n, .pc_chan(cfg_r.pc_chan), .pc_task_mask,
    .ej_valid, .ej_msg, .iq_ready, .iq_lt_half,
    .inj_valid, .inj_msg, .inj_ready,
    .task_valid, .task_msg, .task_ready, .task_done,
    .pu_push_valid, .pu_push_msg, .pu_push_ready,
    .pc_push_valid, .pc_push_msg, .pc_oq_ready, .flush_ok,
    .ev_oq_hold
  );

  pcache #(.GRID_W(GRID_W), .LINES(PC_LINES), .TAG_W(PC_TAG_W)) u_pcache (
    .clk, .rst_n, .cfg(cfg_r), .id_x, .id_y,
    .req_valid(pc_req_valid), .req_ready(pc_req_ready), .req_we(pc_req_we),
    .req_idx(pc_req_idx), .req_wdata(pc_req_wdata),
    .rsp_valid(pc_rsp_valid), .rsp_data(pc_rsp_data), .rsp_hit(pc_rsp_hit),
    .push_valid(pc_push_valid), .push_msg(pc_push_msg),
    .oq_ready(pc_oq_ready), .flush_ok,
    .clean(pc_clean), .cfg_err(pc_cfg_err),
    .ev_hit, .ev_miss, .ev_evict, .ev_flush
  );

endmodule

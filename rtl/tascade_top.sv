// tascade_top: a GRID_W x GRID_H torus of Tascade tiles.
//
// Each tile has a router with the cascading logic, a TSU and a P-cache. The
// tiles are wired into a 2D torus: a tile's north output feeds the south
// input of the tile above (row y-1, wrapping), its east output the west input
// of the tile to the right (column x+1, wrapping), and so on. Tile t sits at
// x = t % GRID_W, y = t / GRID_W and owns the array chunk t (index >> log_chunk).
//
// The PUs, which run the task code, are not part of this RTL: each tile's PU
// port (task dispatch, spawned tasks, P-cache access) is brought out as an
// array indexed by tile number. All tiles load the same configuration word
// when cfg_we is high (proxy enable, region masks, channel routing and the
// P-cache registers).
//
// Defaults follow the main evaluated system where the tools allow: 64-bit
// NoC, 16x16 proxy regions (set through the masks at run time) and a P-cache
// holding the whole local proxy-array fraction of RMAT-22 (64 KiB of 4-byte
// elements = 16384 lines). The grid defaults to 32x32 tiles instead of the
// evaluated 128x128: elaborating the full grid needs far more memory than a
// lint/simulation build can get (about 12.5 MB per tile). GRID_W and GRID_H
// may be set to any powers of two. Buffer depths are this design's choice.
module tascade_top
  import tascade_pkg::*;
#(
  parameter int unsigned GRID_W   = 32,
  parameter int unsigned GRID_H   = 32,
  parameter int unsigned IN_DEPTH = 4,
  parameter int unsigned IQ_DEPTH = 8,
  parameter int unsigned OQ_DEPTH = 8,
  parameter int unsigned PC_LINES = 16384,
  parameter int unsigned PC_TAG_W = 8,
  localparam int unsigned NT      = GRID_W * GRID_H
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cfg_we,
  input  tile_cfg_t         cfg_wdata,
  // per-tile PU ports
  output logic  [NT-1:0]    task_valid,
  output msg_t  [NT-1:0]    task_msg,
  input  logic  [NT-1:0]    task_ready,
  input  logic  [NT-1:0]    task_done,
  input  logic  [NT-1:0]    pu_push_valid,
  input  msg_t  [NT-1:0]    pu_push_msg,
  output logic  [NT-1:0]    pu_push_ready,
  input  logic  [NT-1:0]    pc_req_valid,
  output logic  [NT-1:0]    pc_req_ready,
  input  logic  [NT-1:0]    pc_req_we,
  input  idx_t  [NT-1:0]    pc_req_idx,
  input  data_t [NT-1:0]    pc_req_wdata,
  output logic  [NT-1:0]    pc_rsp_valid,
  output data_t [NT-1:0]    pc_rsp_data,
  output logic  [NT-1:0]    pc_clean,
  output logic  [NT-1:0]    pc_cfg_err
);

  // port index 0..3 = N,S,E,W (tascade_pkg::port_e)
  logic [NT-1:0][3:0] nin_valid, nout_valid;
  logic [NT-1:0][3:0][NUM_CHAN-1:0] nin_ready, nout_ready;
  msg_t [NT-1:0][3:0] nin_msg, nout_msg;

  for (genvar y = 0; y < GRID_H; y++) begin : g_y
    for (genvar x = 0; x < GRID_W; x++) begin : g_x
      localparam int unsigned T  = y * GRID_W + x;
      localparam int unsigned TN = ((y + GRID_H - 1) % GRID_H) * GRID_W + x;
      localparam int unsigned TS = ((y + 1) % GRID_H) * GRID_W + x;
      localparam int unsigned TE = y * GRID_W + (x + 1) % GRID_W;
      localparam int unsigned TW = y * GRID_W + (x + GRID_W - 1) % GRID_W;

      // what arrives on my N input left the northern tile through its S output
      assign nin_valid[T][0] = nout_valid[TN][1];
      assign nin_msg[T][0]   = nout_msg[TN][1];
      assign nin_valid[T][1] = nout_valid[TS][0];
      assign nin_msg[T][1]   = nout_msg[TS][0];
      assign nin_valid[T][2] = nout_valid[TE][3];
      assign nin_msg[T][2]   = nout_msg[TE][3];
      assign nin_valid[T][3] = nout_valid[TW][2];
      assign nin_msg[T][3]   = nout_msg[TW][2];
      assign nout_ready[T][0] = nin_ready[TN][1];
      assign nout_ready[T][1] = nin_ready[TS][0];
      assign nout_ready[T][2] = nin_ready[TE][3];
      assign nout_ready[T][3] = nin_ready[TW][2];

      tascade_tile #(
        .GRID_W(GRID_W), .GRID_H(GRID_H), .IN_DEPTH(IN_DEPTH),
        .IQ_DEPTH(IQ_DEPTH), .OQ_DEPTH(OQ_DEPTH),
        .PC_LINES(PC_LINES), .PC_TAG_W(PC_TAG_W)
      ) u_tile (
        .clk, .rst_n,
        .id_x(coord_t'(x)), .id_y(coord_t'(y)),
        .cfg_we, .cfg_wdata,
        .nin_valid(nin_valid[T]), .nin_msg(nin_msg[T]), .nin_ready(nin_ready[T]),
        .nout_valid(nout_valid[T]), .nout_msg(nout_msg[T]), .nout_ready(nout_ready[T]),
        .task_valid(task_valid[T]), .task_msg(task_msg[T]),
        .task_ready(task_ready[T]), .task_done(task_done[T]),
        .pu_push_valid(pu_push_valid[T]), .pu_push_msg(pu_push_msg[T]),
        .pu_push_ready(pu_push_ready[T]),
        .pc_req_valid(pc_req_valid[T]), .pc_req_ready(pc_req_ready[T]),
        .pc_req_we(pc_req_we[T]), .pc_req_idx(pc_req_idx[T]),
        .pc_req_wdata(pc_req_wdata[T]),
        .pc_rsp_valid(pc_rsp_valid[T]), .pc_rsp_data(pc_rsp_data[T]),
        .pc_clean(pc_clean[T]), .pc_cfg_err(pc_cfg_err[T])
      );
    end
  end

endmodule

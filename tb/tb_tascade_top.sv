// tb_tascade_top: end-to-end test of a Tascade grid running two reductions.
//
// An 8x8 torus with 4x4 proxy regions (4 regions), 4-element chunks (256
// array elements), a P-cache of 8 lines for a 16-element local fraction (so
// lines get evicted) and shallow queues (so the NoC and the queues fill up).
// Every tile has a behavioural PU (pu_model). The testbench plays the T2
// tasks: each tile spawns random proxy-task invocations (channel 0, routed to
// the index's proxy inside the sender's region). Channel 1 carries updates
// towards the owner; proxies en route may capture them into channel 0.
//
// Workload 1, shortest-path style: min reduction, write-through P-cache,
//   default +inf. Filtered updates stop at the proxy; every improvement is
//   sent on towards the owner.
// Workload 2, histogram style: add reduction, write-back P-cache, default 0.
//   Updates are coalesced in the P-caches and reach the owners on eviction
//   or by self-invalidation when the tiles go idle.
// In both, the owners' arrays must end equal to the min / sum over all
// invocations, computed by the testbench. The test also counts how often
// each mechanism happened (capture by a proxy en route, a proxy letting a
// message pass, filtering, eviction, self-invalidation, a task held back by
// the OQ reservation, P-cache hits) and fails if one never did. The PUs
// are slowed down at random so that queues and links fill up.
module tb_tascade_top;
  import tascade_pkg::*;

  localparam int GW = 8, GH = 8, NT = GW * GH, CH = 4, NV = NT * CH;
  localparam int NMSG = 60;          // invocations spawned per tile
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic cfg_we;
  tile_cfg_t cfg;
  logic  [NT-1:0] task_valid, task_ready, task_done, pu_push_valid, pu_push_ready;
  msg_t  [NT-1:0] task_msg, pu_push_msg;
  logic  [NT-1:0] pc_req_valid, pc_req_ready, pc_req_we, pc_rsp_valid, pc_clean, pc_cfg_err;
  idx_t  [NT-1:0] pc_req_idx;
  data_t [NT-1:0] pc_req_wdata, pc_rsp_data;
  logic  op_add, mem_clear;
  data_t mem_init;
  data_t [NT-1:0][CH-1:0] mem;
  int    n_filt [NT], n_ptask [NT], n_otask [NT];

  tascade_top #(
    .GRID_W(GW), .GRID_H(GH), .IN_DEPTH(2), .IQ_DEPTH(4), .OQ_DEPTH(2),
    .PC_LINES(8), .PC_TAG_W(4)
  ) dut (
    .clk, .rst_n, .cfg_we, .cfg_wdata(cfg),
    .task_valid, .task_msg, .task_ready, .task_done,
    .pu_push_valid, .pu_push_msg, .pu_push_ready,
    .pc_req_valid, .pc_req_ready, .pc_req_we, .pc_req_idx, .pc_req_wdata,
    .pc_rsp_valid, .pc_rsp_data, .pc_clean, .pc_cfg_err
  );

  // event counters, one per mechanism
  int c_cap = 0, c_pass = 0, c_evict = 0, c_flush = 0, c_hold = 0, c_hit = 0;

  // PU stalls: a PU only sees the TSU on cycles where go[t] is set (one in
  // three on average), so the PUs fall behind, the IQs and the network fill
  // and the OQ reservation has to hold tasks back.
  logic [NT-1:0] go, pu_task_valid, pu_task_ready;
  always @(negedge clk) for (int t = 0; t < NT; t++) go[t] = ($urandom % 3) == 0;
  assign pu_task_valid = task_valid & go;
  assign task_ready    = pu_task_ready & go;

  for (genvar t = 0; t < NT; t++) begin : g_pu
    pu_model #(.CHUNK(CH), .PROXY_CH(0), .OWNER_CH(1)) u_pu (
      .clk, .rst_n, .op_add, .mem_init, .mem_clear,
      .task_valid(pu_task_valid[t]), .task_msg(task_msg[t]), .task_ready(pu_task_ready[t]),
      .task_done(task_done[t]),
      .pc_req_valid(pc_req_valid[t]), .pc_req_ready(pc_req_ready[t]), .pc_req_we(pc_req_we[t]),
      .pc_req_idx(pc_req_idx[t]), .pc_req_wdata(pc_req_wdata[t]),
      .pc_rsp_valid(pc_rsp_valid[t]), .pc_rsp_data(pc_rsp_data[t]),
      .mem(mem[t]), .n_filtered(n_filt[t]), .n_proxy_tasks(n_ptask[t]),
      .n_owner_tasks(n_otask[t])
    );
  end

  for (genvar y = 0; y < GH; y++) begin : g_ey
    for (genvar x = 0; x < GW; x++) begin : g_ex
      always @(posedge clk) begin
        if (dut.g_y[y].g_x[x].u_tile.ev_capture)    c_cap++;
        if (dut.g_y[y].g_x[x].u_tile.ev_pass_proxy) c_pass++;
        if (dut.g_y[y].g_x[x].u_tile.ev_evict)      c_evict++;
        if (dut.g_y[y].g_x[x].u_tile.ev_flush)      c_flush++;
        if (dut.g_y[y].g_x[x].u_tile.ev_oq_hold)    c_hold++;
        if (dut.g_y[y].g_x[x].u_tile.ev_hit)        c_hit++;
      end
    end
  end

  int checks = 0, failures = 0;
  data_t expv [NV];
  int    cycles, spawn_cyc;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  function automatic int mismatches();
    int n;
    n = 0;
    for (int i = 0; i < NV; i++) if (mem[i / CH][i % CH] != expv[i]) n++;
    return n;
  endfunction

  task automatic run(input logic add);
    int left [NT];
    int filt0;
    op_add   = add;
    mem_init = add ? 32'd0 : 32'hFFFF_FFFF;
    // configuration, the same in every tile
    cfg = '0;
    cfg.proxy_enabled = 1'b1;
    cfg.proxy_mask_x = 4'b0000; cfg.proxy_mask_y = 4'b0000;   // 4x4 regions
    cfg.log_chunk = 5'd2;
    cfg.chan[0] = '{dst: DST_PROXY, cap_en: 1'b0, cap_chan: chan_t'(0)};  // CQ2 -> T3'
    cfg.chan[1] = '{dst: DST_OWNER, cap_en: 1'b1, cap_chan: chan_t'(0)};  // CQ3 -> T3, captured as T3'
    cfg.pc_local_size = 16;            // 4 regions x 4 elements
    cfg.pc_log_lines  = 5'd3;          // 8 lines
    cfg.pc_policy  = add ? WRITE_BACK : WRITE_THROUGH;
    cfg.pc_chan    = chan_t'(1);
    cfg.pc_default = mem_init;
    for (int i = 0; i < NV; i++) expv[i] = mem_init;
    rst_n = 0; cfg_we = 0; pu_push_valid = '0; mem_clear = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    cfg_we = 1; @(negedge clk); cfg_we = 0;
    repeat (20) @(negedge clk);         // P-cache reset sweep
    for (int t = 0; t < NT; t++) left[t] = NMSG;
    // spawn invocations as fast as the OQs take them
    for (spawn_cyc = 0; spawn_cyc < 20000; spawn_cyc++) begin
      int busy;
      busy = 0;
      for (int t = 0; t < NT; t++) begin
        if (pu_push_valid[t] && pu_push_ready[t]) begin
          int i;
          i = int'(pu_push_msg[t].idx);
          expv[i] = add ? expv[i] + pu_push_msg[t].val
                        : (pu_push_msg[t].val < expv[i] ? pu_push_msg[t].val : expv[i]);
          left[t]--;
        end
      end
      for (int t = 0; t < NT; t++) begin
        if (left[t] > 0) begin
          busy++;
          if (!(pu_push_valid[t] && !pu_push_ready[t])) begin
            pu_push_valid[t] = 1'b1;
            pu_push_msg[t] = '{chan: chan_t'(0), idx: idx_t'($urandom_range(0, NV - 1)),
                               val: add ? data_t'($urandom_range(1, 9))
                                        : data_t'($urandom_range(1, 100000))};
          end
        end else pu_push_valid[t] = 1'b0;
      end
      @(negedge clk);
      if (busy == 0) break;
    end
    check(spawn_cyc < 20000, "all invocations spawned");
    pu_push_valid = '0;
    // wait for the reduction trees to settle
    cycles = 0;
    while ((mismatches() != 0 || (add && pc_clean != '1)) && cycles < 20000) begin
      @(negedge clk);
      cycles++;
    end
    check(mismatches() == 0, $sformatf("%s: %0d owner elements wrong", add ? "add" : "min", mismatches()));
    if (add) check(pc_clean == '1, "write-back P-caches flushed");
    check(pc_cfg_err == '0, "no P-cache range error");
    filt0 = 0;
    foreach (n_filt[t]) filt0 += n_filt[t];
    $display("%s: spawning took %0d cycles, settled %0d cycles after the last spawn, filtered=%0d",
             add ? "add/WB" : "min/WT", spawn_cyc, cycles, filt0);
  endtask

  initial begin
    #50000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int filt;
    run(1'b0);
    filt = 0;
    foreach (n_filt[t]) filt += n_filt[t];
    run(1'b1);
    $display("captures=%0d passes=%0d filtered=%0d evictions=%0d self_inval=%0d oq_holds=%0d hits=%0d",
             c_cap, c_pass, filt, c_evict, c_flush, c_hold, c_hit);
    check(c_cap > 0,   "a proxy en route captured an update");
    check(c_pass > 0,  "a proxy let an update pass");
    check(filt > 0,    "an update was filtered at a proxy");
    check(c_evict > 0, "a P-cache line was evicted");
    check(c_flush > 0, "a P-cache self-invalidated a line");
    check(c_hold > 0,  "a task was held for OQ space");
    check(c_hit > 0,   "a P-cache hit");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

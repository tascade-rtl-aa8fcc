// tb_tascade_tile: directed test of one Tascade tile (router + TSU + P-cache).
//
// The tile sits at (1,1) of an 8x8 torus with 4x4 proxy regions and 4-element
// chunks, so the owner of index i is tile i/4, x = tile%8, y = tile/8.
// Channel 0 is the proxy task (routed to the index's proxy inside the current
// region), channel 1 the owner-bound update channel, capturable into channel
// 0. The P-cache uses 8 lines, write-through, default 0xFFFF_FFFF, updates on
// channel 1. The testbench acts as the PU (accepts tasks, pulses task_done)
// and as the four neighbours, and checks, against values worked out by hand
// from that mapping:
//   * an update for this tile is delivered to its own IQ (owner task);
//   * an update for (5,1), whose within-region position equals this tile's,
//     is captured as a proxy task while the proxy IQ is under half full;
//   * an update for (6,1) is forwarded (3 hops west is shorter than 5 east);
//   * a proxy-task spawn for (1,3) leaves south towards the proxy (1,3);
//   * a P-cache read misses with the default, a write goes out east towards
//     its owner (4 hops, the tie goes east) as a write-through update, and
//     the next read hits with the written value.
module tb_tascade_tile;
  import tascade_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        cfg_we = 1'b0;
  tile_cfg_t   cfg;
  logic [3:0]  nin_valid = '0, nout_valid;
  msg_t [3:0]  nin_msg = '0, nout_msg;
  logic [3:0][NUM_CHAN-1:0] nin_ready, nout_ready;
  logic        task_valid, task_ready = 1'b0, task_done = 1'b0;
  msg_t        task_msg, pu_push_msg = '0;
  logic        pu_push_valid = 1'b0, pu_push_ready;
  logic        pc_req_valid = 1'b0, pc_req_ready, pc_req_we = 1'b0, pc_rsp_valid;
  idx_t        pc_req_idx = '0;
  data_t       pc_req_wdata = '0, pc_rsp_data;
  logic        pc_clean, pc_cfg_err;

  assign nout_ready = '1;

  tascade_tile #(
    .GRID_W(8), .GRID_H(8), .IN_DEPTH(2), .IQ_DEPTH(4), .OQ_DEPTH(2),
    .PC_LINES(8), .PC_TAG_W(4)
  ) dut (
    .clk, .rst_n, .id_x(16'd1), .id_y(16'd1), .cfg_we, .cfg_wdata(cfg),
    .nin_valid, .nin_msg, .nin_ready, .nout_valid, .nout_msg, .nout_ready,
    .task_valid, .task_msg, .task_ready, .task_done,
    .pu_push_valid, .pu_push_msg, .pu_push_ready,
    .pc_req_valid, .pc_req_ready, .pc_req_we, .pc_req_idx, .pc_req_wdata,
    .pc_rsp_valid, .pc_rsp_data, .pc_clean, .pc_cfg_err
  );

  int checks = 0, failures = 0;
  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL @%0t: %s", $time, what);
    end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // wait for a task from the TSU, accept it and finish it
  task automatic expect_task(input msg_t m, input string what);
    int n = 0;
    while (!task_valid && n < 40) begin @(negedge clk); n++; end
    check(task_valid, {what, ": task arrives"});
    check(task_msg == m, $sformatf("%s: task %0d/%0d/%0d, expected %0d/%0d/%0d", what,
          task_msg.chan, task_msg.idx, task_msg.val, m.chan, m.idx, m.val));
    task_ready = 1'b1; @(negedge clk); task_ready = 1'b0;
    task_done  = 1'b1; @(negedge clk); task_done  = 1'b0;
  endtask

  // wait for a message on network output o
  task automatic expect_out(input int o, input msg_t m, input string what);
    int n = 0;
    while (!nout_valid[o] && n < 40) begin @(negedge clk); n++; end
    check(nout_valid[o], {what, ": leaves on the expected port"});
    check(nout_msg[o] == m, {what, ": message unchanged"});
    check(!task_valid, {what, ": not delivered locally"});
  endtask

  task automatic send(input int p, input msg_t m);
    @(negedge clk);
    check(nin_ready[p][m.chan], "input buffer has room");
    nin_valid[p] = 1'b1; nin_msg[p] = m;
    @(negedge clk);
    nin_valid[p] = 1'b0;
  endtask

  task automatic pc_access(input logic we, input idx_t idx, input data_t wd, output data_t rd);
    int n = 0;
    while (!pc_req_ready && n < 100) begin @(negedge clk); n++; end
    pc_req_valid = 1'b1; pc_req_we = we; pc_req_idx = idx; pc_req_wdata = wd;
    @(negedge clk);
    pc_req_valid = 1'b0;
    rd = pc_rsp_data;
    if (!we) check(pc_rsp_valid, "P-cache read response one cycle after acceptance");
  endtask

  // a message on any network output other than the expected ones is an error
  int stray = 0;

  initial begin
    data_t rd;
    cfg = '0;
    cfg.proxy_enabled = 1'b1;
    cfg.log_chunk     = 5'd2;
    cfg.chan[0]       = '{dst: DST_PROXY, cap_en: 1'b0, cap_chan: chan_t'(0)};
    cfg.chan[1]       = '{dst: DST_OWNER, cap_en: 1'b1, cap_chan: chan_t'(0)};
    cfg.pc_local_size = 32'd16;
    cfg.pc_log_lines  = 5'd3;
    cfg.pc_policy     = WRITE_THROUGH;
    cfg.pc_chan       = chan_t'(1);
    cfg.pc_default    = 32'hFFFF_FFFF;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    cfg_we = 1'b1; @(negedge clk); cfg_we = 1'b0;
    repeat (3) @(negedge clk);

    // owner delivery: tile 9 = (1,1) owns 36..39; arrives from the west
    send(3, '{chan: chan_t'(1), idx: 37, val: 11});
    expect_task('{chan: chan_t'(1), idx: 37, val: 11}, "owner delivery");

    // capture: owner (5,1) = tile 13, index 53, travelling east
    send(3, '{chan: chan_t'(1), idx: 53, val: 12});
    expect_task('{chan: chan_t'(0), idx: 53, val: 12}, "capture by proxy");

    // forward: owner (6,1) = tile 14, index 57, not a proxy position
    send(2, '{chan: chan_t'(1), idx: 57, val: 13});
    expect_out(3, '{chan: chan_t'(1), idx: 57, val: 13}, "forward west");

    // PU spawn of a proxy task for owner (1,3) = tile 25, index 101
    @(negedge clk);
    pu_push_valid = 1'b1; pu_push_msg = '{chan: chan_t'(0), idx: 101, val: 14};
    #1 check(pu_push_ready, "OQ accepts the spawn");
    @(negedge clk); pu_push_valid = 1'b0;
    expect_out(1, '{chan: chan_t'(0), idx: 101, val: 14}, "proxy task south");

    // P-cache: miss returns the default, write-through, then a hit
    pc_access(1'b0, 53, '0, rd);
    check(rd == 32'hFFFF_FFFF, "miss returns the default value");
    pc_access(1'b1, 53, 32'd3, rd);
    expect_out(2, '{chan: chan_t'(1), idx: 53, val: 3}, "write-through update east");
    pc_access(1'b0, 53, '0, rd);
    check(rd == 32'd3, "hit returns the written value");
    check(!pc_cfg_err, "no configuration error");
    check(!pc_clean, "P-cache holds a valid line");

    repeat (10) @(negedge clk);
    check(stray == 0, "no stray output");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // count outputs that no test expects: only W (forward), S (spawn) and
  // E (write-through) are used, each once
  int n_out [4] = '{0, 0, 0, 0};
  always @(posedge clk) if (rst_n)
    for (int o = 0; o < 4; o++)
      if (nout_valid[o]) begin
        n_out[o]++;
        if (o == 0 || n_out[o] > 1) stray++;
      end
endmodule

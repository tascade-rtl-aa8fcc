// tb_tsu: self-checking test of the task scheduling unit.
//
// Phase 1: random messages are ejected into the four IQs while a model PU
// takes tasks with random delays; every task must come out once, in order
// per IQ, never while the PU is busy, and iq_ready / iq_lt_half must match
// the occupancy kept by the testbench.
// Phase 2: with the injection port blocked, the PU fills the P-cache's OQ;
// a waiting proxy task (channel 0, marked in pc_task_mask) must then be held
// back (OQ reservation) while a task of another type still gets scheduled
// past it. While a task runs,
// PU pushes into that OQ must stop one slot short of full, so the P-cache
// push issued at the end of the task always finds room.
// Phase 3: the injection port is opened; every message pushed must leave
// once, in order per OQ, and flush_ok must rise only when the PU is idle and
// all queues are empty.
module tb_tsu;
  import tascade_pkg::*;

  localparam int IQD = 8, OQD = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  chan_t pc_chan = chan_t'(1);
  logic [NUM_CHAN-1:0] inj_ready;
  logic [NUM_CHAN-1:0] pc_task_mask = 4'b0001;   // channel 0 runs the proxy task
  logic ej_valid, inj_valid, task_valid, task_ready, task_done;
  logic pu_push_valid, pu_push_ready, pc_push_valid, pc_oq_ready, flush_ok, ev_oq_hold;
  msg_t ej_msg, inj_msg, task_msg, pu_push_msg, pc_push_msg;
  logic [NUM_CHAN-1:0] iq_ready, iq_lt_half;

  tsu #(.IQ_DEPTH(IQD), .OQ_DEPTH(OQD)) dut (
    .clk, .rst_n, .pc_chan, .pc_task_mask, .ej_valid, .ej_msg, .iq_ready, .iq_lt_half,
    .inj_valid, .inj_msg, .inj_ready, .task_valid, .task_msg, .task_ready, .task_done,
    .pu_push_valid, .pu_push_msg, .pu_push_ready,
    .pc_push_valid, .pc_push_msg, .pc_oq_ready, .flush_ok, .ev_oq_hold
  );

  int checks = 0, failures = 0, n_hold = 0;
  msg_t exp_iq [NUM_CHAN][$];
  msg_t exp_oq [NUM_CHAN][$];
  logic busy_m;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  always @(posedge clk) if (ev_oq_hold) n_hold++;

  // injection monitor
  always @(posedge clk) if (rst_n && inj_valid) begin
    int c;
    c = int'(inj_msg.chan);
    check(inj_ready[c], "injection only into a channel with room");
    check(exp_oq[c].size() > 0, "injected message was pushed");
    if (exp_oq[c].size() > 0) begin
      check(inj_msg == exp_oq[c][0], "injection order per OQ");
      void'(exp_oq[c].pop_front());
    end
  end

  initial begin
    #3000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int sent, received;
    ej_valid = 0; ej_msg = '0; inj_ready = '0; task_ready = 0; task_done = 0;
    pu_push_valid = 0; pu_push_msg = '0; pc_push_valid = 0; pc_push_msg = '0;
    busy_m = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // ---------------- phase 1
    sent = 0; received = 0;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      // status vs model occupancy (before this cycle's changes)
      for (int c = 0; c < NUM_CHAN; c++) begin
        check(iq_ready[c] == (exp_iq[c].size() < IQD), "iq_ready");
        check(iq_lt_half[c] == (exp_iq[c].size() < IQD / 2), "iq_lt_half");
      end
      check(!(task_valid && busy_m), "no task while PU busy");
      // PU side
      task_done = 0;
      if (busy_m && $urandom_range(0, 3) == 0) begin
        task_done = 1; busy_m = 0;
      end
      task_ready = $urandom_range(0, 1);
      if (task_valid && task_ready) begin
        int c;
        c = int'(task_msg.chan);
        check(exp_iq[c].size() > 0 && task_msg == exp_iq[c][0], "task order per IQ");
        if (exp_iq[c].size() > 0) void'(exp_iq[c].pop_front());
        busy_m = 1; received++;
      end
      // network side
      ej_valid = 0;
      if (cyc < 2500 && $urandom_range(0, 2) != 0) begin
        ej_msg = '{chan: chan_t'($urandom), idx: $urandom, val: $urandom};
        if (iq_ready[ej_msg.chan]) begin
          ej_valid = 1;
          exp_iq[ej_msg.chan].push_back(ej_msg);
          sent++;
        end
      end
      @(posedge clk); #1;
      task_done = 0; ej_valid = 0; task_ready = 0;
    end
    check(sent == received && sent > 100, $sformatf("all %0d tasks scheduled (%0d)", sent, received));
    // finish a running task
    @(negedge clk); task_done = 1; busy_m = 0; @(negedge clk); task_done = 0;
    // ---------------- phase 2: OQ reservation
    inj_ready = '0;
    for (int k = 0; k < OQD; k++) begin
      @(negedge clk);
      pu_push_msg = '{chan: pc_chan, idx: idx_t'(100 + k), val: 0};
      pu_push_valid = 1;
      check(pu_push_ready, "PU may fill the OQ while idle");
      exp_oq[pc_chan].push_back(pu_push_msg);
      @(negedge clk); pu_push_valid = 0;
    end
    check(!pc_oq_ready, "OQ full");
    ej_msg = '{chan: chan_t'(0), idx: 7, val: 7}; ej_valid = 1;
    @(negedge clk); ej_valid = 0;
    repeat (5) begin
      @(negedge clk);
      check(!task_valid, "task held while P-cache OQ is full");
    end
    check(n_hold > 0, "hold strobe seen");
    // a task that does not write the P-cache is not held
    ej_msg = '{chan: chan_t'(2), idx: 8, val: 8}; ej_valid = 1;
    @(negedge clk); ej_valid = 0;
    @(negedge clk);
    check(task_valid && task_msg.chan == chan_t'(2), "non-proxy task not held by the reservation");
    task_ready = 1; @(negedge clk); task_ready = 0;
    task_done = 1; @(negedge clk); task_done = 0;
    check(!task_valid, "proxy task still held");
    // drain one entry: the task may start
    inj_ready = '1; @(negedge clk); inj_ready = '0;
    check(task_valid && task_msg.chan == chan_t'(0), "task released when a slot is free");
    task_ready = 1; @(negedge clk); task_ready = 0;
    // PU push into the P-cache OQ now has to keep the reserved slot
    pu_push_msg = '{chan: pc_chan, idx: 999, val: 0}; pu_push_valid = 1;
    #1;
    check(!pu_push_ready, "reserved slot not given to the PU");
    @(negedge clk); pu_push_valid = 0;
    // P-cache pushes its update into the reserved slot
    pc_push_msg = '{chan: pc_chan, idx: 555, val: 5}; pc_push_valid = 1;
    exp_oq[pc_chan].push_back(pc_push_msg);
    @(negedge clk); pc_push_valid = 0;
    task_done = 1; @(negedge clk); task_done = 0;
    // other OQs are not limited by the reservation
    pu_push_msg = '{chan: chan_t'(2), idx: 42, val: 1}; pu_push_valid = 1;
    #1; check(pu_push_ready, "other OQ accepts");
    exp_oq[2].push_back(pu_push_msg);
    @(negedge clk); pu_push_valid = 0;
    // ---------------- phase 3: drain
    check(!flush_ok, "no flush_ok while OQs hold messages");
    inj_ready = '1;
    repeat (30) @(negedge clk);
    for (int c = 0; c < NUM_CHAN; c++) check(exp_oq[c].size() == 0, "OQ drained");
    check(flush_ok, "flush_ok when idle and empty");
    $display("holds=%0d tasks=%0d", n_hold, received);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

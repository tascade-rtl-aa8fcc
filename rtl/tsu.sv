// tsu: task scheduling unit of a Tascade tile.
//
// Holds one input queue (IQ) per task type and one output queue (OQ) per
// channel.
//  * Arriving messages (from the router's ejection port) go into IQ[chan].
//    iq_ready (not full) and iq_lt_half (occupancy < IQ_DEPTH/2) go back to
//    the router; the second one drives selective cascading.
//  * Scheduling: when the PU is free, the next non-empty IQ in round-robin
//    order hands its head to the PU (task_valid/task_ready). The PU is busy
//    until it pulses task_done. A task is only started when the OQ of the
//    P-cache's channel has a free slot, and that slot stays reserved while the
//    task runs, so a P-cache update or eviction caused by the task never
//    finds the OQ full (one P-cache write per task is assumed). Only task
//    types marked in pc_task_mask (those that write the P-cache, the proxy
//    tasks) wait for that slot; other tasks are scheduled regardless, which
//    keeps the owners draining the network while an OQ is full.
//  * The PU and the P-cache push into the OQs; the P-cache has priority and
//    the PU is held off (pu_push_ready low) in a cycle where both target the
//    same OQ. A PU push into the P-cache's OQ may not use the reserved slot.
//  * The OQs are drained into the router's local input, round-robin over
//    the OQs whose channel buffer in the router has room.
//  * flush_ok tells the P-cache that the PU is idle (no task running, no task
//    waiting) and every OQ is empty: the condition for write-back
//    self-invalidation.
//
// From the paper: IQ per task type, OQs drained into the NoC, the OQ space
// guarantee for the P-cache and the idle/empty condition. Queue depths,
// arbitration and the handshakes are this design's choices.
module tsu
  import tascade_pkg::*;
#(
  parameter int unsigned IQ_DEPTH = 8,
  parameter int unsigned OQ_DEPTH = 8
) (
  input  logic                clk,
  input  logic                rst_n,
  input  chan_t               pc_chan,        // P-cache update channel (config register)
  input  logic [NUM_CHAN-1:0] pc_task_mask,   // task types that may write the P-cache
  // from router ejection
  input  logic                ej_valid,
  input  msg_t                ej_msg,
  output logic [NUM_CHAN-1:0] iq_ready,
  output logic [NUM_CHAN-1:0] iq_lt_half,
  // to router local input (inj_valid implies room)
  output logic                inj_valid,
  output msg_t                inj_msg,
  input  logic [NUM_CHAN-1:0] inj_ready,      // router buffer of each channel has room
  // PU task dispatch
  output logic                task_valid,
  output msg_t                task_msg,       // .chan is the task type
  input  logic                task_ready,
  input  logic                task_done,
  // PU spawns
  input  logic                pu_push_valid,
  input  msg_t                pu_push_msg,
  output logic                pu_push_ready,
  // P-cache spawns
  input  logic                pc_push_valid,
  input  msg_t                pc_push_msg,
  output logic                pc_oq_ready,
  output logic                flush_ok,
  // event strobe: a waiting task was held back by the OQ reservation
  output logic                ev_oq_hold
);

  localparam int unsigned ICW = $clog2(IQ_DEPTH + 1);
  localparam int unsigned OCW = $clog2(OQ_DEPTH + 1);

  msg_t [NUM_CHAN-1:0]           iq_head, oq_head;
  logic [NUM_CHAN-1:0]           iq_empty, iq_full, iq_pop;
  logic [NUM_CHAN-1:0]           oq_empty, oq_full, oq_push, oq_pop;
  logic [NUM_CHAN-1:0][ICW-1:0]  iq_cnt;
  logic [NUM_CHAN-1:0][OCW-1:0]  oq_cnt;
  msg_t [NUM_CHAN-1:0]           oq_wdata;

  logic  busy;
  chan_t sched_rr, inj_rr;

  for (genvar c = 0; c < NUM_CHAN; c++) begin : g_q
    sync_fifo #(.T(msg_t), .DEPTH(IQ_DEPTH)) u_iq (
      .clk, .rst_n,
      .push(ej_valid && ej_msg.chan == chan_t'(c) && !iq_full[c]), .wdata(ej_msg),
      .pop(iq_pop[c]), .rdata(iq_head[c]),
      .full(iq_full[c]), .empty(iq_empty[c]), .count(iq_cnt[c])
    );
    sync_fifo #(.T(msg_t), .DEPTH(OQ_DEPTH)) u_oq (
      .clk, .rst_n,
      .push(oq_push[c]), .wdata(oq_wdata[c]),
      .pop(oq_pop[c]), .rdata(oq_head[c]),
      .full(oq_full[c]), .empty(oq_empty[c]), .count(oq_cnt[c])
    );
    assign iq_ready[c]   = !iq_full[c];
    assign iq_lt_half[c] = 32'(iq_cnt[c]) < IQ_DEPTH / 2;
  end

  // ------------------------------------------------------------ OQ writes
  logic pc_slot_free;   // OQ[pc_chan] has a slot beyond the reserved one
  always_comb begin
    pc_slot_free  = 32'(oq_cnt[pc_chan]) + (busy ? 1 : 0) < OQ_DEPTH;
    pc_oq_ready   = !oq_full[pc_chan];
    pu_push_ready = !oq_full[pu_push_msg.chan];
    if (pu_push_msg.chan == pc_chan && (!pc_slot_free || pc_push_valid))
      pu_push_ready = 1'b0;
    oq_push  = '0;
    oq_wdata = '0;
    for (int c = 0; c < NUM_CHAN; c++) begin
      if (pc_push_valid && pc_chan == chan_t'(c)) begin
        oq_push[c]  = 1'b1;
        oq_wdata[c] = pc_push_msg;
      end else if (pu_push_valid && pu_push_ready && pu_push_msg.chan == chan_t'(c)) begin
        oq_push[c]  = 1'b1;
        oq_wdata[c] = pu_push_msg;
      end
    end
  end

  // ------------------------------------------------------------ injection
  always_comb begin
    chan_t sel;
    logic  found;
    found = 1'b0;
    sel   = '0;
    for (int k = 0; k < NUM_CHAN; k++) begin
      chan_t c;
      c = chan_t'((32'(inj_rr) + k) % NUM_CHAN);
      if (!found && !oq_empty[c] && inj_ready[c]) begin
        found = 1'b1;
        sel   = c;
      end
    end
    inj_valid = found;
    inj_msg   = oq_head[sel];
    oq_pop    = '0;
    if (found) oq_pop[sel] = 1'b1;
  end

  // ------------------------------------------------------------ scheduling
  chan_t sched_sel;
  logic  sched_found, pc_hold;
  logic [NUM_CHAN-1:0] sched_ok;
  always_comb begin
    // a P-cache-writing task waits while the P-cache's OQ is full; it does
    // not block the other task types
    pc_hold  = oq_full[pc_chan];
    sched_ok = ~iq_empty & ~(pc_task_mask & {NUM_CHAN{pc_hold}});
    sched_found = 1'b0;
    sched_sel   = '0;
    for (int k = 0; k < NUM_CHAN; k++) begin
      chan_t c;
      c = chan_t'((32'(sched_rr) + k) % NUM_CHAN);
      if (!sched_found && sched_ok[c]) begin
        sched_found = 1'b1;
        sched_sel   = c;
      end
    end
    task_valid  = !busy && sched_found;
    task_msg    = iq_head[sched_sel];
    iq_pop      = '0;
    if (task_valid && task_ready) iq_pop[sched_sel] = 1'b1;
    ev_oq_hold  = !busy && pc_hold && |(~iq_empty & pc_task_mask);
    flush_ok    = !busy && (&iq_empty) && (&oq_empty);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      sched_rr <= '0;
      inj_rr   <= '0;
    end else begin
      if (task_valid && task_ready) begin
        busy     <= 1'b1;
        sched_rr <= chan_t'((32'(sched_sel) + 1) % NUM_CHAN);
      end else if (task_done) begin
        busy <= 1'b0;
      end
      if (inj_valid)
        inj_rr <= chan_t'((32'(inj_msg.chan) + 1) % NUM_CHAN);
    end
  end

  // The reserved slot makes a P-cache push always find room.
  a_pc_room: assert property (@(posedge clk) disable iff (!rst_n)
                              pc_push_valid |-> !oq_full[pc_chan]);

endmodule

// tb_pcache: self-checking test of the proxy cache.
//
// A 16x16 grid with 4x4 proxy regions and 4-element chunks: the tile at
// (1,2) is proxy for 16 regions x 4 elements = 64 elements, cached in 16
// lines (pc_log_lines = 4), so tags are 2 bits and conflicts are frequent.
// A reference model keeps, per line, the index and value it should hold,
// with the line number computed arithmetically (region number * chunk +
// offset, modulo 16). Random reads and writes are issued in write-through and
// write-back mode; the test checks read data (default on a miss), the
// one-cycle read latency, every message pushed (write-through: each write;
// write-back: each victim, with its rebuilt global index), and finally the
// write-back self-invalidation, which must send every valid line once and
// leave the cache clean. An index outside the configured local fraction
// must raise cfg_err.
module tb_pcache;
  import tascade_pkg::*;

  localparam int GW = 16, LINES = 64, CH = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  tile_cfg_t cfg;
  logic  req_valid, req_ready, req_we, rsp_valid, rsp_hit;
  idx_t  req_idx;
  data_t req_wdata, rsp_data;
  logic  push_valid, oq_ready, flush_ok, clean, cfg_err;
  msg_t  push_msg;
  logic  ev_hit, ev_miss, ev_evict, ev_flush;

  pcache #(.GRID_W(GW), .LINES(LINES), .TAG_W(8)) dut (
    .clk, .rst_n, .cfg, .id_x(coord_t'(1)), .id_y(coord_t'(2)),
    .req_valid, .req_ready, .req_we, .req_idx, .req_wdata,
    .rsp_valid, .rsp_data, .rsp_hit,
    .push_valid, .push_msg, .oq_ready, .flush_ok, .clean, .cfg_err,
    .ev_hit, .ev_miss, .ev_evict, .ev_flush
  );

  int checks = 0, failures = 0;
  int n_evict = 0, n_hit = 0, n_miss = 0, n_flush = 0;
  msg_t got[$];

  always @(posedge clk) if (rst_n && push_valid) got.push_back(push_msg);
  always @(posedge clk) begin
    if (ev_evict) n_evict++;
    if (ev_hit) n_hit++;
    if (ev_miss) n_miss++;
    if (ev_flush) n_flush++;
  end

  // reference
  logic  m_valid [16];
  idx_t  m_idx   [16];
  data_t m_data  [16];

  function automatic idx_t make_idx(input int rx, input int ry, input int off);
    int ox, oy;
    ox = rx * 4 + 1; oy = ry * 4 + 2;
    return idx_t'((oy * GW + ox) * CH + off);
  endfunction
  function automatic int line_of(input int rx, input int ry, input int off);
    return ((ry * 4 + rx) * CH + off) % 16;
  endfunction

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic do_op(input logic we, input int rx, input int ry, input int off,
                       input data_t wd, input wpolicy_e pol);
    int l;
    idx_t ix;
    msg_t exp[$];
    ix = make_idx(rx, ry, off);
    l  = line_of(rx, ry, off);
    while (!req_ready) @(negedge clk);
    req_valid = 1; req_we = we; req_idx = ix; req_wdata = wd;
    got.delete();
    @(negedge clk);
    req_valid = 0;
    // S_OP cycle: response is visible now, one cycle after acceptance
    if (!we) begin
      check(rsp_valid, "read response one cycle after acceptance");
      if (m_valid[l] && m_idx[l] == ix) check(rsp_data == m_data[l], "read hit data");
      else check(rsp_data == cfg.pc_default, "read miss returns default");
    end else begin
      if (pol == WRITE_THROUGH)
        exp.push_back('{chan: cfg.pc_chan, idx: ix, val: wd});
      else if (m_valid[l] && m_idx[l] != ix)
        exp.push_back('{chan: cfg.pc_chan, idx: m_idx[l], val: m_data[l]});
      m_valid[l] = 1; m_idx[l] = ix; m_data[l] = wd;
    end
    @(negedge clk);
    check(got.size() == exp.size(), $sformatf("push count %0d expected %0d", got.size(), exp.size()));
    for (int i = 0; i < exp.size() && i < got.size(); i++)
      check(got[i] == exp[i], $sformatf("pushed msg idx=%0d val=%0d expected idx=%0d val=%0d",
                                        got[i].idx, got[i].val, exp[i].idx, exp[i].val));
  endtask

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cfg = '0;
    cfg.proxy_enabled = 1; cfg.proxy_mask_x = 4'b0000; cfg.proxy_mask_y = 4'b0000;
    cfg.log_chunk = 5'd2; cfg.pc_local_size = 64; cfg.pc_log_lines = 5'd4;
    cfg.pc_chan = chan_t'(1); cfg.pc_default = 32'hFFFF_FFFF; cfg.pc_policy = WRITE_THROUGH;
    req_valid = 0; req_we = 0; req_idx = 0; req_wdata = 0; oq_ready = 1; flush_ok = 0;
    foreach (m_valid[i]) m_valid[i] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int pass = 0; pass < 2; pass++) begin
      wpolicy_e pol;
      pol = pass == 0 ? WRITE_THROUGH : WRITE_BACK;
      cfg.pc_policy = pol;
      cfg.pc_default = pass == 0 ? 32'hFFFF_FFFF : 32'd0;
      for (int it = 0; it < 600; it++)
        do_op($urandom_range(0, 1), $urandom_range(0, 3), $urandom_range(0, 3),
              $urandom_range(0, 3), $urandom, pol);
      if (pass == 0) begin
        // write-through never self-invalidates: the lines stay
        got.delete();
        flush_ok = 1;
        repeat (50) @(negedge clk);
        check(!clean && got.size() == 0, "no flush in write-through");
        flush_ok = 0;
        // invalidate the reference by running write-back over a fresh reset
        rst_n = 0; @(negedge clk); rst_n = 1;
        foreach (m_valid[i]) m_valid[i] = 0;
      end
    end
    // write-back self-invalidation
    begin
      int nvalid;
      msg_t exp[$];
      nvalid = 0;
      foreach (m_valid[i]) if (m_valid[i]) begin
        nvalid++;
        exp.push_back('{chan: cfg.pc_chan, idx: m_idx[i], val: m_data[i]});
      end
      got.delete();
      flush_ok = 1;
      // the OQ drains only every third cycle
      for (int c = 0; c < 400 && !clean; c++) begin
        oq_ready = (c % 3 == 0);
        @(negedge clk);
      end
      oq_ready = 1;
      flush_ok = 0;
      @(negedge clk);
      check(clean, "cache clean after self-invalidation");
      check(got.size() == nvalid, $sformatf("flushed %0d lines, %0d valid", got.size(), nvalid));
      foreach (exp[i]) begin
        int found;
        found = 0;
        foreach (got[j]) if (got[j] == exp[i]) found++;
        check(found == 1, $sformatf("line idx=%0d flushed once", exp[i].idx));
      end
      // after the flush every read misses
      for (int off = 0; off < 4; off++) begin
        do_op(0, 0, 0, off, 0, WRITE_BACK);
      end
    end
    // out-of-range access
    check(!cfg_err, "no cfg_err in range");
    cfg.pc_local_size = 32;
    do_op(0, 3, 3, 0, 0, WRITE_BACK);
    check(cfg_err, "cfg_err outside local fraction");
    check(n_evict > 0 && n_hit > 0 && n_miss > 0 && n_flush > 0, "all P-cache events seen");
    $display("hits=%0d misses=%0d evictions=%0d flushed=%0d", n_hit, n_miss, n_evict, n_flush);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

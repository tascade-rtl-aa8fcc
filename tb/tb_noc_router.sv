// tb_noc_router: self-checking test of the router with cascading.
//
// One router at (5,6) of a 16x16 torus, 4-element chunks. Messages with
// random owners are sent one at a time on a random input port; the test
// works out, independently of the design, where each must leave:
//   * the destination: the owner, or for a DST_PROXY channel the tile with
//     the owner's position inside the router's own region;
//   * at the destination it is ejected on its own channel;
//   * on a network input, at a proxy position of a capturable channel, it is
//     ejected on the proxy task's channel when proxies are enabled and the
//     proxy IQ is under half full or the output opposite the input is full;
//   * otherwise it leaves on the torus-shortest X-then-Y direction,
//     one cycle after it was written into the input buffer.
// Four phases vary proxy enable, IQ occupancy and a congested output. A last
// burst sends five messages to one output in the same cycle and checks that
// all five leave in five consecutive cycles.
module tb_noc_router;
  import tascade_pkg::*;

  localparam int GW = 16, GH = 16, CH = 4;
  localparam int MX = 5, MY = 6;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  tile_cfg_t cfg;
  logic [NPORTS-1:0] in_valid;
  logic [NPORTS-1:0][NUM_CHAN-1:0] in_ready;
  msg_t [NPORTS-1:0] in_msg;
  logic [3:0] out_valid, out_ready;   // out_ready: per port, same for every channel
  logic [3:0][NUM_CHAN-1:0] out_ready_c;
  always_comb for (int o = 0; o < 4; o++) out_ready_c[o] = {NUM_CHAN{out_ready[o]}};
  msg_t [3:0] out_msg;
  logic ej_valid, ev_capture, ev_pass_proxy;
  msg_t ej_msg;
  logic [NUM_CHAN-1:0] iq_ready, iq_lt_half;

  noc_router #(.GRID_W(GW), .GRID_H(GH), .IN_DEPTH(4)) dut (
    .clk, .rst_n, .cfg, .id_x(coord_t'(MX)), .id_y(coord_t'(MY)),
    .in_valid, .in_msg, .in_ready, .out_valid, .out_msg, .out_ready(out_ready_c),
    .ej_valid, .ej_msg, .iq_ready, .iq_lt_half, .ev_capture, .ev_pass_proxy
  );

  int checks = 0, failures = 0;
  int n_cap = 0, n_eject = 0, n_fwd = 0, n_cap_cong = 0, n_pass = 0;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  function automatic int tdir(input int c, input int d, input int n, input int plus, input int minus);
    int fwd;
    fwd = (d - c + n) % n;
    return (fwd <= n / 2) ? plus : minus;
  endfunction

  // expected output: 0..3 = N,S,E,W, 4 = ejection; exp_chan on ejection
  task automatic expect_out(input msg_t m, input int port, input int w,
                            input logic capsel, output int o, output chan_t ch);
    int ox, oy, dx, dy, tile;
    tile = int'(m.idx) / CH;
    ox = tile % GW; oy = tile / GW;
    if (cfg.chan[m.chan].dst == DST_PROXY) begin
      dx = (MX / w) * w + ox % w; dy = (MY / w) * w + oy % w;
    end else begin
      dx = ox; dy = oy;
    end
    ch = m.chan;
    if (dx == MX && dy == MY) begin
      o = 4;
    end else if (port < 4 && cfg.proxy_enabled && cfg.chan[m.chan].cap_en &&
                 (dx % w) == (MX % w) && (dy % w) == (MY % w) && capsel &&
                 iq_ready[cfg.chan[m.chan].cap_chan]) begin
      o = 4; ch = cfg.chan[m.chan].cap_chan;
    end else if (dx != MX) o = tdir(MX, dx, GW, 2, 3);
    else o = tdir(MY, dy, GH, 1, 0);
  endtask

  task automatic send_one(input int port, input msg_t m, input int o, input chan_t ch);
    @(negedge clk);
    in_valid = '0; in_valid[port] = 1'b1; in_msg[port] = m;
    @(negedge clk);
    in_valid = '0;
    // head is in the buffer now: it must leave in this cycle
    #1;
    if (o == 4) begin
      check(ej_valid && ej_msg.idx == m.idx && ej_msg.val == m.val && ej_msg.chan == ch,
            $sformatf("ejected on chan %0d (port %0d)", ch, port));
    end else begin
      check(out_valid[o] && out_msg[o] == m, $sformatf("forwarded to %0d from %0d", o, port));
      check(!ej_valid, "not ejected");
    end
  endtask

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (ev_pass_proxy) n_pass++;

  initial begin
    cfg = '0;
    cfg.log_chunk = 5'd2;
    cfg.chan[0] = '{dst: DST_PROXY, cap_en: 1'b0, cap_chan: chan_t'(0)};
    cfg.chan[1] = '{dst: DST_OWNER, cap_en: 1'b1, cap_chan: chan_t'(0)};
    cfg.chan[2] = '{dst: DST_OWNER, cap_en: 1'b0, cap_chan: chan_t'(0)};
    cfg.chan[3] = '{dst: DST_OWNER, cap_en: 1'b1, cap_chan: chan_t'(2)};
    in_valid = '0; in_msg = '0; out_ready = 4'hF; iq_ready = '1; iq_lt_half = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int phase = 0; phase < 5; phase++) begin
      int w;
      w = (phase % 2 == 0) ? 4 : 8;
      cfg.proxy_mask_x = (w == 4) ? 4'b0000 : 4'b0001;
      cfg.proxy_mask_y = cfg.proxy_mask_x;
      cfg.proxy_enabled = (phase != 0);
      iq_lt_half = (phase == 1 || phase == 4) ? '1 : '0;
      out_ready  = (phase == 3) ? 4'b1101 : 4'hF;    // S output congested in phase 3
      iq_ready   = (phase == 4) ? 4'b1110 : 4'hF;    // proxy IQ 0 full in phase 4
      repeat (3) @(negedge clk);
      for (int it = 0; it < 600; it++) begin
        msg_t m;
        int port, o, ox, oy;
        chan_t ch;
        logic capsel;
        port = $urandom_range(0, 4);
        // bias owners towards proxy positions of this router
        if ($urandom_range(0, 1) == 0) begin
          ox = ($urandom_range(0, GW - 1) / w) * w + MX % w;
          oy = ($urandom_range(0, GH - 1) / w) * w + MY % w;
        end else begin
          ox = $urandom_range(0, GW - 1); oy = $urandom_range(0, GH - 1);
        end
        m.chan = chan_t'($urandom);
        m.idx  = idx_t'((oy * GW + ox) * CH + $urandom_range(0, CH - 1));
        m.val  = $urandom;
        // opposite-facing output of the input port full, or proxy IQ < half
        capsel = (port < 4) &&
                 (iq_lt_half[cfg.chan[m.chan].cap_chan] ||
                  !out_ready[(port == 0) ? 1 : (port == 1) ? 0 : (port == 2) ? 3 : 2]);
        expect_out(m, port, w, capsel, o, ch);
        if (o < 4 && !out_ready[o]) continue;     // would wait on the congested port
        if (o == 4 && !iq_ready[ch]) continue;    // would wait on a full IQ
        send_one(port, m, o, ch);
        if (o == 4 && ch != m.chan) begin
          n_cap++;
          if (phase == 3) n_cap_cong++;
        end else if (o == 4) n_eject++;
        else n_fwd++;
      end
    end
    // burst: five inputs to the east output in one cycle
    out_ready = 4'hF;
    cfg.proxy_enabled = 0;
    @(negedge clk);
    for (int p = 0; p < NPORTS; p++) begin
      in_valid[p] = 1'b1;
      in_msg[p] = '{chan: chan_t'(2), idx: idx_t'((MY * GW + MX + 2) * CH), val: data_t'(p)};
    end
    @(negedge clk);
    in_valid = '0;
    begin
      logic [NPORTS-1:0] seen;
      seen = '0;
      for (int k = 0; k < NPORTS; k++) begin
        #1;
        check(out_valid[2], "burst: one message per cycle on E");
        if (out_valid[2]) seen[out_msg[2].val] = 1'b1;
        @(negedge clk);
      end
      check(seen == '1, "burst: all five inputs served");
    end
    check(n_cap > 0 && n_cap_cong > 0 && n_eject > 0 && n_fwd > 0 && n_pass > 0,
          "captures, congestion captures, ejections, forwards and pass-bys all seen");
    $display("captured=%0d (congestion %0d) ejected=%0d forwarded=%0d passed_proxy=%0d",
             n_cap, n_cap_cong, n_eject, n_fwd, n_pass);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_cascade_select: self-checking test of the proxy-capture decision.
//
// Random tile coordinates, region masks (4..64-wide regions), proxy enable,
// output-buffer-full flags and IQ-occupancy flags are applied and registered
// for one cycle; then random destinations (a third of them aimed at a proxy
// position, a third at the tile itself) are presented on the four input
// ports. The expected is_dest / go_to_proxy / route_to_core are computed with
// modulo arithmetic on the region width, independently of the bit-slicing of
// the design: a tile is a proxy when dest mod W equals id mod W on both axes,
// and the message is selected when the proxy IQ is under half full or the
// output opposite the input port was full in the previous cycle.
module tb_cascade_select;
  import tascade_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                proxy_enabled;
  logic [MASK_W-1:0]   mask_x, mask_y;
  coord_t              id_x, id_y;
  logic [3:0]          out_full;
  logic [NUM_CHAN-1:0] iq_lt_half;
  coord_t [3:0]        dest_x, dest_y;
  logic [3:0]          cap_en;
  chan_t [3:0]         cap_chan;
  logic [3:0]          is_dest, go_to_proxy, route_to_core;

  int checks = 0, failures = 0;
  int n_capture = 0, n_dest = 0, n_sel_iq = 0, n_sel_full = 0;

  cascade_select dut (
    .clk, .rst_n, .proxy_enabled, .proxy_mask_x(mask_x), .proxy_mask_y(mask_y),
    .id_x, .id_y, .out_full, .iq_lt_half, .dest_x, .dest_y, .cap_en, .cap_chan,
    .is_dest, .go_to_proxy, .route_to_core
  );

  function automatic logic [3:0] mask_of(input int k);
    case (k)
      0: return 4'b0000; 1: return 4'b0001; 2: return 4'b0011;
      3: return 4'b0111; default: return 4'b1111;
    endcase
  endfunction

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [3:0] full_prev;
    logic [NUM_CHAN-1:0] iq_prev;
    logic en_prev;
    int wx, wy;
    proxy_enabled = 0; mask_x = 0; mask_y = 0; id_x = 0; id_y = 0;
    out_full = 0; iq_lt_half = 0; dest_x = '0; dest_y = '0; cap_en = 0; cap_chan = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int it = 0; it < 2000; it++) begin
      @(negedge clk);
      mask_x = mask_of($urandom_range(0, 4));
      mask_y = (it % 3 == 0) ? mask_x : mask_of($urandom_range(0, 4));
      id_x = coord_t'($urandom_range(0, 127));
      id_y = coord_t'($urandom_range(0, 127));
      proxy_enabled = ($urandom_range(0, 7) != 0);
      out_full   = 4'($urandom);
      iq_lt_half = NUM_CHAN'($urandom);
      full_prev = out_full; iq_prev = iq_lt_half; en_prev = proxy_enabled;
      @(negedge clk);  // registers have sampled
      out_full   = 4'($urandom);   // must not matter until next edge
      iq_lt_half = NUM_CHAN'($urandom);
      wx = 4 << ($countones(mask_x));
      wy = 4 << ($countones(mask_y));
      for (int p = 0; p < 4; p++) begin
        int kind;
        kind = $urandom_range(0, 2);
        if (kind == 0) begin        // a proxy position in some other region
          dest_x[p] = coord_t'(($urandom_range(0, 127) / wx) * wx + (id_x % wx));
          dest_y[p] = coord_t'(($urandom_range(0, 127) / wy) * wy + (id_y % wy));
        end else if (kind == 1) begin
          dest_x[p] = id_x; dest_y[p] = id_y;
        end else begin
          dest_x[p] = coord_t'($urandom_range(0, 127));
          dest_y[p] = coord_t'($urandom_range(0, 127));
        end
        cap_en[p]   = ($urandom_range(0, 3) != 0);
        cap_chan[p] = chan_t'($urandom);
      end
      #1;
      for (int p = 0; p < 4; p++) begin
        logic exp_dest, exp_proxy, exp_sel, exp_go;
        int opp;
        opp = (p == 0) ? 1 : (p == 1) ? 0 : (p == 2) ? 3 : 2;
        exp_dest  = (dest_x[p] == id_x) && (dest_y[p] == id_y);
        exp_proxy = ((dest_x[p] % wx) == (id_x % wx)) && ((dest_y[p] % wy) == (id_y % wy));
        exp_sel   = en_prev && (iq_prev[cap_chan[p]] || full_prev[opp]);
        exp_go    = exp_proxy && exp_sel && cap_en[p];
        checks += 3;
        if (is_dest[p] !== exp_dest) begin
          failures++; $display("is_dest mismatch it=%0d p=%0d", it, p);
        end
        if (go_to_proxy[p] !== exp_go) begin
          failures++; $display("go_to_proxy mismatch it=%0d p=%0d exp=%0b", it, p, exp_go);
        end
        if (route_to_core[p] !== (exp_go || exp_dest)) begin
          failures++; $display("route_to_core mismatch it=%0d p=%0d", it, p);
        end
        if (exp_go && !exp_dest) n_capture++;
        if (exp_dest) n_dest++;
        if (exp_go && iq_prev[cap_chan[p]] && !full_prev[opp]) n_sel_iq++;
        if (exp_go && !iq_prev[cap_chan[p]] && full_prev[opp]) n_sel_full++;
      end
    end
    // each reason for capturing must have been exercised
    checks++;
    if (n_capture == 0 || n_dest == 0 || n_sel_iq == 0 || n_sel_full == 0) begin
      failures++;
      $display("coverage hole: capture=%0d dest=%0d iq=%0d full=%0d",
               n_capture, n_dest, n_sel_iq, n_sel_full);
    end
    $display("captures=%0d owner=%0d by_iq=%0d by_congestion=%0d",
             n_capture, n_dest, n_sel_iq, n_sel_full);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

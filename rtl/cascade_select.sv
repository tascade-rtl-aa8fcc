// cascade_select: the cascading additions to the router's destination check.
//
// For each of the four network input ports (N,S,E,W) it decides, from the
// destination coordinates of the message at the head of that port:
//   is_dest       the tile owns the index (full 16-bit X and Y compare);
//   is_proxy      the tile sits at the same coordinates inside its proxy
//                 region as the owner does inside its own, i.e.
//                 {dest[5:2] & mask, dest[1:0]} == id_within for X and Y;
//   go_to_proxy   is_proxy_x & is_proxy_y & select_msg & the channel is one
//                 a proxy may capture;
//   route_to_core go_to_proxy | is_dest.
// select_msg is the selective-cascading rule: capture when the proxy task's
// input queue is less than half full, or when the output buffer opposite to
// the input port (the way straight ahead) was full in the previous cycle.
//
// This follows the paper's router snippet line by line, with three changes
// that are this design's own:
//  * the "buffer full" register has one bit per input port (4 bits), the
//    snippet declares it [1:0] but indexes it with a 2-bit port number;
//  * the IQ-occupancy register is kept per task channel, and the bit of the
//    channel the message would be captured into is used (the snippet has a
//    single bit for its single proxy task);
//  * the capture test also requires the channel to be marked capturable, so
//    only owner-bound channels (like CQ3) are cascaded.
// The snippet's comment says "<= half" while the text says "less than half";
// the text (and the register's name, lt_half) is followed: the TSU supplies
// occupancy < depth/2.
//
// Timing: id_within, the buffer-full bits and the IQ bits are registered
// (the snippet's flops); everything else is combinational, one cycle.
module cascade_select
  import tascade_pkg::*;
(
  input  logic                        clk,
  input  logic                        rst_n,
  // configuration registers (held by the tile)
  input  logic                        proxy_enabled,
  input  logic [MASK_W-1:0]           proxy_mask_x,
  input  logic [MASK_W-1:0]           proxy_mask_y,
  input  coord_t                      id_x,
  input  coord_t                      id_y,
  // status sampled every cycle
  input  logic [3:0]                  out_full,     // N,S,E,W output towards neighbour is full
  input  logic [NUM_CHAN-1:0]         iq_lt_half,   // IQ occupancy < half, per task channel
  // per network input port N,S,E,W
  input  coord_t [3:0]                dest_x,
  input  coord_t [3:0]                dest_y,
  input  logic   [3:0]                cap_en,       // message's channel may be captured
  input  chan_t  [3:0]                cap_chan,     // IQ it would be captured into
  output logic   [3:0]                is_dest,
  output logic   [3:0]                go_to_proxy,
  output logic   [3:0]                route_to_core
);

  logic [WITHIN_W-1:0] id_x_within, id_y_within;
  logic [3:0]          opposite_port_buffer_full_r;
  logic [NUM_CHAN-1:0] pu_iq_lt_half_full_r;

  // Opposite-facing output of an input port: N<->S, E<->W.
  function automatic int unsigned opposite(input int unsigned p);
    case (p)
      0:       return 1;   // N -> S
      1:       return 0;   // S -> N
      2:       return 3;   // E -> W
      default: return 2;   // W -> E
    endcase
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      id_x_within                 <= '0;
      id_y_within                 <= '0;
      opposite_port_buffer_full_r <= '0;
      pu_iq_lt_half_full_r        <= '0;
    end else begin
      // flopped to take a gate off the critical path, as in the snippet
      id_x_within <= {id_x[5:2] & proxy_mask_x, id_x[1:0]};
      id_y_within <= {id_y[5:2] & proxy_mask_y, id_y[1:0]};
      for (int p = 0; p < 4; p++)
        opposite_port_buffer_full_r[p] <= out_full[opposite(p)] & proxy_enabled;
      pu_iq_lt_half_full_r <= iq_lt_half & {NUM_CHAN{proxy_enabled}};
    end
  end

  always_comb begin
    for (int p = 0; p < 4; p++) begin
      logic select_msg, is_proxy_x, is_proxy_y;
      select_msg  = pu_iq_lt_half_full_r[cap_chan[p]] || opposite_port_buffer_full_r[p];
      is_proxy_x  = {dest_x[p][5:2] & proxy_mask_x, dest_x[p][1:0]} == id_x_within;
      is_proxy_y  = {dest_y[p][5:2] & proxy_mask_y, dest_y[p][1:0]} == id_y_within;
      go_to_proxy[p]   = is_proxy_x && is_proxy_y && select_msg && cap_en[p];
      is_dest[p]       = (dest_x[p] == id_x) && (dest_y[p] == id_y);
      route_to_core[p] = go_to_proxy[p] || is_dest[p];
    end
  end

endmodule

// router: radix-5 tile-NoC router with selective cascading.
//
// Messages carry no header. At every hop the router derives the destination
// tile from the message's first parameter (a global array index) and the
// configuration of the message's logical channel: the index is shifted by
// log2(elements per tile) and the low bits give the tile's x and y; a
// channel that targets a proxy instead places the array over the proxy
// region that contains this router. Routing is dimension-ordered, X first.
// Each dimension is a ring when the grid is configured as a torus (the
// shorter way round is taken) or a line when it is a mesh. Deadlock in the
// rings is avoided with bubble flow control: a message entering a ring (an
// injection, or a turn from X to Y) needs two free slots downstream, a
// message staying in its ring needs one.
//
// Selective cascading: a message on an owner-bound channel with a proxy
// configured, passing through the tile that is its proxy in this router's
// region, is ejected here as a proxy task when the tile is free and the
// output towards the owner is blocked; otherwise it continues. "Free" is
// taken as: the proxy task's input queue is empty (cascade_free); "blocked"
// as: the next router cannot take the message this cycle.
//
// The paper gives header-free index routing, XY dimension order, torus or
// mesh per dimension, bubble routing and the cascading rule. Input buffers
// of RBUF entries per port, round-robin output arbitration among inputs,
// one message per link per cycle, the port numbering (north = y-1,
// east = x+1) are this design's choices.
//
// Interface: in_fwd/in_bwd are the five input links (index port_e), out_fwd/
// out_bwd the five outputs; port P_LOCAL is the tile (injection in, ejection
// out with eject_task naming the input queue, taken when eject_ready of that
// queue is set, so the local out_bwd entry is not used). A message moves from a
// buffer head to the next router in one cycle.
module router
  import tascade_pkg::*;
#(
  parameter int RBUF = 4            // buffer entries per input port
) (
  input  logic               clk,
  input  logic               rst_n,
  input  grid_cfg_t          grid,
  input  chan_cfg_t          chan_cfg [NUM_CHANNELS],
  input  logic [COORD_W-1:0] my_x,
  input  logic [COORD_W-1:0] my_y,
  input  logic [NUM_TASKS-1:0] cascade_free,
  input  link_fwd_t          in_fwd  [NUM_PORTS],
  output link_bwd_t          in_bwd  [NUM_PORTS],
  output link_fwd_t          out_fwd [NUM_PORTS],
  input  link_bwd_t          out_bwd [NUM_PORTS],   // P_LOCAL entry unused
  input  logic [NUM_TASKS-1:0] eject_ready,         // IQ t can take an ejection
  output logic [TASK_W-1:0]  eject_task,
  output logic               cascaded        // a message was grabbed this cycle
);
  localparam int MW = $bits(msg_t);
  localparam int CW = $clog2(RBUF+1);

  msg_t                 head   [NUM_PORTS];
  logic [NUM_PORTS-1:0] empty, full, free2, pop;
  logic [2:0]           want   [NUM_PORTS];  // requested output port
  logic [NUM_PORTS-1:0] need2;               // request needs two free slots
  logic [NUM_PORTS-1:0] casc;                // request is a cascade ejection
  logic [NUM_PORTS-1:0] req_ok;              // request can be served now

  for (genvar p = 0; p < NUM_PORTS; p++) begin : g_in
    logic [MW-1:0] h;
    logic [CW-1:0] cnt_unused;
    task_queue #(.DEPTH(RBUF), .DATA_W(MW)) u_buf (
      .clk, .rst_n,
      .cfg_size (CW'(RBUF)),
      .push     (in_fwd[p].valid),
      .push_data(in_fwd[p].msg),
      .push2    (1'b0),
      .push2_data('0),
      .pop      (pop[p]),
      .head     (h),
      .empty    (empty[p]),
      .full     (full[p]),
      .free2    (free2[p]),
      .count    (cnt_unused)
    );
    assign head[p] = msg_t'(h);
    assign in_bwd[p].ready1 = !full[p];
    assign in_bwd[p].ready2 = free2[p];
  end

  // Is x (0..2^l - 1) reached faster going up (+1) around a ring of 2^l?
  function automatic logic go_up(input logic [COORD_W-1:0] from, input logic [COORD_W-1:0] to,
                                 input logic [LOG_W-1:0] l, input logic ring);
    logic [COORD_W-1:0] d, mask;
    mask = COORD_W'((1 << l) - 1);
    if (!ring) return to > from;
    d = (to - from) & mask;
    return d <= COORD_W'(1 << l) >> 1;
  endfunction

  // Route computation for every input head
  always_comb begin
    for (int p = 0; p < NUM_PORTS; p++) begin
      logic [2*COORD_W-1:0] dxy, pxy;
      logic [COORD_W-1:0]   dx, dy;
      chan_cfg_t            c;
      logic                 in_x, out_x, blocked;
      c    = chan_cfg[head[p].chan];
      dxy  = dest_of(head[p].idx, c, grid, my_x, my_y);
      pxy  = proxy_of(head[p].idx, c, grid, my_x, my_y);
      dx   = dxy[2*COORD_W-1:COORD_W];
      dy   = dxy[COORD_W-1:0];
      if (dx != my_x)
        want[p] = go_up(my_x, dx, grid.log2x, grid.torus_x) ? 3'(P_EAST) : 3'(P_WEST);
      else if (dy != my_y)
        want[p] = go_up(my_y, dy, grid.log2y, grid.torus_y) ? 3'(P_SOUTH) : 3'(P_NORTH);
      else
        want[p] = 3'(P_LOCAL);
      in_x  = (p == int'(P_EAST)) || (p == int'(P_WEST));
      out_x = (want[p] == 3'(P_EAST)) || (want[p] == 3'(P_WEST));
      // entering a ring: injection or a turn from the X ring into a Y ring
      need2[p] = (want[p] != 3'(P_LOCAL)) &&
                 ((p == int'(P_LOCAL)) || (in_x && !out_x));
      blocked  = need2[p] ? !out_bwd[want[p]].ready2 : !out_bwd[want[p]].ready1;
      casc[p]  = 1'b0;
      if ((p != int'(P_LOCAL)) && (want[p] != 3'(P_LOCAL)) && c.proxy_en && !c.to_proxy &&
          (pxy == {my_x, my_y}) && cascade_free[c.cascade_task] && blocked) begin
        casc[p]  = 1'b1;
        want[p]  = 3'(P_LOCAL);
        need2[p] = 1'b0;
      end
      if (want[p] == 3'(P_LOCAL))
        req_ok[p] = !empty[p] &&
                    eject_ready[casc[p] ? c.cascade_task : c.dest_task];
      else
        req_ok[p] = !empty[p] &&
                    (need2[p] ? out_bwd[want[p]].ready2 : out_bwd[want[p]].ready1);
    end
  end

  // Round-robin arbitration per output
  logic [2:0] rr [NUM_PORTS];     // last granted input per output
  logic [2:0] gnt_in [NUM_PORTS]; // granted input per output
  logic [NUM_PORTS-1:0] gnt_v;

  always_comb begin
    pop = '0;
    for (int o = 0; o < NUM_PORTS; o++) begin
      gnt_v[o]  = 1'b0;
      gnt_in[o] = '0;
      for (int k = 1; k <= NUM_PORTS; k++) begin
        int i;
        i = (int'(rr[o]) + k) % NUM_PORTS;
        if (!gnt_v[o] && req_ok[i] && want[i] == 3'(o)) begin
          gnt_v[o]  = 1'b1;
          gnt_in[o] = 3'(i);
        end
      end
      if (gnt_v[o]) pop[gnt_in[o]] = 1'b1;
      out_fwd[o].valid = gnt_v[o];
      out_fwd[o].msg   = head[gnt_in[o]];
    end
    eject_task = casc[gnt_in[P_LOCAL]] ? chan_cfg[head[gnt_in[P_LOCAL]].chan].cascade_task
                                       : chan_cfg[head[gnt_in[P_LOCAL]].chan].dest_task;
    cascaded   = gnt_v[P_LOCAL] && casc[gnt_in[P_LOCAL]];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int o = 0; o < NUM_PORTS; o++) rr[o] <= 3'(NUM_PORTS-1);
    end else begin
      for (int o = 0; o < NUM_PORTS; o++) if (gnt_v[o]) rr[o] <= gnt_in[o];
    end
  end
endmodule

// d2d_phy: behavioural model of one die-to-die link direction.
//
// Behavioural model. Between TCA dies, NoC links leave through die-to-die
// PHYs (BoW-style bumps on the organic substrate) whose circuits are
// analog and process-specific. This model keeps only what the network sees:
// a message crossing the link arrives LAT cycles later (4 ns, i.e. 4 cycles
// at the 1 GHz logic clock, in the evaluated package), the link carries one
// message per cycle, and it buffers up to DEPTH messages so that it can
// honour the same two-level ready signals (one free slot / two free slots)
// that bubble flow control expects from a router input. The model is
// written as plain synthesizable logic, but it stands for the PHY pair and
// the substrate wires, not for RTL of a PHY.
//
// Interface: in_fwd/in_bwd face the sending router's output port, out_fwd/
// out_bwd the receiving router's input port.
module d2d_phy
  import tascade_pkg::*;
#(
  parameter int LAT   = 4,     // cycles through the link
  parameter int DEPTH = 8      // messages in flight or waiting
) (
  input  logic      clk,
  input  logic      rst_n,
  input  link_fwd_t in_fwd,
  output link_bwd_t in_bwd,
  output link_fwd_t out_fwd,
  input  link_bwd_t out_bwd
);
  localparam int MW = $bits(msg_t);
  localparam int TW = 8;
  localparam int CW = $clog2(DEPTH+1);

  logic [TW-1:0]    now;
  logic [MW+TW-1:0] head;
  logic             empty, full, free2, mature;
  logic [CW-1:0]    cnt_unused;

  task_queue #(.DEPTH(DEPTH), .DATA_W(MW+TW)) u_q (
    .clk, .rst_n,
    .cfg_size  (CW'(DEPTH)),
    .push      (in_fwd.valid),
    .push_data ({in_fwd.msg, now}),
    .push2     (1'b0),
    .push2_data('0),
    .pop       (out_fwd.valid),
    .head      (head),
    .empty     (empty),
    .full      (full),
    .free2     (free2),
    .count     (cnt_unused)
  );

  // an entry written at time ts leaves at ts + LAT at the earliest
  assign mature        = TW'(now - head[TW-1:0]) >= TW'(LAT);
  assign out_fwd.valid = !empty && mature && out_bwd.ready1;
  assign out_fwd.msg   = msg_t'(head[MW+TW-1:TW]);
  assign in_bwd.ready1 = !full;
  assign in_bwd.ready2 = free2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) now <= '0;
    else        now <= now + TW'(1);
  end
endmodule

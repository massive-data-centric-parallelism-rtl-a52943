// tile: one processing tile of a TCA die.
//
// A tile runs the tasks whose data it owns (or holds as a proxy). Incoming
// task invocations wait in one input queue (IQ) per task type; the task
// scheduling unit (TSU) picks the next one from queue occupancy and hands it
// to the processing unit (PU); the PU reads and writes its data through the
// data SRAM (scratchpad or D$) and the proxy cache (P$), and spawns new
// tasks by pushing into one output queue (OQ) per logical channel. The
// network interface drains the OQs into one router per physical NoC and
// fills the IQs from them. The P$ pushes its write-backs into the OQs too,
// with priority over the PU. A router may grab an owner-bound message as a
// proxy task (selective cascading) when the proxy task's IQ is empty.
//
// The PU is a small in-order, software-programmable core whose instruction
// set the paper does not give; it stays outside this module and connects
// through pu_o/pu_i (see tascade_pkg). All of a tile's queue sizes, cache
// sizes, channel and task tables are software settings (cfg), the same on
// every tile; the tile's own coordinates arrive on my_x/my_y.
//
// Memory: IQs, OQs, D$ and P$ are separate arrays here, sized so that their
// sum is close to the paper's 1.5 MiB per tile; in the paper they share one
// SRAM partitioned by software. That is a departure of this design.
//
// Links: net_in/net_out are the four mesh/torus directions (N,E,S,W) of each
// physical NoC; mem_* is the D$ line port towards the die's memory
// controller.
module tile
  import tascade_pkg::*;
#(
  parameter int IQ_DEPTH  = 256,
  parameter int OQ_DEPTH  = 16,
  parameter int PC_LINES  = 32768,
  parameter int DC_LINES  = 16384,
  parameter int RBUF      = 4
) (
  input  logic               clk,
  input  logic               rst_n,
  input  tile_cfg_t          cfg,
  input  logic [COORD_W-1:0] my_x,
  input  logic [COORD_W-1:0] my_y,
  // processing unit
  input  pu_out_t            pu_o,
  output pu_in_t             pu_i,
  // NoC links, per physical NoC and direction (N,E,S,W)
  input  link_fwd_t          net_in_fwd  [NUM_NOCS][4],
  output link_bwd_t          net_in_bwd  [NUM_NOCS][4],
  output link_fwd_t          net_out_fwd [NUM_NOCS][4],
  input  link_bwd_t          net_out_bwd [NUM_NOCS][4],
  // D$ line port
  output logic               mem_req_valid,
  input  logic               mem_req_ready,
  output mem_req_t           mem_req,
  input  logic               mem_resp_valid,
  input  logic [LINE_BITS-1:0] mem_resp_data,
  // event counters' strobes
  output logic [NUM_NOCS-1:0] ev_cascade,
  output logic               ev_evict,
  output logic               init_done
);
  localparam int MW  = $bits(msg_t);
  localparam int ICW = $clog2(IQ_DEPTH+1);
  localparam int OCW = $clog2(OQ_DEPTH+1);

  // unpack configuration tables
  chan_cfg_t   chan_cfg [NUM_CHANNELS];
  task_cfg_t   task_cfg [NUM_TASKS];
  pcache_cfg_t pc_cfg   [NUM_TASKS];
  logic [ICW-1:0] iq_size [NUM_TASKS];
  always_comb begin
    for (int c = 0; c < NUM_CHANNELS; c++) chan_cfg[c] = cfg.chan[c];
    for (int t = 0; t < NUM_TASKS; t++) begin
      task_cfg[t] = cfg.tsk[t];
      pc_cfg[t]   = cfg.pc[t];
      iq_size[t]  = (cfg.iq_size[t] > QSZ_W'(IQ_DEPTH)) ? ICW'(IQ_DEPTH) : ICW'(cfg.iq_size[t]);
    end
  end

  // ---------------- input queues ----------------
  logic [NUM_TASKS-1:0] iq_push [NUM_NOCS];
  logic [NUM_TASKS-1:0] iq_pop, iq_empty, iq_full, iq_free2;
  msg_t                 iq_push_msg [NUM_NOCS];
  msg_t                 iq_head     [NUM_TASKS];
  logic [ICW-1:0]       iq_count    [NUM_TASKS];

  for (genvar t = 0; t < NUM_TASKS; t++) begin : g_iq
    logic [MW-1:0] h;
    task_queue #(.DEPTH(IQ_DEPTH), .DATA_W(MW)) u_iq (
      .clk, .rst_n,
      .cfg_size (iq_size[t]),
      .push     (iq_push[0][t]),
      .push_data(iq_push_msg[0]),
      .push2    (iq_push[1][t]),
      .push2_data(iq_push_msg[1]),
      .pop      (iq_pop[t]),
      .head     (h),
      .empty    (iq_empty[t]),
      .full     (iq_full[t]),
      .free2    (iq_free2[t]),
      .count    (iq_count[t])
    );
    assign iq_head[t] = msg_t'(h);
  end

  // ---------------- output queues ----------------
  logic [NUM_CHANNELS-1:0] oq_push, oq_pop, oq_empty, oq_full;
  msg_t                    oq_push_msg [NUM_CHANNELS];
  msg_t                    oq_head     [NUM_CHANNELS];

  for (genvar c = 0; c < NUM_CHANNELS; c++) begin : g_oq
    logic [MW-1:0]  h;
    logic           f2_unused;
    logic [OCW-1:0] cnt_unused;
    logic [OCW-1:0] sz;
    assign sz = (cfg.oq_size[c] > QSZ_W'(OQ_DEPTH)) ? OCW'(OQ_DEPTH) : OCW'(cfg.oq_size[c]);
    task_queue #(.DEPTH(OQ_DEPTH), .DATA_W(MW)) u_oq (
      .clk, .rst_n,
      .cfg_size (sz),
      .push     (oq_push[c]),
      .push_data(oq_push_msg[c]),
      .push2    (1'b0),
      .push2_data('0),
      .pop      (oq_pop[c]),
      .head     (h),
      .empty    (oq_empty[c]),
      .full     (oq_full[c]),
      .free2    (f2_unused),
      .count    (cnt_unused)
    );
    assign oq_head[c] = msg_t'(h);
  end

  // ---------------- proxy cache ----------------
  logic pc_ev_valid, pc_ev_ready, pc_init;
  msg_t pc_ev_msg;
  proxy_cache #(.LINES(PC_LINES)) u_pc (
    .clk, .rst_n,
    .cfg       (pc_cfg),
    .req_valid (pu_o.pc_valid),
    .req_ready (pu_i.pc_ready),
    .req_op    (pu_o.pc_op),
    .req_task  (pu_o.pc_task),
    .req_idx   (pu_o.pc_idx),
    .req_val   (pu_o.pc_val),
    .resp_valid(pu_i.pc_rvalid),
    .resp_hit  (pu_i.pc_hit),
    .resp_val  (pu_i.pc_rdata),
    .ev_valid  (pc_ev_valid),
    .ev_msg    (pc_ev_msg),
    .ev_ready  (pc_ev_ready),
    .init_done (pc_init)
  );

  // OQ write port: P$ write-back first, then the PU
  always_comb begin
    oq_push = '0;
    for (int c = 0; c < NUM_CHANNELS; c++) oq_push_msg[c] = pu_o.push_msg;
    pc_ev_ready     = !oq_full[pc_ev_msg.chan];
    pu_i.push_ready = !oq_full[pu_o.push_msg.chan] &&
                      !(pc_ev_valid && pc_ev_msg.chan == pu_o.push_msg.chan);
    if (pc_ev_valid && pc_ev_ready) begin
      oq_push[pc_ev_msg.chan]     = 1'b1;
      oq_push_msg[pc_ev_msg.chan] = pc_ev_msg;
    end
    if (pu_o.push_valid && pu_i.push_ready) oq_push[pu_o.push_msg.chan] = 1'b1;
  end
  assign ev_evict = pc_ev_valid && pc_ev_ready;

  // ---------------- data SRAM / D$ ----------------
  logic              pf_valid, pf_ready, dc_init;
  logic [IDX_W-1:0]  pf_addr;
  logic [31:0]       dc_miss_unused;
  data_cache #(.LINES(DC_LINES)) u_dc (
    .clk, .rst_n,
    .cfg_scratch   (cfg.dc_scratch),
    .cfg_log2_lines(cfg.dc_log2_lines),
    .req_valid     (pu_o.dc_valid),
    .req_ready     (pu_i.dc_ready),
    .req_we        (pu_o.dc_we),
    .req_addr      (pu_o.dc_addr),
    .req_wdata     (pu_o.dc_wdata),
    .resp_valid    (pu_i.dc_rvalid),
    .resp_rdata    (pu_i.dc_rdata),
    .pf_valid, .pf_ready, .pf_addr,
    .mem_req_valid, .mem_req_ready, .mem_req,
    .mem_resp_valid, .mem_resp_data,
    .init_done     (dc_init),
    .miss_count    (dc_miss_unused)
  );
  assign init_done = pc_init && dc_init;

  // ---------------- task scheduling ----------------
  tsu #(.IQ_DEPTH(IQ_DEPTH)) u_tsu (
    .clk, .rst_n,
    .task_cfg  (task_cfg),
    .iq_size   (iq_size),
    .iq_count  (iq_count),
    .iq_head   (iq_head),
    .iq_pop    (iq_pop),
    .oq_empty  (oq_empty),
    .oq_full   (oq_full),
    .disp_valid(pu_i.disp_valid),
    .disp_ready(pu_o.disp_ready && init_done),
    .disp      (pu_i.disp),
    .pf_valid, .pf_ready, .pf_addr
  );
  assign pu_i.busy = !(&iq_empty) || !(&oq_empty) || pc_ev_valid;

  // ---------------- network ----------------
  link_fwd_t inj_fwd [NUM_NOCS];
  link_bwd_t inj_bwd [NUM_NOCS];
  link_fwd_t ej_fwd  [NUM_NOCS];
  logic [TASK_W-1:0]    ej_task  [NUM_NOCS];
  logic [NUM_TASKS-1:0] ej_ready [NUM_NOCS];

  noc_interface u_ni (
    .clk, .rst_n,
    .chan_cfg (chan_cfg),
    .oq_head  (oq_head),
    .oq_empty (oq_empty),
    .oq_pop   (oq_pop),
    .inj_fwd, .inj_bwd,
    .ej_fwd, .ej_task, .ej_ready,
    .iq_full  (iq_full),
    .iq_free2 (iq_free2),
    .iq_push  (iq_push),
    .iq_push_msg(iq_push_msg)
  );

  for (genvar n = 0; n < NUM_NOCS; n++) begin : g_rt
    link_fwd_t in_fwd  [NUM_PORTS];
    link_bwd_t in_bwd  [NUM_PORTS];
    link_fwd_t out_fwd [NUM_PORTS];
    link_bwd_t out_bwd [NUM_PORTS];
    for (genvar d = 0; d < 4; d++) begin : g_dir
      assign in_fwd[d]          = net_in_fwd[n][d];
      assign net_in_bwd[n][d]   = in_bwd[d];
      assign net_out_fwd[n][d]  = out_fwd[d];
      assign out_bwd[d]         = net_out_bwd[n][d];
    end
    assign in_fwd[P_LOCAL]  = inj_fwd[n];
    assign inj_bwd[n]       = in_bwd[P_LOCAL];
    assign ej_fwd[n]        = out_fwd[P_LOCAL];
    assign out_bwd[P_LOCAL] = '{ready1: 1'b1, ready2: 1'b1};

    router #(.RBUF(RBUF)) u_router (
      .clk, .rst_n,
      .grid        (cfg.grid),
      .chan_cfg    (chan_cfg),
      .my_x, .my_y,
      .cascade_free(iq_empty),
      .in_fwd, .in_bwd, .out_fwd, .out_bwd,
      .eject_ready (ej_ready[n]),
      .eject_task  (ej_task[n]),
      .cascaded    (ev_cascade[n])
    );
  end
endmodule

// noc_interface: mapping of logical channels onto physical NoCs in a tile.
//
// A tile has one output queue (OQ) per logical channel and one router per
// physical NoC. Software decides which physical NoC each channel uses; when
// several channels share a NoC they take turns round-robin, and each
// channel's weight sets how many messages it may send in a row (the
// "arbitration ratio between channels sharing a physical NoC" that the paper
// lists among the compile-time settings). This is the paper's mapping; the
// weighted round-robin with a per-channel burst count is this design's way
// of realising the ratio.
//
// In the other direction, each router ejects messages together with the
// number of the input queue (IQ) they go to. Every IQ has two write ports,
// one per physical NoC: router 0 may eject into an IQ that is not full,
// router 1 into an IQ with two free slots, so both may write the same IQ in
// one cycle and neither depends on what the other does.
//
// Timing: purely combinational apart from the round-robin state; one
// message per NoC per cycle in each direction.
module noc_interface
  import tascade_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  chan_cfg_t          chan_cfg [NUM_CHANNELS],
  // output queues
  input  msg_t               oq_head  [NUM_CHANNELS],
  input  logic [NUM_CHANNELS-1:0] oq_empty,
  output logic [NUM_CHANNELS-1:0] oq_pop,
  // router local input ports (injection)
  output link_fwd_t          inj_fwd  [NUM_NOCS],
  input  link_bwd_t          inj_bwd  [NUM_NOCS],
  // router local output ports (ejection)
  input  link_fwd_t          ej_fwd   [NUM_NOCS],
  input  logic [TASK_W-1:0]  ej_task  [NUM_NOCS],
  output logic [NUM_TASKS-1:0] ej_ready [NUM_NOCS],
  // input queues
  input  logic [NUM_TASKS-1:0] iq_full,
  input  logic [NUM_TASKS-1:0] iq_free2,
  output logic [NUM_TASKS-1:0] iq_push [NUM_NOCS],   // write port n of each IQ
  output msg_t               iq_push_msg [NUM_NOCS]
);
  logic [CHAN_W-1:0]   cur [NUM_NOCS];
  logic [WEIGHT_W:0]   cnt [NUM_NOCS];
  logic [CHAN_W-1:0]   sel [NUM_NOCS];
  logic [NUM_NOCS-1:0] send;
  logic [NUM_NOCS-1:0] cont;    // current channel continues its burst

  always_comb begin
    logic [NUM_CHANNELS-1:0] elig;
    logic [WEIGHT_W:0]       w;
    logic [CHAN_W-1:0]       c;
    oq_pop = '0;
    elig   = '0;
    c      = '0;
    for (int n = 0; n < NUM_NOCS; n++) begin
      for (int k = 0; k < NUM_CHANNELS; k++)
        elig[k] = !oq_empty[k] && (chan_cfg[k].noc == NOC_W'(n));
      w       = (chan_cfg[cur[n]].weight == '0) ? (WEIGHT_W+1)'(1)
                                                : (WEIGHT_W+1)'(chan_cfg[cur[n]].weight);
      send[n] = 1'b0;
      cont[n] = 1'b0;
      sel[n]  = cur[n];
      if (elig[cur[n]] && cnt[n] < w) begin
        send[n] = 1'b1;
        cont[n] = 1'b1;
      end else begin
        for (int k = NUM_CHANNELS; k >= 1; k--) begin
          c = CHAN_W'((int'(cur[n]) + k) % NUM_CHANNELS);
          if (elig[c]) begin
            send[n] = 1'b1;
            sel[n]  = c;
          end
        end
      end
      send[n]          = send[n] && inj_bwd[n].ready1;
      inj_fwd[n].valid = send[n];
      inj_fwd[n].msg   = oq_head[sel[n]];
      if (send[n]) oq_pop[sel[n]] = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int n = 0; n < NUM_NOCS; n++) begin
        cur[n] <= '0;
        cnt[n] <= '0;
      end
    end else begin
      for (int n = 0; n < NUM_NOCS; n++) begin
        if (send[n]) begin
          if (cont[n]) cnt[n] <= cnt[n] + 1'b1;
          else begin
            cur[n] <= sel[n];
            cnt[n] <= (WEIGHT_W+1)'(1);
          end
        end else if (oq_empty[cur[n]]) begin
          cnt[n] <= '0;   // the burst ends when the channel runs dry
        end
      end
    end
  end

  // Ejection: NoC n writes IQ port n.
  for (genvar n = 0; n < NUM_NOCS; n++) begin : g_ej
    if (n == 0) begin : g_first
      assign ej_ready[n] = ~iq_full;
    end else begin : g_other
      assign ej_ready[n] = iq_free2;
    end
    assign iq_push[n]     = ej_fwd[n].valid ? (NUM_TASKS'(1) << ej_task[n]) : '0;
    assign iq_push_msg[n] = ej_fwd[n].msg;
  end
endmodule

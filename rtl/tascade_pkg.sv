// tascade_pkg: types and constants shared by the tile, the NoC and the die.
//
// A task message carries no header. Its first parameter is a global index
// into a data array, and every router works out the destination tile from
// that index and the configuration of the message's logical channel. The
// second parameter is a data value (a distance, a count, a rank). The
// channel number travels with the message so that the receiving tile can
// put it into the right input queue.
//
// Sizes follow the evaluated configuration where one is given: 16x16 tiles
// per die, 4x4 dies per package, two physical tile-NoCs, 512-bit DRAM lines,
// eight HBM channels. Counts of task types and logical channels are this
// design's own choice (four each, enough for the tasks T1, T2, T3 and the
// proxy task T3' of the SSSP example).
package tascade_pkg;

  localparam int IDX_W        = 32;   // global array index
  localparam int VAL_W        = 32;   // task parameter / data word
  localparam int NUM_TASKS    = 4;    // task types (one IQ each)
  localparam int NUM_CHANNELS = 4;    // logical NoC channels (one OQ each)
  localparam int NUM_NOCS     = 2;    // physical tile-NoCs
  localparam int TASK_W       = $clog2(NUM_TASKS);
  localparam int CHAN_W       = $clog2(NUM_CHANNELS);
  localparam int NOC_W        = 1;
  localparam int COORD_W      = 10;   // up to 1024 tiles per dimension
  localparam int LOG_W        = 4;    // log2 of a grid dimension (<= 10)
  localparam int SHIFT_W      = 5;    // log2 of elements per tile
  localparam int LINE_BITS    = 512;  // D$ line = DRAM bitline width
  localparam int WEIGHT_W     = 3;    // channel arbitration weight

  // Router ports
  typedef enum logic [2:0] {
    P_NORTH = 3'd0,
    P_EAST  = 3'd1,
    P_SOUTH = 3'd2,
    P_WEST  = 3'd3,
    P_LOCAL = 3'd4
  } port_e;
  localparam int NUM_PORTS = 5;

  // Task message
  typedef struct packed {
    logic [CHAN_W-1:0] chan;
    logic [IDX_W-1:0]  idx;
    logic [VAL_W-1:0]  val;
  } msg_t;

  // One link direction: message forward, two readiness levels backward.
  // ready1: the receiver has at least one free slot; ready2: at least two
  // (bubble flow control needs two free slots to enter a ring).
  typedef struct packed {
    logic valid;
    msg_t msg;
  } link_fwd_t;

  typedef struct packed {
    logic ready1;
    logic ready2;
  } link_bwd_t;

  // Per logical channel configuration (software, set at load time)
  typedef struct packed {
    logic [SHIFT_W-1:0]  enc_shift;   // log2(elements per tile): "encode"
    logic                to_proxy;    // target is the proxy tile in the sender's region
    logic                proxy_en;    // owner-bound messages may be grabbed by proxy tiles
    logic [LOG_W-1:0]    prx_log2x;   // proxy region width  (log2 tiles)
    logic [LOG_W-1:0]    prx_log2y;   // proxy region height (log2 tiles)
    logic [NOC_W-1:0]    noc;         // physical NoC this channel uses
    logic [TASK_W-1:0]   dest_task;   // IQ the message enters at its destination
    logic [TASK_W-1:0]   cascade_task;// IQ a grabbed (cascaded) message enters
    logic [WEIGHT_W-1:0] weight;      // consecutive grants in round-robin
  } chan_cfg_t;

  // Grid the workload runs on
  typedef struct packed {
    logic [LOG_W-1:0] log2x;
    logic [LOG_W-1:0] log2y;
    logic             torus_x;
    logic             torus_y;
  } grid_cfg_t;

  // Per task configuration (TSU table)
  typedef struct packed {
    logic [IDX_W-1:0]  arr_base;    // word address of the array indexed by param 0
    logic [IDX_W-1:0]  arr2_base;   // second array accessed with the same index
    logic              arr2_en;
    logic              pf_en;       // prefetch the indexed element(s) on dispatch
    logic              pf_stream;   // PU keeps prefetching during execution
    logic [CHAN_W-1:0] out_chan;    // channel (OQ) the task produces into
  } task_cfg_t;

  // Per proxy-task configuration of the proxy cache
  typedef struct packed {
    logic [IDX_W-1:0]  base;        // first P$ line of this logical P$
    logic [5-1:0]      log2_lines;  // lines in this logical P$
    logic [VAL_W-1:0]  dflt;        // value returned on a miss
    logic [CHAN_W-1:0] evict_chan;  // channel an eviction is sent on
  } pcache_cfg_t;

  // Task handed from the TSU to the PU
  typedef struct packed {
    logic [TASK_W-1:0] task_id;
    logic [IDX_W-1:0]  idx;
    logic [VAL_W-1:0]  val;
    logic              pf_stream;
  } dispatch_t;

  // D$ line request to the memory controller
  typedef struct packed {
    logic                 we;
    logic [IDX_W-1:0]     line;     // line address within the tile's DRAM region
    logic [LINE_BITS-1:0] wdata;
  } mem_req_t;


  // Software configuration of a tile (identical on every tile of a run;
  // the tile's own coordinates are given separately).
  localparam int QSZ_W = 16;
  typedef struct packed {
    grid_cfg_t                          grid;
    chan_cfg_t   [NUM_CHANNELS-1:0]     chan;
    task_cfg_t   [NUM_TASKS-1:0]        tsk;
    pcache_cfg_t [NUM_TASKS-1:0]        pc;
    logic [NUM_TASKS-1:0][QSZ_W-1:0]    iq_size;
    logic [NUM_CHANNELS-1:0][QSZ_W-1:0] oq_size;
    logic                               dc_scratch;
    logic [4:0]                         dc_log2_lines;
  } tile_cfg_t;

  // Processing unit <-> tile. The PU itself is software-programmable and
  // outside this RTL; these bundles are its port on the tile.
  typedef struct packed {
    logic              disp_ready;   // PU takes the next task
    logic              dc_valid;     // data access (D$ or scratchpad)
    logic              dc_we;
    logic [IDX_W-1:0]  dc_addr;
    logic [VAL_W-1:0]  dc_wdata;
    logic              pc_valid;     // proxy cache access
    logic [1:0]        pc_op;        // 0 read, 1 write, 2 flush
    logic [TASK_W-1:0] pc_task;
    logic [IDX_W-1:0]  pc_idx;
    logic [VAL_W-1:0]  pc_val;
    logic              push_valid;   // spawn a task into an OQ
    msg_t              push_msg;
  } pu_out_t;

  typedef struct packed {
    logic              disp_valid;
    dispatch_t         disp;
    logic              dc_ready;
    logic              dc_rvalid;
    logic [VAL_W-1:0]  dc_rdata;
    logic              pc_ready;
    logic              pc_rvalid;
    logic              pc_hit;
    logic [VAL_W-1:0]  pc_rdata;
    logic              push_ready;
    logic              busy;         // any IQ or OQ holds a message
  } pu_in_t;

  // Destination tile of a message index on a channel, seen from tile (mx,my).
  function automatic logic [2*COORD_W-1:0] dest_of(
      input logic [IDX_W-1:0] idx, input chan_cfg_t c, input grid_cfg_t g,
      input logic [COORD_W-1:0] mx, input logic [COORD_W-1:0] my);
    logic [IDX_W-1:0]   t;
    logic [COORD_W-1:0] x, y, maskx, masky, pmx, pmy;
    logic [6:0]         sh;
    maskx = COORD_W'((1 << g.log2x) - 1);
    masky = COORD_W'((1 << g.log2y) - 1);
    if (c.to_proxy) begin
      // The array is spread over one proxy region as if the region were
      // the whole grid: elements per proxy tile grow by grid/region.
      sh  = 7'(c.enc_shift) + 7'(g.log2x) + 7'(g.log2y)
          - 7'(c.prx_log2x) - 7'(c.prx_log2y);
      t   = idx >> sh;
      pmx = COORD_W'((1 << c.prx_log2x) - 1);
      pmy = COORD_W'((1 << c.prx_log2y) - 1);
      x   = (mx & ~pmx) | (COORD_W'(t) & pmx);
      y   = (my & ~pmy) | (COORD_W'(t >> c.prx_log2x) & pmy);
    end else begin
      t = idx >> c.enc_shift;
      x = COORD_W'(t) & maskx;
      y = COORD_W'(t >> g.log2x) & masky;
    end
    return {x, y};
  endfunction

  // Proxy tile of an index inside the region that holds tile (mx,my).
  function automatic logic [2*COORD_W-1:0] proxy_of(
      input logic [IDX_W-1:0] idx, input chan_cfg_t c, input grid_cfg_t g,
      input logic [COORD_W-1:0] mx, input logic [COORD_W-1:0] my);
    chan_cfg_t p;
    p = c;
    p.to_proxy = 1'b1;
    return dest_of(idx, p, g, mx, my);
  endfunction

endpackage

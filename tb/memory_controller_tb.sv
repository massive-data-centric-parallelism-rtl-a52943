// memory_controller_tb: checks address mapping, arbitration and response
// routing of the die's memory controller. Four tiles issue random line
// requests (held until accepted) into a two-channel DRAM model. Each
// accepted request must appear on channel (global line mod 2) with the
// channel address (global line / 2), the tile as tag and the right write
// data; each read response must return to the tile named by its tag, with
// the data the model holds for that line. With every tile hammering the
// same channel, grants must rotate so that no tile waits more than NT
// grants. Every tile's requests must all be served.
module memory_controller_tb;
  import tascade_pkg::*;
  localparam int NT = 4, HBM_CH = 2, REGION_LW = 4;
  localparam int TAG_W = 2, CHB = 1, ADDR_W = TAG_W + REGION_LW - CHB;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [NT-1:0]        t_req_valid, t_req_ready, t_resp_valid;
  mem_req_t             t_req [NT];
  logic [LINE_BITS-1:0] t_resp_data [NT];
  logic [HBM_CH-1:0]    ch_req_valid, ch_req_ready, ch_resp_valid;
  logic                 ch_req_we   [HBM_CH];
  logic [ADDR_W-1:0]    ch_req_addr [HBM_CH];
  logic [LINE_BITS-1:0] ch_req_wdata[HBM_CH], ch_resp_data[HBM_CH];
  logic [TAG_W-1:0]     ch_req_tag  [HBM_CH], ch_resp_tag [HBM_CH];

  memory_controller #(.NT(NT), .HBM_CH(HBM_CH), .REGION_LW(REGION_LW)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  function automatic logic [LINE_BITS-1:0] pattern(input int gl);
    return {16{32'(gl * 2654435761)}};
  endfunction

  // DRAM model: one response per channel per cycle, LAT 3, data = pattern
  // of the global line unless written
  logic [LINE_BITS-1:0] store [int];
  typedef struct { int due; int tag; int gl; } pend_t;
  pend_t pq [HBM_CH][$];
  int cyc = 0;
  int served [NT];
  int wait_cnt [NT];
  int exp_rd_gl [NT];
  int mode = 0;   // 0 random, 1 same channel
  assign ch_req_ready = '1;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      for (int c = 0; c < HBM_CH; c++) begin
        if (ch_req_valid[c]) begin
          int t, gl;
          t  = int'(ch_req_tag[c]);
          gl = int'(ch_req_addr[c]) * HBM_CH + c;
          check(t_req_valid[t] && t_req_ready[t], "granted tile is requesting");
          check(gl == t * (1 << REGION_LW) + int'(t_req[t].line[REGION_LW-1:0]),
                $sformatf("channel %0d address for tile %0d", c, t));
          check(ch_req_we[c] == t_req[t].we, "write flag");
          if (ch_req_we[c]) begin
            check(ch_req_wdata[c] == t_req[t].wdata, "write data");
            store[gl] = ch_req_wdata[c];
          end else pq[c].push_back('{due: cyc + 3, tag: t, gl: gl});
          served[t]++;
        end
        if (pq[c].size() > 0 && pq[c][0].due <= cyc) begin
          pend_t p;
          p = pq[c].pop_front();
          ch_resp_valid[c] <= 1'b1;
          ch_resp_tag[c]   <= TAG_W'(p.tag);
          ch_resp_data[c]  <= store.exists(p.gl) ? store[p.gl] : pattern(p.gl);
          exp_rd_gl[p.tag] = p.gl;
        end else ch_resp_valid[c] <= 1'b0;
      end
      for (int t = 0; t < NT; t++) begin
        if (t_req_valid[t] && !t_req_ready[t]) wait_cnt[t]++;
        else wait_cnt[t] = 0;
        if (mode == 1) check(wait_cnt[t] < NT, $sformatf("tile %0d starved", t));
      end
    end
  end

  // response routing: at most one response per tile per cycle here, since
  // each tile has one outstanding read at a time
  always @(posedge clk) if (rst_n)
    for (int t = 0; t < NT; t++)
      if (t_resp_valid[t])
        check(t_resp_data[t] == (store.exists(exp_rd_gl[t]) ? store[exp_rd_gl[t]] : pattern(exp_rd_gl[t])),
              $sformatf("response to tile %0d", t));

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // tiles: one request at a time; a read waits for its response
  int done [NT];
  for (genvar g = 0; g < NT; g++) begin : g_tile
    initial begin
      t_req_valid[g] = 0; t_req[g] = '0; done[g] = 0;
      wait (rst_n);
      for (int k = 0; k < 40; k++) begin
        @(negedge clk);
        t_req_valid[g] = 1;
        t_req[g].we    = (mode == 0) ? ($urandom % 3 == 0) : 1'b1;
        t_req[g].line  = (mode == 0) ? 32'($urandom % (1 << REGION_LW)) : 32'(2 * ($urandom % 8));
        t_req[g].wdata = {16{$urandom}};
        #1;
        while (!t_req_ready[g]) begin @(negedge clk); #1; end
        @(posedge clk); #1;
        t_req_valid[g] = 0;
        if (!t_req[g].we) while (!t_resp_valid[g]) begin @(posedge clk); #1; end
        if (k == 19) begin
          done[g] = 1;
          wait (done[0] && done[1] && done[2] && done[3]);
          if (g == 0) mode = 1;
          #1;
        end
      end
      done[g] = 2;
    end
  end

  initial begin
    for (int c = 0; c < HBM_CH; c++) begin
      ch_resp_valid[c] = 0; ch_resp_tag[c] = '0; ch_resp_data[c] = '0;
    end
    for (int t = 0; t < NT; t++) begin served[t] = 0; wait_cnt[t] = 0; exp_rd_gl[t] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    wait (done[0] == 2 && done[1] == 2 && done[2] == 2 && done[3] == 2);
    repeat (10) @(posedge clk);
    for (int t = 0; t < NT; t++) check(served[t] == 40, $sformatf("tile %0d served %0d", t, served[t]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

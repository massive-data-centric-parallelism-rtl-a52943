// data_cache_tb: self-checking test of the tile data SRAM / D$.
// A 16-line D$ sits in front of a behavioural DRAM slice (a word array with
// a fixed response latency). Random reads and writes over 64 lines are
// checked against a flat reference memory, so fills, dirty write-backs and
// evictions must all be right for the data to come back. Also checked: a
// hit costs no stall, a miss stalls for at least the DRAM latency, a
// prefetched line then hits, and scratchpad mode never touches DRAM.
module data_cache_tb;
  import tascade_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int LAT = 10;

  logic cfg_scratch;
  logic [4:0] cfg_log2_lines;
  logic req_valid, req_ready, req_we, resp_valid, pf_valid, pf_ready;
  logic [IDX_W-1:0] req_addr, pf_addr;
  logic [VAL_W-1:0] req_wdata, resp_rdata;
  logic mem_req_valid, mem_req_ready, mem_resp_valid, init_done;
  mem_req_t mem_req;
  logic [LINE_BITS-1:0] mem_resp_data;
  logic [31:0] miss_count;

  data_cache #(.LINES(16)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // DRAM slice model: 64 lines, one request at a time, LAT cycles to answer
  logic [LINE_BITS-1:0] dram [64];
  int busy = 0, n_mem = 0;
  logic [5:0] pend;
  assign mem_req_ready = (busy == 0);
  always @(posedge clk) begin
    mem_resp_valid <= 0;
    if (busy > 1) busy <= busy - 1;
    else if (busy == 1) begin
      busy <= 0; mem_resp_valid <= 1; mem_resp_data <= dram[pend];
    end
    if (mem_req_valid && mem_req_ready) begin
      n_mem++;
      if (mem_req.we) dram[mem_req.line[5:0]] <= mem_req.wdata;
      else begin pend <= mem_req.line[5:0]; busy <= LAT; end
    end
  end

  logic [31:0] ref_mem [64*16];

  task automatic access(input bit we, input logic [31:0] a, input logic [31:0] d, output int stall);
    @(negedge clk);
    req_valid = 1; req_we = we; req_addr = a; req_wdata = d;
    stall = 0;
    #1;
    while (!req_ready) begin @(negedge clk); stall++; end
    @(negedge clk);
    req_valid = 0;
    if (!we) check(resp_valid && resp_rdata == ref_mem[a],
                   $sformatf("read %0d: %0d vs %0d", a, resp_rdata, ref_mem[a]));
    else ref_mem[a] = d;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int st, m0;
    for (int l = 0; l < 64; l++)
      for (int w = 0; w < 16; w++) begin
        ref_mem[l*16+w] = $urandom;
        dram[l][w*32 +: 32] = ref_mem[l*16+w];
      end
    cfg_scratch = 0; cfg_log2_lines = 5'd4;
    req_valid = 0; req_we = 0; req_addr = 0; req_wdata = 0; pf_valid = 0; pf_addr = 0;
    mem_resp_valid = 0; mem_resp_data = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    wait (init_done);
    access(0, 35, 0, st);
    check(st >= LAT, $sformatf("miss stalls %0d cycles", st));
    access(0, 36, 0, st);
    check(st == 0, "hit in the same line does not stall");
    // prefetch line 7, then read it without a stall
    @(negedge clk); pf_valid = 1; pf_addr = 7*16 + 3;
    #1; while (!pf_ready) @(negedge clk);
    @(negedge clk); pf_valid = 0;
    repeat (LAT + 5) @(negedge clk);
    access(0, 7*16 + 9, 0, st);
    check(st == 0, "prefetched line hits");
    for (int i = 0; i < 400; i++) access($urandom % 2, $urandom % (64*16), $urandom, st);
    for (int a = 0; a < 64*16; a += 7) access(0, a, 0, st);
    check(miss_count > 20, "misses happened");
    // scratchpad mode: direct SRAM, no DRAM traffic
    cfg_scratch = 1;
    m0 = n_mem;
    for (int a = 0; a < 16*16; a++) access(1, a, a * 3 + 1, st);
    for (int a = 0; a < 16*16; a += 5) access(0, a, 0, st);
    check(n_mem == m0, "scratchpad makes no DRAM requests");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

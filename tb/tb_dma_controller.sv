// tb_dma_controller -- self-checking test of the FTW DMA controller.
// A memory model with random ready stalls holds FTW lists. The test checks: a 5-entry list
// (10 MHz to 100 MHz at 9.8304 GS/s, as in a stepwise carrier ramp) comes out in order,
// with read addresses stepping by 8 bytes, each update exactly `period` cycles after the
// previous one when `period` exceeds the memory round trip (otherwise no sooner than
// `period`); `busy` drops after the last entry; a trigger while busy and a trigger with
// count = 0 start nothing; a second list at a new address and period follows correctly.
module tb_dma_controller;
  import esb_pkg::*;
  localparam real FS = 9.8304e9;
  logic clk = 0, rst_n = 0, trigger = 0;
  dma_cfg_t cfg;
  logic mem_req_valid, mem_req_ready, mem_rsp_valid, ftw_valid, busy;
  logic [ADDR_W-1:0] mem_req_addr;
  logic [MEM_W-1:0]  mem_rsp_data;
  ftw_t ftw;
  int checks = 0, failures = 0;

  dma_controller dut (.clk, .rst_n, .trigger, .cfg, .mem_req_valid, .mem_req_ready,
    .mem_req_addr, .mem_rsp_valid, .mem_rsp_data, .ftw_valid, .ftw, .busy);
  ftw_mem_model #(.DEPTH(64), .LATENCY(5), .STALL(1'b1)) mem (.clk, .rst_n,
    .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req_addr(mem_req_addr),
    .rsp_valid(mem_rsp_valid), .rsp_data(mem_rsp_data));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // record every update and its cycle
  longint cycle = 0;
  ftw_t    got_ftw [$];
  longint  got_cyc [$];
  logic [ADDR_W-1:0] addrs [$];
  always @(posedge clk) begin
    cycle++;
    if (rst_n && ftw_valid) begin got_ftw.push_back(ftw); got_cyc.push_back(cycle); end
    if (rst_n && mem_req_valid && mem_req_ready) addrs.push_back(mem_req_addr);
  end

  function automatic ftw_t freq_to_ftw(input real f);
    return ftw_t'(longint'(f / FS * 281474976710656.0));
  endfunction

  task automatic pulse_trigger();
    @(posedge clk) #1 trigger = 1;
    repeat (3) @(posedge clk);
    #1 trigger = 0;
  endtask

  task automatic run_list(input int base_idx, input int n, input int period, input bit busy_trig);
    ftw_t exp_ftw [$];
    got_ftw.delete(); got_cyc.delete(); addrs.delete();
    for (int k = 0; k < n; k++) exp_ftw.push_back(mem.mem[base_idx + k][47:0]);
    cfg.src_addr = ADDR_W'(base_idx * 8);
    cfg.count    = n;
    cfg.period   = period;
    pulse_trigger();
    if (busy_trig) begin repeat (10) @(posedge clk); pulse_trigger(); end
    wait (got_ftw.size() == n);
    repeat (3) @(posedge clk);
    #1;
    checks++;
    if (busy) begin failures++; $display("busy still high"); end
    repeat (period + 50) @(posedge clk);
    checks++;
    if (got_ftw.size() != n) begin failures++; $display("%0d updates, expected %0d", got_ftw.size(), n); end
    for (int k = 0; k < n && k < got_ftw.size(); k++) begin
      checks++;
      if (got_ftw[k] !== exp_ftw[k]) begin failures++; $display("update %0d: %h expected %h", k, got_ftw[k], exp_ftw[k]); end
      checks++;
      if (addrs[k] !== ADDR_W'((base_idx + k) * 8)) begin failures++; $display("read %0d at %h", k, addrs[k]); end
      if (k > 0) begin
        checks++;
        if ((period >= 20) ? (got_cyc[k] - got_cyc[k-1] != period) : (got_cyc[k] - got_cyc[k-1] < period)) begin
          failures++; $display("update %0d after %0d cycles, expected %0d", k, got_cyc[k] - got_cyc[k-1], period);
        end
      end
    end
  endtask

  initial begin
    cfg = '0;
    for (int k = 0; k < 64; k++) mem.mem[k] = {$urandom, $urandom};
    for (int k = 0; k < 5; k++) mem.mem[k] = 64'(freq_to_ftw(10.0e6 + 22.5e6 * k));
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    // count = 0: nothing happens
    cfg.count = 0;
    pulse_trigger();
    repeat (30) @(posedge clk);
    checks++;
    if (busy || got_ftw.size() != 0) begin failures++; $display("count=0 started a transfer"); end
    // five-step ramp, period 37 cycles, a second trigger while busy is ignored
    run_list(0, 5, 37, 1'b1);
    // another list elsewhere with a longer period
    run_list(20, 12, 60, 1'b0);
    // period shorter than the memory round trip: updates as soon as data arrive, in order
    run_list(40, 6, 2, 1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// ftw_mem_model -- behavioural model of the processor memory that holds the FTW list.
//
// Not synthesizable design logic: it stands in for the processing system's memory, which
// the DMA controller reads over a valid/ready request channel and a response channel.
// A request is accepted when `req_ready` is high (ready drops at random when STALL is set);
// the 64-bit word at `req_addr` comes back LATENCY cycles later with `rsp_valid`. Words are
// held in `mem`, indexed by addr/8 modulo DEPTH, which the testbench fills directly. With
// RAMP set the memory instead returns ramp_base + (addr - ramp_addr)/8 * ramp_step, so that
// lists of millions of FTWs need no storage. One request is served at a time.
module ftw_mem_model #(
  parameter int unsigned DEPTH   = 64,
  parameter int unsigned LATENCY = 4,
  parameter bit          STALL   = 1'b1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        req_valid,
  output logic        req_ready,
  input  logic [31:0] req_addr,
  output logic        rsp_valid,
  output logic [63:0] rsp_data
);
  logic [63:0] mem [DEPTH];
  bit          ramp = 1'b0;
  logic [31:0] ramp_addr = '0;
  logic [47:0] ramp_base = '0, ramp_step = '0;

  int          wait_cnt;
  logic        pending;
  logic [31:0] pend_addr;
  logic        stall_now;

  assign req_ready = rst_n && !pending && !stall_now;

  function automatic logic [63:0] word_at(input logic [31:0] a);
    if (ramp) return 64'(ramp_base + 48'(32'(a - ramp_addr) >> 3) * ramp_step);
    else      return mem[(a >> 3) % DEPTH];
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      pending   <= 1'b0;
      rsp_valid <= 1'b0;
      rsp_data  <= '0;
      wait_cnt  <= 0;
      stall_now <= 1'b0;
    end else begin
      stall_now <= STALL && ($urandom % 3 == 0);
      rsp_valid <= 1'b0;
      if (req_valid && req_ready) begin
        pending   <= 1'b1;
        pend_addr <= req_addr;
        wait_cnt  <= (LATENCY > 1) ? int'(LATENCY) - 1 : 0;
      end else if (pending) begin
        if (wait_cnt == 0) begin
          pending   <= 1'b0;
          rsp_valid <= 1'b1;
          rsp_data  <= word_at(pend_addr);
        end else begin
          wait_cnt <= wait_cnt - 1;
        end
      end
    end
  end
endmodule

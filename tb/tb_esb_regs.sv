// tb_esb_regs -- self-checking test of the processor register file.
// Checks the reset values (all zero), writes random values to every register in random
// order, and compares the read port and the iq / dma structure outputs with a copy kept in
// the testbench; also checks the status word follows dma_busy and that writes to read-only
// and unused addresses change nothing.
module tb_esb_regs;
  import esb_pkg::*;
  logic clk = 0, rst_n = 0, wr_en = 0, dma_busy = 0;
  logic [REG_AW-1:0] wr_addr = '0, rd_addr = '0;
  logic [REG_DW-1:0] wr_data = '0, rd_data;
  iq_params_t iq;
  dma_cfg_t   dma;
  int checks = 0, failures = 0;
  logic [31:0] shadow [16];

  esb_regs dut (.clk, .rst_n, .wr_en, .wr_addr, .wr_data, .rd_addr, .rd_data, .dma_busy, .iq, .dma);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] mask(input int a);
    case (a)
      0, 7, 8, 9: return 32'hFFFF_FFFF;
      1, 2, 3, 4, 5, 6: return 32'h0000_FFFF;
      default: return 32'h0;
    endcase
  endfunction

  task automatic check_all();
    for (int a = 0; a < 16; a++) begin
      logic [31:0 ] e;
      e = (a == 10) ? 32'(dma_busy) : shadow[a];
      rd_addr = REG_AW'(a);
      #1;
      checks++;
      if (rd_data !== e) begin failures++; $display("read %0d: %h expected %h", a, rd_data, e); end
    end
    checks++;
    if (iq.ftw_m !== shadow[0] || iq.beta !== shadow[1][15:0] || iq.phi !== shadow[2][15:0] ||
        iq.xi_i !== shadow[3][15:0] || iq.xi_q !== shadow[4][15:0] ||
        iq.delta_i !== shadow[5][15:0] || iq.delta_q !== shadow[6][15:0] ||
        dma.src_addr !== shadow[7] || dma.count !== shadow[8] || dma.period !== shadow[9]) begin
      failures++; $display("struct outputs differ from the written values");
    end
  endtask

  initial begin
    for (int a = 0; a < 16; a++) shadow[a] = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    check_all();
    for (int n = 0; n < 400; n++) begin
      int a;
      a = $urandom % 16;
      @(posedge clk) #1;
      wr_en = 1; wr_addr = REG_AW'(a); wr_data = $urandom;
      dma_busy = $urandom % 2;
      @(posedge clk) #1;
      wr_en = 0;
      shadow[a] = wr_data & mask(a);
      if (n % 10 == 9) check_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

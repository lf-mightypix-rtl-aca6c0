// tb_pixel_config_ram: checks the 5-bit pixel configuration memory.
//
// After reset the word must read 0 (comparator off, TDAC 0). Random words
// are then written with random write strobes; the testbench keeps its own
// copy and compares after every clock edge, so both storing and holding are
// checked.
`timescale 1ns / 1fs

module tb_pixel_config_ram;
  import lfmp_pkg::*;

  logic clk = 1'b0, rst_n = 1'b1, we = 1'b0;
  pix_cfg_t wdata = '0, cfg, model;
  int checks = 0, failures = 0;

  initial #0.5 rst_n = 1'b0;   // falling edge so that the asynchronous reset acts

  pixel_config_ram dut (.clk(clk), .rst_n(rst_n), .we(we), .wdata(wdata), .cfg(cfg));

  always #6.25 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s: cfg=%b model=%b", what, cfg, model);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    model = '0;
    #20;
    check(cfg == '0, "reset value");
    rst_n = 1'b1;
    repeat (500) begin
      @(negedge clk);
      we    = ($urandom_range(0, 2) == 0);
      wdata = pix_cfg_t'($urandom_range(0, 31));
      @(posedge clk);
      if (we) model = wdata;
      #1;
      check(cfg == model, "stored word");
      check(cfg.tdac == model.tdac && cfg.en_comp == model.en_comp, "fields");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

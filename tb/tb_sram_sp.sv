// Self-checking test of sram_sp: random writes into a shadow model, then
// random reads checked one cycle later; checks that read data holds while
// the SRAM is idle or being written.
module tb_sram_sp;
  import ub_pkg::*;

  logic clk = 0, cen = 0, wen = 0;
  logic [SRAM_AW-1:0] addr;
  vec_t wdata, rdata;
  vec_t model [SRAM_DEPTH];
  int checks = 0, failures = 0;

  sram_sp dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  int a;
  vec_t expv;

  initial begin
    addr = '0; wdata = '0;
    for (a = 0; a < int'(SRAM_DEPTH); a++) begin
      @(negedge clk);
      cen = 1; wen = 1; addr = SRAM_AW'(a);
      for (int k = 0; k < int'(FETCH_W); k++) wdata[k] = word_t'($urandom);
      model[a] = wdata;
    end
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      if ($urandom_range(0, 3) == 0) begin
        a = $urandom_range(0, SRAM_DEPTH - 1);
        cen = 1; wen = 1; addr = SRAM_AW'(a);
        for (int k = 0; k < int'(FETCH_W); k++) wdata[k] = word_t'($urandom);
        model[a] = wdata;
      end else begin
        a = $urandom_range(0, SRAM_DEPTH - 1);
        expv = model[a];
        cen = 1; wen = 0; addr = SRAM_AW'(a);
        @(negedge clk);
        check(rdata == expv, "read data one cycle later");
        cen = $urandom_range(0, 1); wen = 1; addr = SRAM_AW'($urandom_range(0, SRAM_DEPTH - 1));
        wdata = model[addr];
        @(negedge clk);
        check(rdata == expv, "read data holds");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

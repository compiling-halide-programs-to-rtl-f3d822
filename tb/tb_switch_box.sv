// Self-checking test of the switch box: random track inputs, core outputs
// and select codes; each output must show, one cycle later, the selected
// incoming track of the selected side or core output (zero for unused
// codes), and must hold its value while stalled.
module tb_switch_box;
  import ub_pkg::*;

  localparam int NT = 5, NC = 2, W = 16;
  logic clk = 0, rst_n = 0, stall = 0;
  logic [3:0][NT-1:0][2:0] sel;
  logic [3:0][NT-1:0][W-1:0] in, out, expv, held;
  logic [NC-1:0][W-1:0] core;
  int checks = 0, failures = 0;

  switch_box #(.W(W), .NT(NT), .NCORE(NC)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    sel = '0; in = '0; core = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      for (int s = 0; s < 4; s++)
        for (int t = 0; t < NT; t++) begin
          sel[s][t] = 3'($urandom_range(0, 5));
          in[s][t]  = W'($urandom);
        end
      core = {W'($urandom), W'($urandom)};
      for (int s = 0; s < 4; s++)
        for (int t = 0; t < NT; t++)
          expv[s][t] = (sel[s][t] < 3) ? in[(s + 1 + sel[s][t]) % 4][t] :
                       (sel[s][t] < 3 + NC) ? core[sel[s][t] - 3] : '0;
      stall = (n % 10 == 9);
      held  = out;
      @(negedge clk);
      checks++;
      if (out != (stall ? held : expv)) begin
        failures++;
        if (failures < 10) $display("FAIL cycle %0d stall %0d", n, stall);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

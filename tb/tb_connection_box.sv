// Self-checking test of the connection box: for every select value (and
// some beyond the last track) with random track data, the output must be
// track sel%NT of side sel/NT, or zero past the last track.
module tb_connection_box;
  import ub_pkg::*;

  localparam int NT = 5, W = 16;
  logic [CB_SEL_W-1:0] sel;
  logic [3:0][NT-1:0][W-1:0] in;
  logic [W-1:0] out;
  int checks = 0, failures = 0;

  connection_box #(.W(W), .NT(NT)) dut (.*);

  initial begin
    for (int n = 0; n < 500; n++) begin
      sel = CB_SEL_W'(n % 32);
      for (int s = 0; s < 4; s++)
        for (int t = 0; t < NT; t++) in[s][t] = W'($urandom);
      #1;
      checks++;
      if (out != ((int'(sel) < 4 * NT) ? in[int'(sel) / NT][int'(sel) % NT] : '0)) begin
        failures++;
        if (failures < 10) $display("FAIL sel %0d", sel);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

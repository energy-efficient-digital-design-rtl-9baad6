// tb_membrane_reg: random load/clear sequence against a cycle model: rst and
// clr zero the register, load writes d on the clock edge, otherwise it holds.
module tb_membrane_reg;
  int checks = 0, failures = 0, cyc = 0;
  logic clk = 0, rst = 1, clr = 0, load = 0;
  logic signed [8:0] d = 0, q;
  int model = 0;

  membrane_reg dut (.clk(clk), .rst(rst), .clr(clr), .load(load), .d(d), .q(q));

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    wait (cyc > 2000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(posedge clk); #1 rst = 0;
    for (int i = 0; i < 500; i++) begin
      load = ($urandom_range(3) != 0);
      clr  = ($urandom_range(15) == 0);
      d    = 9'($urandom_range(511));
      @(posedge clk);
      if (clr) model = 0; else if (load) model = int'(d);
      #1;
      checks++;
      if (int'(q) != model) begin failures++; if (failures < 10) $display("FAIL i=%0d q=%0d exp=%0d", i, q, model); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_onehot_mux: random one-hot (and all-zero) selects, one per clock,
// against the selected word; checks the 3-clock latency of the default
// pipeline and a 4-input, 2-stage instance.
module tb_onehot_mux;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic [15:0]       sel;
  logic [15:0][31:0] din;
  logic [31:0]       dout;
  logic [3:0]        sel4;
  logic [3:0][7:0]   din4;
  logic [7:0]        dout4;

  onehot_mux dut (.clk, .sel, .din, .dout);
  onehot_mux #(.N(4), .W(8), .STAGES(2)) dut4 (.clk, .sel(sel4), .din(din4), .dout(dout4));

  logic [31:0] exp16 [$];
  logic [7:0]  exp4  [$];

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 1000; t++) begin
      automatic int k = $urandom_range(0, 16);
      automatic int k4 = $urandom_range(0, 4);
      sel <= (k == 16) ? 16'h0 : 16'(1) << k;
      sel4 <= (k4 == 4) ? 4'h0 : 4'(1) << k4;
      for (int i = 0; i < 16; i++) din[i] <= $urandom;
      for (int i = 0; i < 4; i++)  din4[i] <= 8'($urandom);
      #1;
      exp16.push_back(k == 16 ? 32'h0 : din[k]);
      exp4.push_back(k4 == 4 ? 8'h0 : din4[k4]);
      @(posedge clk);
      // after the edge ending clock t, clock t-2 (3 stages) / t-1 (2 stages) is out
      #1;
      if (t >= 2) begin
        checks++;
        if (dout != exp16[t-2]) begin failures++; $display("FAIL 16:1 t=%0d", t); end
      end
      if (t >= 1) begin
        checks++;
        if (dout4 != exp4[t-1]) begin failures++; $display("FAIL 4:1 t=%0d", t); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_carry_arbiter: checks the subtract-one arbiter.
// Directed: the worked example (an 8-lane bank vector with lanes 1, 2 and 4
// requesting) must grant exactly one lane per clock, lanes 1, 2, 4 in three
// consecutive clocks and then nothing. Random: for 16 lanes, each loaded
// vector must produce its set bits, one-hot, lowest first, in popcount
// clocks; a new vector loaded in the clock of the last grant must follow
// with no gap.
module tb_carry_arbiter;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge, so that the asynchronous resets act
  always #5 clk = ~clk;

  logic        load = 0, load8 = 0;
  logic [15:0] bank, grant;
  logic [7:0]  bank8, grant8;
  logic        active, active8;

  carry_arbiter dut (.clk, .rst_n, .load, .run(1'b1), .bank, .grant, .active);
  carry_arbiter #(.LANES(8)) dut8 (.clk, .rst_n, .load(load8), .run(1'b1), .bank(bank8),
                                   .grant(grant8), .active(active8));

  task automatic chk(input string w, input logic c);
    checks++;
    if (!c) begin failures++; $display("FAIL %s at %0t", w, $time); end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    // worked example: lanes 1, 2, 4
    load8 <= 1; bank8 <= 8'b0001_0110;
    @(posedge clk);
    load8 <= 0;
    #1 chk("ex c1", grant8 == 8'b0000_0010);
    @(posedge clk); #1 chk("ex c2", grant8 == 8'b0000_0100);
    @(posedge clk); #1 chk("ex c3", grant8 == 8'b0001_0000);
    @(posedge clk); #1 chk("ex done", grant8 == 8'b0 && !active8);

    // random, back to back
    begin
      automatic logic [15:0] v = 16'($urandom) | 16'(1);
      load <= 1; bank <= v;
      @(posedge clk);
      for (int t = 0; t < 2000; t++) begin
        automatic logic [15:0] rem = v;
        load <= 0;
        while (rem != 0) begin
          automatic logic [15:0] low = rem & (~rem + 16'd1);
          #1;
          chk("grant", grant == low);
          chk("active", active);
          rem = rem & ~low;
          if (rem == 0) begin
            // next vector loaded while the last grant is shown
            v = 16'($urandom);
            if (t % 7 == 0) v = 16'hFFFF;
            if (v == 0) v = 16'h8000;
            load <= 1; bank <= v;
          end
          @(posedge clk);
        end
      end
      load <= 0;
      repeat (20) @(posedge clk);
      #1 chk("idle", !active && grant == 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

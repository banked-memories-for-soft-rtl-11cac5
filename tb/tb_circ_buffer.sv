// tb_circ_buffer: random simultaneous pushes and pops against a queue
// model. Checks the show-ahead head word, empty/full and the free count,
// and that a filled buffer holds exactly DEPTH entries.
module tb_circ_buffer;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge, so that the asynchronous resets act
  always #5 clk = ~clk;

  localparam int D = 16;
  logic        wr_en = 0, rd_en = 0;
  logic [31:0] wr_data, rd_data;
  logic        empty, full;
  logic [4:0]  free;

  circ_buffer #(.WIDTH(32), .DEPTH(D)) dut (.*);

  logic [31:0] q [$];

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
    for (int t = 0; t < 4000; t++) begin
      automatic int phase = (t / 500) % 3;   // fill-biased, drain-biased, balanced
      automatic bit w, r;
      #1;
      chk("empty", empty == (q.size() == 0));
      chk("full", full == (q.size() == D));
      chk("free", free == 5'(D - q.size()));
      if (q.size() > 0) chk("head", rd_data == q[0]);
      w = ($urandom_range(0, 9) < (phase == 0 ? 8 : phase == 1 ? 2 : 5)) && (q.size() < D);
      r = ($urandom_range(0, 9) < (phase == 1 ? 8 : phase == 0 ? 2 : 5)) && (q.size() > 0);
      wr_en   <= w;
      rd_en   <= r;
      wr_data <= $urandom;
      @(posedge clk);
      if (r) void'(q.pop_front());
      if (w) q.push_back(wr_data);
    end
    wr_en <= 0; rd_en <= 0;
    // fill completely
    while (q.size() < D) begin
      wr_en <= 1; wr_data <= $urandom;
      @(posedge clk);
      q.push_back(wr_data);
    end
    wr_en <= 0;
    #1;
    chk("full after fill", full && free == 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

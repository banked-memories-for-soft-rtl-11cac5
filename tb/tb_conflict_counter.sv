// tb_conflict_counter: checks the per-operation conflict count (largest
// number of lanes hitting one bank) and its pipeline latency of 4 clocks
// (16 banks), with one operation per clock: presented in clock t, out_valid
// is high in clock t+4 (the monitor sees it at the edge ending that clock). Directed cases: all lanes in
// distinct banks (1), all lanes in one bank (16), the worked 8-bank example
// (3); then random operations with a random number of lanes forced into
// one bank. The reference count is computed here with a histogram.
module tb_conflict_counter;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge, so that the asynchronous resets act
  always #5 clk = ~clk;

  logic              in_valid = 0;
  logic [15:0][15:0] in_addr;
  logic [7:0]        in_side;
  logic              out_valid, busy;
  logic [4:0]        out_count;
  logic [15:0][15:0] out_addr;
  logic [7:0]        out_side;

  conflict_counter #(.SIDE_W(8)) dut (.*);

  // 8-bank instance for the worked example
  logic              v8 = 0, o8v, b8;
  logic [7:0][15:0]  a8, o8a;
  logic [3:0]        o8c;
  logic [0:0]        s8o;
  conflict_counter #(.LANES(8), .NUM_BANKS(8), .SIDE_W(1)) dut8 (
    .clk, .rst_n, .in_valid(v8), .in_addr(a8), .in_side(1'b0), .out_valid(o8v),
    .out_count(o8c), .out_addr(o8a), .out_side(s8o), .busy(b8));

  int exp_q [$];
  int sent_cycle [$];
  int cycle = 0;
  always @(negedge clk) cycle++;  // clock number; clock t ends at posedge t+1

  function automatic int ref_count(logic [15:0][15:0] a);
    int h [16] = '{default: 0};
    int m = 0;
    for (int l = 0; l < 16; l++) h[a[l] % 16]++;
    foreach (h[b]) if (h[b] > m) m = h[b];
    return m;
  endfunction

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // monitor
  int seen = 0;
  always @(posedge clk) if (rst_n && out_valid) begin
    automatic int e, c0;
    e = exp_q.pop_front();
    c0 = sent_cycle.pop_front();
    checks += 3;
    if (out_count != 5'(e)) begin failures++; $display("FAIL count %0d exp %0d", out_count, e); end
    if (out_side != 8'(seen)) begin failures++; $display("FAIL side %0d exp %0d", out_side, seen); end
    if (cycle - c0 != 5) begin failures++; $display("FAIL latency %0d", cycle - c0); end
    seen++;
  end

  task automatic send(input logic [15:0][15:0] a, input int idx);
    in_valid <= 1; in_addr <= a; in_side <= 8'(idx);
    exp_q.push_back(ref_count(a));
    sent_cycle.push_back(cycle);
    @(posedge clk);
  endtask

  initial begin
    automatic logic [15:0][15:0] a;
    automatic int n = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int l = 0; l < 16; l++) a[l] = 16'(l + 16 * l);       send(a, n++);  // 1
    for (int l = 0; l < 16; l++) a[l] = 16'(5 + 16 * l);       send(a, n++);  // 16
    for (int t = 0; t < 300; t++) begin
      automatic int k = $urandom_range(1, 16);
      automatic int bk = $urandom_range(0, 15);
      for (int l = 0; l < 16; l++) a[l] = 16'($urandom);
      for (int l = 0; l < k; l++) a[l] = {a[l][15:4], 4'(bk)};
      send(a, n++);
      if ($urandom_range(0, 3) == 0) begin in_valid <= 0; @(posedge clk); end
    end
    in_valid <= 0;
    repeat (10) @(posedge clk);
    checks++;
    if (seen != n || busy) begin failures++; $display("FAIL seen %0d of %0d", seen, n); end
    // worked example on 8 banks: banks 0,1,1,3,1,5,7,3 -> 3
    begin
      automatic int ex [8] = '{0, 1, 1, 3, 1, 5, 7, 3};
      for (int l = 0; l < 8; l++) a8[l] = 16'(ex[l] + 8 * l);
    end
    v8 <= 1; @(posedge clk); v8 <= 0;
    repeat (2) @(posedge clk);   // 8 banks: latency 3
    #1;
    checks += 2;
    if (!o8v) begin failures++; $display("FAIL 8-bank latency"); end
    if (o8c != 4'd3) begin failures++; $display("FAIL 8-bank example count %0d", o8c); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

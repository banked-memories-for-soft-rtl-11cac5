// tb_read_ctrl: read access controller.
// Sends read instructions of random length as operations, one per clock,
// with a chosen number of lanes forced into one bank, and checks that
//  * every operation is issued once, in order, with its addresses and tag;
//  * its count equals the largest bank occupancy computed here;
//  * the first operation is issued 5 clocks after it was presented, and
//    each later one exactly count(previous) clocks after the previous one
//    (operations back to back, no idle clocks);
//  * hold_fetch is high while the instruction is outstanding and falls
//    only after the (modelled) shared memory reports it is done.
module tb_read_ctrl;
  import simt_mem_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge, so that the asynchronous resets act
  always #5 clk = ~clk;
  int cycle = 0;
  always @(negedge clk) cycle++;

  logic              rd_enable = 0;
  logic [15:0][15:0] rd_addr;
  rd_tag_t           rd_tag;
  logic              iss_valid;
  logic [15:0][15:0] iss_addr;
  rd_tag_t           iss_tag;
  logic [4:0]        iss_count;
  logic              mem_rd_busy = 0;
  logic              hold_fetch;

  read_ctrl dut (.*);

  typedef struct { logic [15:0][15:0] a; rd_tag_t tag; int cnt; int sent; } op_t;
  op_t sent_q [$];
  int  last_issue = -1, last_cnt = 0, issued = 0;
  int  mem_busy_left = 0;

  task automatic chk(input string w, input logic c);
    checks++;
    if (!c) begin failures++; $display("FAIL %s at cycle %0d", w, cycle); end
  endtask

  function automatic int ref_count(logic [15:0][15:0] a);
    int h [16] = '{default: 0};
    int m = 0;
    for (int l = 0; l < 16; l++) h[a[l][3:0]]++;
    foreach (h[b]) if (h[b] > m) m = h[b];
    return m;
  endfunction

  // issue monitor and a crude model of the memory's busy flag
  always @(posedge clk) begin
    if (rst_n && iss_valid) begin
      automatic op_t o = sent_q.pop_front();
      chk("addr", iss_addr == o.a);
      chk("tag", iss_tag == o.tag);
      chk("count", int'(iss_count) == o.cnt);
      if (last_issue < 0 || cycle - last_issue > last_cnt)
        chk("first-issue latency 5", cycle - o.sent == 6);
      else
        chk("spacing", cycle - last_issue == last_cnt);
      last_issue = cycle;
      last_cnt = o.cnt;
      issued++;
      mem_busy_left = o.cnt + 10;
    end else if (mem_busy_left > 0) mem_busy_left--;
    mem_rd_busy <= (mem_busy_left > 0) || (rst_n && iss_valid);
  end

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    automatic int total = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int ins = 0; ins < 12; ins++) begin
      automatic int n = (ins == 0) ? 1 : $urandom_range(1, 64);
      automatic int hold_seen = 0;
      last_issue = -1;
      for (int k = 0; k < n; k++) begin
        automatic op_t o;
        automatic int c = $urandom_range(1, 16);
        automatic int bk = $urandom_range(0, 15);
        for (int l = 0; l < 16; l++) o.a[l] = 16'($urandom);
        for (int l = 0; l < c; l++) o.a[l][3:0] = 4'(bk);
        if (ins == 1) for (int l = 0; l < 16; l++) o.a[l][3:0] = 4'(l);  // conflict free
        o.tag.dest = 5'($urandom);
        o.tag.warp = 8'(k);
        o.cnt = ref_count(o.a);
        o.sent = cycle;
        sent_q.push_back(o);
        rd_enable <= 1; rd_addr <= o.a; rd_tag <= o.tag;
        @(posedge clk);
        total++;
      end
      rd_enable <= 0;
      // fetch must stay held until the memory is finished
      while (hold_fetch) begin
        @(posedge clk);
        hold_seen++;
      end
      chk("all issued when hold drops", issued == total && !mem_rd_busy);
      chk("hold lasted", hold_seen > 5);
      repeat ($urandom_range(0, 3)) @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

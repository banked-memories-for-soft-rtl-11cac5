// tb_write_ctrl: write access controller.
// Checks issue order, data, counts and spacing as for the read controller,
// and the two kinds of write:
//  * a non-blocking write instruction leaves hold_fetch low once its
//    operations have been presented, while the controller is still issuing;
//  * a blocking write holds fetch until every operation has been issued and
//    the (modelled) memory is idle;
//  * a long non-blocking instruction of fully conflicting operations (16
//    clocks each) followed by a second one fills the buffer far enough that hold_fetch is raised for
//    lack of room, and it falls again once the buffer drains.
module tb_write_ctrl;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge, so that the asynchronous resets act
  always #5 clk = ~clk;
  int cycle = 0;
  always @(negedge clk) cycle++;

  logic              wr_enable = 0, wr_blocking = 0;
  logic [15:0][15:0] wr_addr;
  logic [15:0][31:0] wr_data;
  logic              iss_valid;
  logic [15:0][15:0] iss_addr;
  logic [15:0][31:0] iss_data;
  logic [4:0]        iss_count;
  logic              mem_wr_busy = 0;
  logic              hold_fetch, hold_full;

  write_ctrl dut (.*);

  typedef struct { logic [15:0][15:0] a; logic [15:0][31:0] d; int cnt; int sent; } op_t;
  op_t sent_q [$];
  int  last_issue = -1, last_cnt = 0, issued = 0, mem_busy_left = 0;
  int  full_holds = 0;

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

  always @(posedge clk) begin
    if (rst_n && iss_valid) begin
      automatic op_t o = sent_q.pop_front();
      chk("addr", iss_addr == o.a);
      chk("data", iss_data == o.d);
      chk("count", int'(iss_count) == o.cnt);
      if (last_issue < 0 || cycle - last_issue > last_cnt)
        chk("first-issue latency 5", cycle - o.sent == 6);
      else
        chk("spacing", cycle - last_issue == last_cnt);
      last_issue = cycle;
      last_cnt = o.cnt;
      issued++;
      mem_busy_left = o.cnt + 3;
    end else if (mem_busy_left > 0) mem_busy_left--;
    mem_wr_busy <= (mem_busy_left > 0) || (rst_n && iss_valid);
    if (hold_full) full_holds++;
  end

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send_instr(input int n, input bit blocking, input int conflicts);
    for (int k = 0; k < n; k++) begin
      automatic op_t o;
      automatic int c = (conflicts > 0) ? conflicts : $urandom_range(1, 16);
      automatic int bk = $urandom_range(0, 15);
      for (int l = 0; l < 16; l++) begin
        o.a[l] = 16'($urandom);
        o.d[l] = $urandom;
      end
      for (int l = 0; l < c; l++) o.a[l][3:0] = 4'(bk);
      o.cnt = ref_count(o.a);
      o.sent = cycle;
      sent_q.push_back(o);
      wr_enable <= 1; wr_blocking <= blocking; wr_addr <= o.a; wr_data <= o.d;
      @(posedge clk);
    end
    wr_enable <= 0;
    wr_blocking <= 0;
  endtask

  initial begin
    automatic int total = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    // non-blocking: fetch is free right after the operations are in
    last_issue = -1;
    send_instr(20, 0, 8);
    total += 20;
    #1 chk("non-blocking write does not hold", !hold_fetch);
    wait (issued == total && !mem_wr_busy);
    @(posedge clk);
    // blocking: held until done
    for (int r = 0; r < 6; r++) begin
      automatic int n = $urandom_range(1, 40);
      last_issue = -1;
      send_instr(n, 1, 0);
      total += n;
      #1 chk("blocking write holds", hold_fetch);
      while (hold_fetch) @(posedge clk);
      chk("blocking released only when done", issued == total && !mem_wr_busy);
    end
    // long non-blocking instruction of full conflicts: buffer fills
    last_issue = -1;
    send_instr(256, 0, 16);
    #1 chk("room for one more instruction", !hold_fetch);
    send_instr(100, 0, 16);
    total += 356;
    #1 chk("buffer-space hold raised", hold_fetch && hold_full);
    while (hold_fetch) @(posedge clk);
    chk("buffer-space hold released with room", issued >= total - 250);
    wait (issued == total);
    chk("buffer-space hold seen", full_holds > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

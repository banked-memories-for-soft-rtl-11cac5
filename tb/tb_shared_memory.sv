// tb_shared_memory: the banked memory with its arbiters and muxes.
// The testbench plays both access controllers: it issues operations spaced
// by their conflict counts, computed here. It first fills the lower half of
// the memory through the write port with random data, then reads random
// operations (random bank conflicts) while writing the upper half through
// the write port at the same time, and finally reads the upper half back.
// For every read it checks each lane's word, the tag, that each lane is
// written back exactly once, and the exact clock: a lane that is the r-th
// requester (counting from lane 0) of its bank in an operation issued in
// clock t returns in clock t+10+r.
module tb_shared_memory;
  import simt_mem_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge, so that the asynchronous resets act
  always #5 clk = ~clk;
  int cycle = 0;
  always @(negedge clk) cycle++;

  logic              rd_valid = 0, wr_valid = 0;
  logic [15:0][15:0] rd_addr, wr_addr;
  rd_tag_t           rd_tag, sp_tag;
  logic [15:0][31:0] wr_data, sp_data;
  logic [15:0]       sp_we;
  logic              rd_busy, wr_busy;

  shared_memory dut (.*);

  logic [31:0] model [logic [15:0]];
  // expected write-backs: per lane a queue of {cycle, data, tag}
  typedef struct { int when; logic [31:0] d; rd_tag_t tag; } wb_t;
  wb_t exp_wb [16][$];
  int  wb_count = 0, wb_expected = 0;

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

  // lane l's position among the lanes that address the same bank
  function automatic int rank_of(logic [15:0][15:0] a, int l);
    int r = 0;
    for (int j = 0; j < l; j++) if (a[j][3:0] == a[l][3:0]) r++;
    return r;
  endfunction

  always @(posedge clk) begin
    for (int l = 0; l < 16; l++) begin
      if (sp_we[l]) begin
        if (exp_wb[l].size() == 0) begin
          chk("unexpected write-back", 1'b0);
        end else begin
          automatic wb_t e = exp_wb[l].pop_front();
          chk($sformatf("read data lane %0d got %h exp %h", l, sp_data[l], e.d), sp_data[l] == e.d);
          chk("read tag", sp_tag == e.tag);
          chk("read timing", cycle == e.when);
          wb_count++;
        end
      end
    end
  end

  // drive one operation for the coming clock; returns its clock count
  function automatic int start_read(input logic [15:0][15:0] a, input rd_tag_t tag);
    for (int l = 0; l < 16; l++) begin
      automatic wb_t e;
      e.d = model[a[l]];
      e.tag = tag;
      e.when = cycle + 11 + rank_of(a, l);
      exp_wb[l].push_back(e);
      wb_expected++;
    end
    rd_valid <= 1; rd_addr <= a; rd_tag <= tag;
    return ref_count(a);
  endfunction

  function automatic int start_write(input logic [15:0][15:0] a, input logic [15:0][31:0] d);
    wr_valid <= 1; wr_addr <= a; wr_data <= d;
    return ref_count(a);
  endfunction

  task automatic do_read(input logic [15:0][15:0] a, input rd_tag_t tag);
    automatic int n = ref_count(a);
    for (int l = 0; l < 16; l++) begin
      automatic wb_t e;
      e.d = model[a[l]];
      e.tag = tag;
      e.when = cycle + 11 + rank_of(a, l);
      exp_wb[l].push_back(e);
      wb_expected++;
    end
    rd_valid <= 1; rd_addr <= a; rd_tag <= tag;
    @(posedge clk);
    if (n > 1) begin
      rd_valid <= 0;
      repeat (n - 1) @(posedge clk);
    end
  endtask

  task automatic do_write(input logic [15:0][15:0] a, input logic [15:0][31:0] d);
    automatic int n = ref_count(a);
    wr_valid <= 1; wr_addr <= a; wr_data <= d;
    @(posedge clk);
    if (n > 1) begin
      wr_valid <= 0;
      repeat (n - 1) @(posedge clk);
    end
  endtask

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // random distinct addresses inside [base, base+span)
  function automatic logic [15:0][15:0] rand_op(int base, int span, int conflicts);
    logic [15:0][15:0] a;
    int bk = $urandom_range(0, 15);
    for (int l = 0; l < 16; l++) begin
      automatic bit dup;
      do begin
        a[l] = 16'(base + $urandom_range(0, span - 1));
        if (l < conflicts) a[l][3:0] = 4'(bk);
        dup = 0;
        for (int j = 0; j < l; j++) if (a[j] == a[l]) dup = 1;
      end while (dup);
    end
    return a;
  endfunction

  initial begin
    automatic logic [15:0] hi_addrs [$];
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    // fill 0 .. 4095 (256 conflict-free operations: 16 consecutive words)
    for (int op = 0; op < 256; op++) begin
      automatic logic [15:0][15:0] a;
      automatic logic [15:0][31:0] d;
      for (int l = 0; l < 16; l++) begin
        a[l] = 16'(op * 16 + l);
        d[l] = $urandom;
        model[a[l]] = d[l];
      end
      do_write(a, d);
    end
    wr_valid <= 0;
    while (wr_busy) @(posedge clk);
    // reads of the filled region, concurrent with writes elsewhere; one
    // process schedules both ports, each operation count(op) clocks after
    // the previous one on its port
    begin
      automatic int rd_left = 300, wr_left = 200, rd_gap = 0, wr_gap = 0, k = 0;
      while (rd_left > 0 || wr_left > 0) begin
        if (rd_gap == 0 && rd_left > 0) begin
          automatic rd_tag_t t;
          automatic logic [15:0][15:0] a = rand_op(0, 4096, $urandom_range(1, 16));
          t.dest = 5'($urandom); t.warp = 8'(k++);
          rd_gap = start_read(a, t);
          rd_left--;
        end else if (rd_gap == 0) rd_valid <= 0;
        if (wr_gap == 0 && wr_left > 0) begin
          automatic logic [15:0][15:0] a = rand_op(32768, 8192, $urandom_range(1, 16));
          automatic logic [15:0][31:0] d;
          for (int l = 0; l < 16; l++) begin
            d[l] = $urandom;
            model[a[l]] = d[l];
            hi_addrs.push_back(a[l]);
          end
          wr_gap = start_write(a, d);
          wr_left--;
        end else if (wr_gap == 0) wr_valid <= 0;
        @(posedge clk);
        if (rd_gap > 0) rd_gap--;
        if (wr_gap > 0) wr_gap--;
        if (rd_gap > 0) rd_valid <= 0;
        if (wr_gap > 0) wr_valid <= 0;
      end
      while (rd_gap > 0 || wr_gap > 0) begin
        @(posedge clk);
        if (rd_gap > 0) rd_gap--;
        if (wr_gap > 0) wr_gap--;
      end
      rd_valid <= 0;
      wr_valid <= 0;
    end
    while (wr_busy) @(posedge clk);
    // read back what was written concurrently
    while (hi_addrs.size() >= 16) begin
      automatic logic [15:0][15:0] a;
      automatic rd_tag_t t = '{dest: 5'd7, warp: 8'd1};
      for (int l = 0; l < 16; l++) a[l] = hi_addrs.pop_front();
      do_read(a, t);
    end
    rd_valid <= 0;
    while (rd_busy) @(posedge clk);
    repeat (3) @(posedge clk);
    chk("all lanes written back", wb_count == wb_expected);
    chk("busy flags idle", !rd_busy && !wr_busy);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

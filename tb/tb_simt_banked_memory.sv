// tb_simt_banked_memory: end-to-end test of the banked memory subsystem at
// its full default size (16 lanes, 16 banks, 64K words), with the testbench
// acting as the SIMT core's fetch/decode and SPs. Instructions are started
// only while hold_fetch is low; each is a stream of operations, one per
// clock. The program:
//  1. a blocking write instruction of 256 conflict-free operations filling
//     words 0..4095 (16 threads x 256 = one 4096-thread store);
//  2. read instructions with random bank conflicts over that region;
//  3. a non-blocking write to words 32768.. immediately followed by a read
//     instruction, which must overlap in time;
//  4. two back-to-back non-blocking write instructions of fully conflicting
//     operations, which must raise the buffer-space hold;
//  5. a read of everything written in 3 and 4.
// Every lane's returned word and tag are compared with a memory model kept
// here. Timing checks: the first word of a read instruction returns 15
// clocks after its first operation (5 in the controller, 10 in the memory),
// and a read instruction releases fetch between sum(counts)+14 and
// sum(counts)+20 clocks after it started, where the counts are computed
// here. Each mechanism (conflict-free operation, conflicting operation,
// full 16-way conflict, read hold, blocking-write hold, read/write overlap,
// buffer-space hold) is counted and must occur at least once.
module tb_simt_banked_memory;
  import simt_mem_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge, so that the asynchronous resets act
  always #5 clk = ~clk;
  int cycle = 0;
  always @(negedge clk) cycle++;

  logic              rd_enable = 0, wr_enable = 0, wr_blocking = 0;
  logic [15:0][15:0] rd_addr, wr_addr;
  rd_tag_t           rd_tag, sp_tag;
  logic [15:0][31:0] wr_data, sp_data;
  logic [15:0]       sp_we;
  logic              hold_fetch, rd_issue, wr_issue, wr_hold_full;
  logic [4:0]        rd_issue_count, wr_issue_count;

  simt_banked_memory dut (.*);

  // mechanism counters
  int n_conflict_free = 0, n_conflict = 0, n_full_conflict = 0;
  int n_read_hold = 0, n_block_hold = 0, n_overlap = 0, n_full_hold = 0;

  logic [31:0] model [logic [15:0]];
  typedef struct { logic [31:0] d; rd_tag_t tag; } wb_t;
  wb_t exp_wb [16][$];
  int  wb_count = 0, wb_expected = 0, first_wb = -1;
  int  rd_sum = 0, wr_pending = 0;

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

  always @(posedge clk) if (rst_n) begin
    for (int l = 0; l < 16; l++) if (sp_we[l]) begin
      if (exp_wb[l].size() == 0) chk("unexpected write-back", 1'b0);
      else begin
        automatic wb_t e = exp_wb[l].pop_front();
        chk("read data", sp_data[l] == e.d);
        chk("read tag", sp_tag == e.tag);
        wb_count++;
      end
    end
    if (|sp_we && first_wb < 0) first_wb = cycle;
    if (rd_issue) begin
      if (rd_issue_count == 5'd1) n_conflict_free++;
      else n_conflict++;
      if (rd_issue_count == 5'd16) n_full_conflict++;
    end
    if (wr_issue) begin
      if (wr_issue_count == 5'd1) n_conflict_free++;
      else n_conflict++;
      if (wr_issue_count == 5'd16) n_full_conflict++;
    end
    // a write being issued while a read is in flight (or the reverse)
    if ((wr_issue && dut.mem_rd_busy) || (rd_issue && dut.mem_wr_busy)) n_overlap++;
    if (wr_hold_full) n_full_hold++;
  end

  initial begin
    #3000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wait_fetch();
    while (hold_fetch) @(posedge clk);
  endtask

  // write instruction: ops[] addresses and data, one operation per clock
  task automatic write_instr(input logic [15:0][15:0] a [$], input bit blocking);
    foreach (a[k]) begin
      automatic logic [15:0][31:0] d;
      for (int l = 0; l < 16; l++) begin
        d[l] = $urandom;
        model[a[k][l]] = d[l];
      end
      wr_enable <= 1; wr_blocking <= blocking; wr_addr <= a[k]; wr_data <= d;
      @(posedge clk);
    end
    wr_enable <= 0;
    wr_blocking <= 0;
  endtask

  // read instruction; checks the first-word latency and the hold duration
  task automatic read_instr(input logic [15:0][15:0] a [$], input logic [4:0] dest);
    automatic int start = cycle, held = 0, sum = 0;
    first_wb = -1;
    foreach (a[k]) begin
      automatic rd_tag_t t = '{dest: dest, warp: 8'(k)};
      for (int l = 0; l < 16; l++) begin
        automatic wb_t e = '{d: model[a[k][l]], tag: t};
        exp_wb[l].push_back(e);
        wb_expected++;
      end
      sum += ref_count(a[k]);
      rd_enable <= 1; rd_addr <= a[k]; rd_tag <= t;
      @(posedge clk);
    end
    rd_enable <= 0;
    while (hold_fetch) begin
      @(posedge clk);
      held++;
    end
    n_read_hold++;
    chk("first read word after 15 clocks", first_wb - start == 16);
    chk($sformatf("read instruction length %0d for %0d memory clocks", cycle - start, sum),
        (cycle - start >= sum + 14) && (cycle - start <= sum + 20));
  endtask

  initial begin
    automatic logic [15:0][15:0] ops [$];
    automatic logic [15:0]       hi [$];
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);

    // 1. blocking fill of words 0..4095
    ops = {};
    for (int k = 0; k < 256; k++) begin
      automatic logic [15:0][15:0] a;
      for (int l = 0; l < 16; l++) a[l] = 16'(16 * k + l);
      ops.push_back(a);
    end
    write_instr(ops, 1);
    #1 chk("blocking write holds fetch", hold_fetch);
    while (hold_fetch) begin @(posedge clk); n_block_hold++; end
    chk("blocking write done when released", !dut.mem_wr_busy);

    // 2. reads with random conflicts (one with a 16-way conflict)
    for (int r = 0; r < 4; r++) begin
      ops = {};
      for (int k = 0; k < 32; k++) ops.push_back(rand_op(0, 4096, (k == 5) ? 16 : $urandom_range(1, 8)));
      wait_fetch();
      read_instr(ops, 5'(r));
    end

    // 3. non-blocking write, then a read right away
    ops = {};
    for (int k = 0; k < 48; k++) begin
      automatic logic [15:0][15:0] a = rand_op(32768, 4096, $urandom_range(4, 16));
      ops.push_back(a);
      for (int l = 0; l < 16; l++) hi.push_back(a[l]);
    end
    wait_fetch();
    write_instr(ops, 0);
    #1 chk("non-blocking write leaves fetch free", !hold_fetch);
    ops = {};
    for (int k = 0; k < 32; k++) ops.push_back(rand_op(0, 4096, $urandom_range(1, 4)));
    read_instr(ops, 5'd9);

    // 4. two long non-blocking writes of full conflicts
    for (int w = 0; w < 2; w++) begin
      ops = {};
      for (int k = 0; k < 256; k++) begin
        automatic logic [15:0][15:0] a;
        for (int l = 0; l < 16; l++) a[l] = 16'(40960 + 4096 * w + 256 * l + k);  // one bank per op
        ops.push_back(a);
        for (int l = 0; l < 16; l++) hi.push_back(a[l]);
      end
      wait_fetch();
      write_instr(ops, 0);
    end
    while (dut.mem_wr_busy || dut.u_write_ctrl.busy || hold_fetch) @(posedge clk);

    // 5. read back everything written in 3 and 4 (in the order written)
    while (hi.size() >= 16) begin
      ops = {};
      for (int k = 0; k < 64 && hi.size() >= 16; k++) begin
        automatic logic [15:0][15:0] a;
        for (int l = 0; l < 16; l++) a[l] = hi.pop_front();
        ops.push_back(a);
      end
      wait_fetch();
      read_instr(ops, 5'd31);
    end
    repeat (5) @(posedge clk);

    chk("every lane written back", wb_count == wb_expected);
    $display("mechanisms: conflict-free ops %0d, conflicting ops %0d, 16-way %0d, read holds %0d, blocking-write hold clocks %0d, read/write overlap %0d, buffer-space hold clocks %0d",
             n_conflict_free, n_conflict, n_full_conflict, n_read_hold, n_block_hold, n_overlap, n_full_hold);
    chk("conflict-free operation seen", n_conflict_free > 0);
    chk("conflicting operation seen", n_conflict > 0);
    chk("16-way conflict seen", n_full_conflict > 0);
    chk("read hold seen", n_read_hold > 0);
    chk("blocking-write hold seen", n_block_hold > 0);
    chk("read/write overlap seen", n_overlap > 0);
    chk("buffer-space hold seen", n_full_hold > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_large_memory: the paper's largest memory, 448 KB over 16 banks, built
// from half banks: the top with 17-bit word addresses, 7168 words per bank
// (4096 in the lower and 3072 in the upper half bank) and HALF_BANKS = 1.
// A default-size top runs beside it for the timing comparison.
//  1. Latency: the same conflict-free read instruction is sent to both;
//     the first word must reach the lanes exactly 2 clocks later in the
//     half-bank memory, and its fetch hold must last 2 clocks longer.
//  2. Data: blocking write instructions of 64 operations with random
//     addresses over the whole 114688 words (distinct within an operation),
//     then read instructions of the same addresses in a new random order;
//     every lane's word is compared with a model, and each lane must be
//     strobed exactly once per operation.
// Counted mechanisms (each must occur): reads from the lower half banks,
// reads from the upper half banks (address >= 65536), operations with bank
// conflicts.
module tb_large_memory;
  import simt_mem_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge, so that the asynchronous resets act
  always #5 clk = ~clk;
  int cycle = 0;
  always @(negedge clk) cycle++;

  localparam int AW = 17, WORDS = 114688;   // 448 KB of 32-bit words

  logic              rd_enable = 0, wr_enable = 0, wr_blocking = 0;
  logic [15:0][AW-1:0] rd_addr, wr_addr;
  rd_tag_t           rd_tag, sp_tag;
  logic [15:0][31:0] wr_data, sp_data;
  logic [15:0]       sp_we;
  logic              hold_fetch, rd_issue, wr_issue, wr_hold_full;
  logic [4:0]        rd_issue_count, wr_issue_count;

  simt_banked_memory #(.ADDR_W(AW), .BANK_WORDS(7168), .HALF_BANKS(1'b1)) dut (.*);

  // default-size reference instance, read only in part 1
  logic [15:0][15:0] s_rd_addr;
  rd_tag_t           s_sp_tag;
  logic [15:0][31:0] s_sp_data;
  logic [15:0]       s_sp_we;
  logic              s_hold, s_rd_issue, s_wr_issue, s_wr_hold_full;
  logic [4:0]        s_rd_issue_count, s_wr_issue_count;

  simt_banked_memory ref_mem (
    .clk, .rst_n, .rd_enable, .rd_addr(s_rd_addr), .rd_tag,
    .wr_enable(1'b0), .wr_blocking(1'b0), .wr_addr('0), .wr_data('0),
    .sp_we(s_sp_we), .sp_data(s_sp_data), .sp_tag(s_sp_tag), .hold_fetch(s_hold),
    .rd_issue(s_rd_issue), .rd_issue_count(s_rd_issue_count),
    .wr_issue(s_wr_issue), .wr_issue_count(s_wr_issue_count), .wr_hold_full(s_wr_hold_full)
  );

  int n_lower = 0, n_upper = 0, n_conflict = 0;

  logic [31:0] model [int];
  logic [31:0] regs [64][16];
  int          strobes [64][16];

  always @(posedge clk) if (rst_n) begin
    for (int l = 0; l < 16; l++) if (sp_we[l]) begin
      regs[sp_tag.warp][l] <= sp_data[l];
      strobes[sp_tag.warp][l]++;
    end
  end

  // first write-back cycle of each instance
  int first_big = -1, first_small = -1;
  always @(posedge clk) if (rst_n) begin
    if (|sp_we && first_big < 0) first_big = cycle;
    if (|s_sp_we && first_small < 0) first_small = cycle;
  end

  task automatic chk(input string w, input logic c);
    checks++;
    if (!c) begin failures++; $display("FAIL %s at cycle %0d", w, cycle); end
  endtask

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit has_conflict(logic [15:0][AW-1:0] a);
    for (int i = 0; i < 16; i++)
      for (int j = i + 1; j < 16; j++) if (a[i][3:0] == a[j][3:0]) return 1;
    return 0;
  endfunction

  initial begin
    int addrs [64][16];
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);

    // 1. latency against the default-size memory
    begin
      automatic int h_big = 0, h_small = 0;
      for (int l = 0; l < 16; l++) begin
        rd_addr[l] <= AW'(l); s_rd_addr[l] <= 16'(l);
      end
      rd_tag <= '{dest: 5'd3, warp: 8'd0};
      rd_enable <= 1;
      @(posedge clk);
      rd_enable <= 0;
      while (hold_fetch || s_hold) begin
        h_big += hold_fetch; h_small += s_hold;
        @(posedge clk);
      end
      chk($sformatf("half-bank write-back 2 clocks later (%0d vs %0d)", first_big, first_small),
          first_big - first_small == 2);
      chk($sformatf("half-bank fetch hold 2 clocks longer (%0d vs %0d)", h_big, h_small),
          h_big - h_small == 2);
    end

    // 2. data over the whole 448 KB
    for (int round = 0; round < 6; round++) begin
      // pick 64 x 16 addresses, distinct within an operation
      for (int k = 0; k < 64; k++)
        for (int l = 0; l < 16; l++) begin
          automatic bit dup;
          do begin
            addrs[k][l] = (round == 0 && k < 2) ? WORDS - 1 - 16 * k - l   // the very top words
                                                : int'($urandom % WORDS);
            dup = 0;
            for (int m = 0; m < l; m++) if (addrs[k][m] == addrs[k][l]) dup = 1;
          end while (dup);
        end
      // blocking write instruction
      for (int k = 0; k < 64; k++) begin
        automatic logic [15:0][AW-1:0] a;
        automatic logic [15:0][31:0] d;
        for (int l = 0; l < 16; l++) begin
          a[l] = AW'(addrs[k][l]); d[l] = $urandom;
          model[addrs[k][l]] = d[l];
        end
        wr_enable <= 1; wr_blocking <= 1; wr_addr <= a; wr_data <= d;
        @(posedge clk);
      end
      wr_enable <= 0; wr_blocking <= 0;
      @(posedge clk);
      while (hold_fetch) @(posedge clk);
      // read instruction: operations in reverse order, lanes rotated
      for (int k = 0; k < 64; k++)
        for (int l = 0; l < 16; l++) strobes[k][l] = 0;
      for (int k = 0; k < 64; k++) begin
        automatic logic [15:0][AW-1:0] a;
        for (int l = 0; l < 16; l++) begin
          a[l] = AW'(addrs[63 - k][(l + round) % 16]);
          if (a[l] >= AW'(65536)) n_upper++; else n_lower++;
        end
        if (has_conflict(a)) n_conflict++;
        rd_enable <= 1; rd_addr <= a; rd_tag <= '{dest: 5'd1, warp: 8'(k)};
        @(posedge clk);
      end
      rd_enable <= 0;
      @(posedge clk);
      while (hold_fetch) @(posedge clk);
      @(posedge clk);
      for (int k = 0; k < 64; k++)
        for (int l = 0; l < 16; l++) begin
          automatic int ad = addrs[63 - k][(l + round) % 16];
          chk($sformatf("word %0d (op %0d lane %0d)", ad, k, l), regs[k][l] == model[ad]);
          chk($sformatf("one strobe, op %0d lane %0d", k, l), strobes[k][l] == 1);
        end
    end

    $display("mechanisms: lower-half reads %0d, upper-half reads %0d, conflicting operations %0d",
             n_lower, n_upper, n_conflict);
    chk("lower half banks read", n_lower > 0);
    chk("upper half banks read", n_upper > 0);
    chk("bank conflicts", n_conflict > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_transpose: matrix-transpose workloads (32x32, 64x64 and 128x128 words)
// on the six banked memory types of the paper's transpose comparison: 16, 8
// and 4 banks, each with the plain (LSB) and the offset bank map. Each type
// is its own instance of the top with its own driver, acting as a core that
// runs 1024 threads per instruction (64 operations of 16 lanes).
// For each matrix size N: the source matrix is stored row-major at word 0;
// load instructions read it with thread t reading word t (a row segment per
// operation); store instructions write thread t's word to
// dst[(t % N) * N + t / N] (a column segment per operation: all 16 lanes in
// one bank). Stores are blocking. The result is read back and compared.
// The clocks that each load and store instruction holds fetch/decode are
// summed and printed next to the paper's cycle counts (which also include
// the SPs' write-back and instruction overheads of the authors' program,
// so they are larger). Checks: every destination word; and each
// instruction holds fetch for the sum of its operations' conflict counts,
// worked out here from the addresses, plus a fixed overhead of 5 to 20
// clocks (controller and memory pipelines).
module tb_transpose;
  import simt_mem_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge, so that the asynchronous resets act
  always #5 clk = ~clk;
  int cycle = 0;
  always @(negedge clk) cycle++;

  localparam int NCFG = 6;
  localparam int NB [NCFG] = '{16, 16, 8, 8, 4, 4};
  localparam int SH [NCFG] = '{0, 1, 0, 1, 0, 1};
  localparam int DST = 32768;   // destination base
  // the paper's load and store cycles, per memory type and matrix size
  localparam int PAPER_LOAD [NCFG][3] = '{'{168, 1184, 8832}, '{106, 672, 4672},
                                          '{290, 2184, 16928}, '{166, 1160, 8736},
                                          '{544, 4224, 16896}, '{288, 2176, 16896}};
  localparam int PAPER_STORE [NCFG][3] = '{'{1054, 4216, 16864}, '{1050, 4200, 16800},
                                           '{1048, 4192, 16768}, '{1048, 4192, 16768},
                                           '{1046, 4184, 16736}, '{1046, 4184, 16736}};
  localparam int SIZES [3] = '{32, 64, 128};

  int done = 0;
  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
  end
  int load_clk [NCFG][3], store_clk [NCFG][3];

  task automatic chk(input string w, input logic c);
    checks++;
    if (!c) begin failures++; $display("FAIL %s at cycle %0d", w, cycle); end
  endtask

  // clocks an operation occupies the memory: the largest number of lanes
  // that share a bank under the given map
  function automatic int ref_count(logic [15:0][15:0] a, int nb, int sh);
    int h [16] = '{default: 0};
    int m = 0;
    for (int l = 0; l < 16; l++) h[(int'(a[l]) >> sh) % nb]++;
    foreach (h[b]) if (h[b] > m) m = h[b];
    return m;
  endfunction

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  for (genvar c = 0; c < NCFG; c++) begin : g_cfg
    logic              rd_enable = 0, wr_enable = 0, wr_blocking = 0;
    logic [15:0][15:0] rd_addr, wr_addr;
    rd_tag_t           rd_tag, sp_tag;
    logic [15:0][31:0] wr_data, sp_data;
    logic [15:0]       sp_we;
    logic              hold_fetch, rd_issue, wr_issue, wr_hold_full;
    logic [4:0]        rd_issue_count, wr_issue_count;

    simt_banked_memory #(.NUM_BANKS(NB[c]), .BANK_SHIFT(SH[c])) dut (
      .clk, .rst_n, .rd_enable, .rd_addr, .rd_tag, .wr_enable, .wr_blocking,
      .wr_addr, .wr_data, .sp_we, .sp_data, .sp_tag, .hold_fetch,
      .rd_issue, .rd_issue_count, .wr_issue, .wr_issue_count, .wr_hold_full
    );

    // registers of the 1024 threads: per operation (warp) and lane
    logic [31:0] regs [64][16];

    always @(posedge clk) if (rst_n) begin
      for (int l = 0; l < 16; l++) if (sp_we[l]) regs[sp_tag.warp[5:0]][l] <= sp_data[l];
    end

    // one instruction of 64 operations; returns the clocks fetch was held
    // and the sum of the operations' conflict counts
    task automatic instr(input bit is_write, input int n, input int base_thread,
                         input bit transpose_store, output int clocks, output int cost);
      automatic int start = cycle;
      cost = 0;
      for (int k = 0; k < 64; k++) begin
        automatic logic [15:0][15:0] a;
        automatic logic [15:0][31:0] d;
        for (int l = 0; l < 16; l++) begin
          automatic int t = base_thread + 16 * k + l;
          a[l] = transpose_store ? 16'(DST + (t % n) * n + t / n) : 16'(t);
          d[l] = regs[k][l];
        end
        cost += ref_count(a, NB[c], SH[c]);
        if (is_write) begin
          wr_enable <= 1; wr_blocking <= 1; wr_addr <= a; wr_data <= d;
        end else begin
          rd_enable <= 1; rd_addr <= a; rd_tag <= '{dest: 5'd1, warp: 8'(k)};
        end
        @(posedge clk);
      end
      rd_enable <= 0; wr_enable <= 0; wr_blocking <= 0;
      while (hold_fetch) @(posedge clk);
      clocks = cycle - start;
    endtask

    initial begin
      repeat (3) @(posedge clk);
      @(posedge clk);
      foreach (SIZES[s]) begin
        automatic int n = SIZES[s];
        load_clk[c][s] = 0; store_clk[c][s] = 0;
        // source matrix: element (i, j) at word i*n + j, value derived from i, j
        for (int w = 0; w < n * n; w += 1024) begin
          automatic int clocks, cost;
          for (int k = 0; k < 64; k++)
            for (int l = 0; l < 16; l++)
              regs[k][l] = {8'(s), 12'((w + 16 * k + l) / n), 12'((w + 16 * k + l) % n)};
          instr(1, n, w, 0, clocks, cost);
        end
        // the transpose: load, then store transposed, per 1024 threads
        for (int w = 0; w < n * n; w += 1024) begin
          automatic int clocks, cost;
          instr(0, n, w, 0, clocks, cost);
          load_clk[c][s] += clocks;
          chk($sformatf("banks %0d shift %0d %0dx%0d load instruction %0d clocks for cost %0d",
                        NB[c], SH[c], n, n, clocks, cost),
              clocks >= cost + 5 && clocks <= cost + 20);
          instr(1, n, w, 1, clocks, cost);
          store_clk[c][s] += clocks;
          chk($sformatf("banks %0d shift %0d %0dx%0d store instruction %0d clocks for cost %0d",
                        NB[c], SH[c], n, n, clocks, cost),
              clocks >= cost + 5 && clocks <= cost + 20);
        end
        // read back the destination and check
        for (int w = 0; w < n * n; w += 1024) begin
          for (int k = 0; k < 64; k++) begin
            automatic logic [15:0][15:0] a;
            for (int l = 0; l < 16; l++) a[l] = 16'(DST + w + 16 * k + l);
            rd_enable <= 1; rd_addr <= a; rd_tag <= '{dest: 5'd2, warp: 8'(k)};
            @(posedge clk);
          end
          rd_enable <= 0;
          while (hold_fetch) @(posedge clk);
          for (int k = 0; k < 64; k++)
            for (int l = 0; l < 16; l++) begin
              automatic int e = w + 16 * k + l;   // destination word (j, i): i = e % n, j = e / n
              chk($sformatf("banks %0d shift %0d %0dx%0d dst[%0d]", NB[c], SH[c], n, n, e),
                  regs[k][l] == {8'(s), 12'(e % n), 12'(e / n)});
            end
        end
      end
      done++;
    end
  end

  initial begin
    wait (done == NCFG);
    $display("transpose: fetch-hold clocks of the load and store instructions (paper's cycles in brackets)");
    for (int c = 0; c < NCFG; c++)
      foreach (SIZES[s])
        $display("  %2d banks %-6s %3dx%-3d  load %5d (%5d)  store %5d (%5d)",
                 NB[c], SH[c] ? "offset" : "LSB", SIZES[s], SIZES[s],
                 load_clk[c][s], PAPER_LOAD[c][s], store_clk[c][s], PAPER_STORE[c][s]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

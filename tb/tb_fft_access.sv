// tb_fft_access: the memory traffic of a 4096-point complex FFT (radix 4,
// 8 and 16), run on the default 16-bank memory with the plain and the
// offset bank map: six instances, each with its own driver acting as the
// core. The butterfly arithmetic belongs to the SPs and is not modelled;
// what is simulated is every load and store of the data passes.
// Data: point i has its I part at word 2i and its Q part at word 2i+1
// (8192 words). A radix-r Cooley-Tukey pass p runs 4096/r threads, one
// butterfly each: thread t, with span s = 4096 / r^(p+1), works on points
// g*s*r + o + j*s (g = t / s, o = t % s, j = 0..r-1). Per pass the core
// issues 2r load instructions (I and Q of each j, one register each) and
// then 2r store instructions in place; the "butterfly" here moves input j
// to output position (j+1) mod r so that the result can be checked. The
// stores are non-blocking except the last of each pass, which is blocking
// (the core leaves one idle clock after each store instruction)
// so that the next pass reads the new data (the use of blocking writes the
// paper describes for FFT passes). The thread-to-point mapping and the
// order of the instructions are this testbench's own choice; the paper
// does not give its program, so its FFT cycle counts are not reproduced.
// Checks: all 8192 words after the last pass against a model; each load
// instruction holds fetch for the sum of its operations' conflict counts
// (worked out here) plus 5 to 20 clocks. Printed: clocks per FFT, and the
// share of load operations that were conflict-free, per radix and map.
module tb_fft_access;
  import simt_mem_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge, so that the asynchronous resets act
  always #5 clk = ~clk;
  int cycle = 0;
  always @(negedge clk) cycle++;
  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
  end

  localparam int NPTS = 4096, NCFG = 6;
  localparam int RADIX [NCFG] = '{4, 8, 16, 4, 8, 16};
  localparam int PASSES [NCFG] = '{6, 4, 3, 6, 4, 3};
  localparam int SH [NCFG] = '{0, 0, 0, 1, 1, 1};

  int done = 0;
  int fft_clk [NCFG], ld_ops [NCFG], ld_free [NCFG];

  task automatic chk(input string w, input logic c);
    checks++;
    if (!c) begin failures++; $display("FAIL %s at cycle %0d", w, cycle); end
  endtask

  function automatic int ref_count(logic [15:0][15:0] a, int sh);
    int h [16] = '{default: 0};
    int m = 0;
    for (int l = 0; l < 16; l++) h[(int'(a[l]) >> sh) % 16]++;
    foreach (h[b]) if (h[b] > m) m = h[b];
    return m;
  endfunction

  // point j of thread t's butterfly in a pass of span s
  function automatic int point(int t, int j, int s, int r);
    return (t / s) * s * r + (t % s) + j * s;
  endfunction

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  for (genvar c = 0; c < NCFG; c++) begin : g_cfg
    localparam int R = RADIX[c];
    localparam int T = NPTS / R;        // threads per instruction
    localparam int OPS = T / 16;        // operations per instruction

    logic              rd_enable = 0, wr_enable = 0, wr_blocking = 0;
    logic [15:0][15:0] rd_addr, wr_addr;
    rd_tag_t           rd_tag, sp_tag;
    logic [15:0][31:0] wr_data, sp_data;
    logic [15:0]       sp_we;
    logic              hold_fetch, rd_issue, wr_issue, wr_hold_full;
    logic [4:0]        rd_issue_count, wr_issue_count;

    simt_banked_memory #(.BANK_SHIFT(SH[c])) dut (
      .clk, .rst_n, .rd_enable, .rd_addr, .rd_tag, .wr_enable, .wr_blocking,
      .wr_addr, .wr_data, .sp_we, .sp_data, .sp_tag, .hold_fetch,
      .rd_issue, .rd_issue_count, .wr_issue, .wr_issue_count, .wr_hold_full
    );

    // thread registers: [thread][register], register 2j+iq holds point j
    logic [31:0] regs [T][32];
    logic [31:0] model [2 * NPTS];

    always @(posedge clk) if (rst_n) begin
      for (int l = 0; l < 16; l++)
        if (sp_we[l]) regs[int'(sp_tag.warp) * 16 + l][sp_tag.dest] <= sp_data[l];
    end

    task automatic wait_hold();
      @(posedge clk);
      while (hold_fetch) @(posedge clk);
    endtask

    initial begin
      int start;
      ld_ops[c] = 0; ld_free[c] = 0;
      repeat (5) @(posedge clk);
      // initial data: 8192 words, written by blocking instructions of 256 operations
      for (int w = 0; w < 2 * NPTS; w += 4096) begin
        for (int k = 0; k < 256; k++) begin
          automatic logic [15:0][15:0] a;
          automatic logic [15:0][31:0] d;
          for (int l = 0; l < 16; l++) begin
            a[l] = 16'(w + 16 * k + l); d[l] = $urandom;
            model[w + 16 * k + l] = d[l];
          end
          wr_enable <= 1; wr_blocking <= 1; wr_addr <= a; wr_data <= d;
          @(posedge clk);
        end
        wr_enable <= 0; wr_blocking <= 0;
        wait_hold();
      end
      start = cycle;
      for (int p = 0, s = NPTS / R; p < PASSES[c]; p++, s /= R) begin
        // loads
        for (int j = 0; j < R; j++)
          for (int iq = 0; iq < 2; iq++) begin
            automatic int t0 = cycle, cost = 0;
            for (int k = 0; k < OPS; k++) begin
              automatic logic [15:0][15:0] a;
              automatic int cc;
              for (int l = 0; l < 16; l++) a[l] = 16'(2 * point(16 * k + l, j, s, R) + iq);
              cc = ref_count(a, SH[c]);
              cost += cc;
              ld_ops[c]++;
              if (cc == 1) ld_free[c]++;
              rd_enable <= 1; rd_addr <= a; rd_tag <= '{dest: 5'(2 * j + iq), warp: 8'(k)};
              @(posedge clk);
            end
            rd_enable <= 0;
            while (hold_fetch) @(posedge clk);
            chk($sformatf("radix %0d shift %0d pass %0d load %0d/%0d: %0d clocks for cost %0d",
                          R, SH[c], p, j, iq, cycle - t0, cost),
                cycle - t0 >= cost + 5 && cycle - t0 <= cost + 20);
          end
        // model of the pass: input j goes to output position (j+1) mod r
        begin
          automatic logic [31:0] nm [2 * NPTS] = model;
          for (int t = 0; t < T; t++)
            for (int j = 0; j < R; j++)
              for (int iq = 0; iq < 2; iq++)
                nm[2 * point(t, (j + 1) % R, s, R) + iq] = model[2 * point(t, j, s, R) + iq];
          model = nm;
        end
        // stores, the last one blocking
        for (int j = 0; j < R; j++)
          for (int iq = 0; iq < 2; iq++) begin
            for (int k = 0; k < OPS; k++) begin
              automatic logic [15:0][15:0] a;
              automatic logic [15:0][31:0] d;
              for (int l = 0; l < 16; l++) begin
                a[l] = 16'(2 * point(16 * k + l, (j + 1) % R, s, R) + iq);
                d[l] = regs[16 * k + l][2 * j + iq];
              end
              wr_enable <= 1; wr_blocking <= (j == R - 1 && iq == 1);
              wr_addr <= a; wr_data <= d;
              @(posedge clk);
            end
            wr_enable <= 0; wr_blocking <= 0;
            @(posedge clk);   // one idle clock between store instructions
            while (hold_fetch) @(posedge clk);
          end
      end
      fft_clk[c] = cycle - start;
      // read back all data, 16 operations at a time into registers 0..1
      for (int w = 0; w < 2 * NPTS; w += 512) begin
        for (int k = 0; k < 16; k++) begin
          automatic logic [15:0][15:0] a;
          for (int l = 0; l < 16; l++) a[l] = 16'(w + 32 * k + 2 * l);
          rd_enable <= 1; rd_addr <= a; rd_tag <= '{dest: 5'd0, warp: 8'(k)};
          @(posedge clk);
          for (int l = 0; l < 16; l++) a[l] = 16'(w + 32 * k + 2 * l + 1);
          rd_addr <= a; rd_tag <= '{dest: 5'd1, warp: 8'(k)};
          @(posedge clk);
        end
        rd_enable <= 0;
        while (hold_fetch) @(posedge clk);
        for (int k = 0; k < 16; k++)
          for (int l = 0; l < 16; l++)
            for (int iq = 0; iq < 2; iq++)
              chk($sformatf("radix %0d shift %0d word %0d", R, SH[c], w + 32 * k + 2 * l + iq),
                  regs[16 * k + l][iq] == model[w + 32 * k + 2 * l + iq]);
      end
      done++;
    end
  end

  initial begin
    wait (done == NCFG);
    $display("4096-point FFT memory traffic on 16 banks (loads and stores, no arithmetic)");
    for (int c = 0; c < NCFG; c++)
      $display("  radix %2d %-6s map: %0d passes, %6d clocks, %0d of %0d load operations conflict-free",
               RADIX[c], SH[c] ? "offset" : "LSB", PASSES[c], fft_clk[c], ld_free[c], ld_ops[c]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

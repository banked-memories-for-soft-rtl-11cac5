// tb_bank_ram: writes random words, then reads them back with one read per
// clock while writing elsewhere, checking data and the 3-clock read latency
// against a model array; also read-during-write of the same word (old data).
// A second bank built from two half banks (HALF = 1, 448 words = 256 + 192,
// so both halves and the uneven upper half are used) gets the same kind of
// stimulus and is checked for the same data with a read latency of 5.
module tb_bank_ram;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic        wr_en = 0, rd_en = 0;
  logic [7:0]  wr_addr, rd_addr;
  logic [31:0] wr_data, rd_data;

  bank_ram #(.DEPTH(256)) dut (.*);

  localparam int HD = 448;
  logic        h_wr_en = 0, h_rd_en = 0;
  logic [8:0]  h_wr_addr, h_rd_addr;
  logic [31:0] h_wr_data, h_rd_data;

  bank_ram #(.DEPTH(HD), .HALF(1'b1)) dut_half (
    .clk, .wr_en(h_wr_en), .wr_addr(h_wr_addr), .wr_data(h_wr_data),
    .rd_en(h_rd_en), .rd_addr(h_rd_addr), .rd_data(h_rd_data)
  );

  logic [31:0] model [256];
  logic [31:0] h_model [HD];
  logic [31:0] expq [$];
  logic [31:0] h_expq [$];

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < HD; a++) begin
      wr_en <= (a < 256); wr_addr <= 8'(a); wr_data <= $urandom;
      h_wr_en <= 1; h_wr_addr <= 9'(a); h_wr_data <= $urandom;
      @(posedge clk);
      if (a < 256) model[a] = wr_data;
      h_model[a] = h_wr_data;
    end
    wr_en <= 0; h_wr_en <= 0;
    for (int t = 0; t < 2000; t++) begin
      automatic logic [7:0] ra = 8'($urandom);
      automatic logic [7:0] wa = (t % 5 == 0) ? ra : 8'($urandom);
      automatic logic [8:0] hra = 9'($urandom % HD);
      automatic logic [8:0] hwa = (t % 5 == 0) ? hra : 9'($urandom % HD);
      rd_en <= 1; rd_addr <= ra;
      wr_en <= 1; wr_addr <= wa; wr_data <= $urandom;
      h_rd_en <= 1; h_rd_addr <= hra;
      h_wr_en <= 1; h_wr_addr <= hwa; h_wr_data <= $urandom;
      #1;
      expq.push_back(model[ra]);     // old data on a same-address write
      h_expq.push_back(h_model[hra]);
      @(posedge clk);
      model[wa] = wr_data;
      h_model[hwa] = h_wr_data;
      #1;
      if (t >= 2) begin
        checks++;
        if (rd_data != expq[t-2]) begin
          failures++; $display("FAIL read t=%0d got %h exp %h", t, rd_data, expq[t-2]);
        end
      end
      if (t >= 4) begin
        checks++;
        if (h_rd_data != h_expq[t-4]) begin
          failures++; $display("FAIL half-bank read t=%0d got %h exp %h", t, h_rd_data, h_expq[t-4]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

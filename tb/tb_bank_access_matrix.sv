// tb_bank_access_matrix: checks the one-hot/transpose bank access matrix.
// Three instances: the default 16-lane/16-bank LSB map, a 16-bank offset map
// (bank = address bits [4:1]) and an 8-lane/8-bank one that is driven with
// the worked 8-lane example (lane banks 0,1,1,3,1,5,7,3), whose columns must
// read bank0 = {lane 0}, bank1 = {lanes 1,2,4}, bank2 = {}, bank3 = {3,7},
// bank6 = {} and bank7 = {lane 6}. Random addresses are compared with a
// reference computed here from the address bits.
module tb_bank_access_matrix;
  int checks = 0, failures = 0;

  logic [15:0][15:0] a16, a16o;
  logic [15:0][15:0] m16, m16o;
  logic [7:0][15:0]  a8;
  logic [7:0][7:0]   m8;

  bank_access_matrix dut16 (.addr(a16), .bank_lanes(m16));
  bank_access_matrix #(.BANK_SHIFT(1)) dut16o (.addr(a16o), .bank_lanes(m16o));
  bank_access_matrix #(.LANES(8), .NUM_BANKS(8)) dut8 (.addr(a8), .bank_lanes(m8));

  task automatic check(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // worked example (8 lanes, 8 banks, 3 LSBs)
    int ex [8] = '{0, 1, 1, 3, 1, 5, 7, 3};
    for (int l = 0; l < 8; l++) a8[l] = 16'(ex[l] + 8 * (l + 3));
    #1;
    check("ex bank0", 32'(m8[0]), 32'b0000_0001);
    check("ex bank1", 32'(m8[1]), 32'b0001_0110);
    check("ex bank2", 32'(m8[2]), 32'b0);
    check("ex bank3", 32'(m8[3]), 32'b1000_1000);
    check("ex bank6", 32'(m8[6]), 32'b0);
    check("ex bank7", 32'(m8[7]), 32'b0100_0000);

    for (int t = 0; t < 500; t++) begin
      logic [15:0][15:0] e, eo;
      for (int l = 0; l < 16; l++) begin
        a16[l]  = 16'($urandom);
        a16o[l] = (t % 2 == 0) ? 16'($urandom_range(0, 31)) : 16'($urandom);
      end
      #1;
      e = '0; eo = '0;
      for (int l = 0; l < 16; l++) begin
        e[a16[l] % 16][l] = 1'b1;
        eo[(a16o[l] / 2) % 16][l] = 1'b1;
      end
      for (int b = 0; b < 16; b++) begin
        check($sformatf("lsb bank %0d", b), 32'(m16[b]), 32'(e[b]));
        check($sformatf("offset bank %0d", b), 32'(m16o[b]), 32'(eo[b]));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_addr_mapper: drives random addresses into addr_mapper at the default
// geometry and compares channel, bank, row, column and region index with
// values computed here by integer division and modulo of the address.
module tb_addr_mapper;
  import fly_pkg::*;
  localparam int AW = 31;
  logic [AW-1:0] addr;
  logic          channel;
  logic [2:0]    bank;
  logic [13:0]   row;
  logic [6:0]    col;
  logic [11:0]   region;
  int checks = 0, failures = 0;

  addr_mapper dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint a, line;
    int e_ch, e_col, e_bank, e_row, e_reg;
    for (int n = 0; n < 2000; n++) begin
      a = (n < 4) ? ((n == 0) ? 0 : (n == 1) ? 64'h7FFF_FFFF : (n == 2) ? 64'h40 : 64'h2_0000)
                  : longint'({$urandom} & 32'h7FFF_FFFF);
      addr = AW'(a);
      #1;
      line   = a / 64;
      e_ch   = int'(line % 2);
      e_col  = int'((line / 2) % 128);
      e_bank = int'((line / 256) % 8);
      e_row  = int'(line / 2048);
      e_reg  = e_bank * 512 + (e_row / 512) * 16 + e_col / 8;
      checks++;
      if (channel != 1'(e_ch) || col != 7'(e_col) || bank != 3'(e_bank) ||
          row != 14'(e_row) || region != 12'(e_reg)) begin
        failures++;
        $display("FAIL addr %h: got ch%0d b%0d r%0d c%0d reg%0d, expected ch%0d b%0d r%0d c%0d reg%0d",
                 addr, channel, bank, row, col, region, e_ch, e_bank, e_row, e_col, e_reg);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

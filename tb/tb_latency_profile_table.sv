// tb_latency_profile_table: fills the 4096-entry table with a pseudo-random
// pattern through the write port, then reads every entry back in a shuffled
// order and checks the one-cycle read latency and the data. It also checks
// that a read and a write in the same cycle return the old contents and that
// rd_entry holds its value while rd_en is low.
module tb_latency_profile_table;
  import fly_pkg::*;
  localparam int DEPTH = 4096;
  logic clk = 0;
  always #2 clk = ~clk;
  logic       wr_en = 0, rd_en = 0;
  logic [11:0] wr_idx = 0, rd_idx = 0;
  lat_entry_t wr_entry = '0, rd_entry;
  int checks = 0, failures = 0;
  logic [2:0] ref_mem [DEPTH];
  int order [DEPTH];

  latency_profile_table dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  initial begin
    for (int i = 0; i < DEPTH; i++) begin ref_mem[i] = 3'($urandom); order[i] = i; end
    order.shuffle();
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      wr_en = 1; wr_idx = 12'(i); wr_entry = lat_entry_t'(ref_mem[i]);
    end
    @(negedge clk); wr_en = 0;
    for (int k = 0; k < DEPTH; k++) begin
      @(negedge clk);
      rd_en = 1; rd_idx = 12'(order[k]);
      @(negedge clk);
      rd_en = 0;
      chk(rd_entry == lat_entry_t'(ref_mem[order[k]]), $sformatf("entry %0d", order[k]));
      @(negedge clk);
      chk(rd_entry == lat_entry_t'(ref_mem[order[k]]), "output not held while rd_en low");
    end
    // read-during-write returns the old value
    @(negedge clk);
    rd_en = 1; rd_idx = 12'd77; wr_en = 1; wr_idx = 12'd77; wr_entry = lat_entry_t'(~ref_mem[77]);
    @(negedge clk);
    rd_en = 0; wr_en = 0;
    chk(rd_entry == lat_entry_t'(ref_mem[77]), "read during write");
    @(negedge clk); rd_en = 1;
    @(negedge clk); rd_en = 0;
    chk(rd_entry == lat_entry_t'(~ref_mem[77]), "write after read-during-write");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

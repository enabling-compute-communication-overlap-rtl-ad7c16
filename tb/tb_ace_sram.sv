// tb_ace_sram: self-checking testbench of the ACE scratchpad (4 banks x 1 MB, one packet row
// per cycle, one-cycle read latency).
//
// A scoreboard array in the testbench mirrors every write. The test writes random packets to
// random rows (including the first and last row), reads them back one per cycle and checks
// the data arrives exactly one cycle after the read; a read and a write of the same row in
// the same cycle must return the old contents.
module tb_ace_sram;
  import ace_pkg::*;
  localparam int unsigned ROWS = 16384;   // 4 x 1 MB / 256 B

  logic       clk = 1'b0;
  logic       rd_en = 1'b0, wr_en = 1'b0;
  sram_addr_t rd_addr = '0, wr_addr = '0;
  pkt_data_t  rd_data, wr_data = '0;
  int         checks = 0, failures = 0;
  pkt_data_t  model [int];

  ace_sram dut (.clk(clk), .rd_en(rd_en), .rd_addr(rd_addr), .rd_data(rd_data),
                .wr_en(wr_en), .wr_addr(wr_addr), .wr_data(wr_data));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic pkt_data_t rnd_pkt();
    pkt_data_t p;
    for (int k = 0; k < PKT_W / 32; k++) p[k*32 +: 32] = $urandom();
    return p;
  endfunction

  task automatic check(input string what, input pkt_data_t got, input pkt_data_t exp_v);
    checks++;
    if (got !== exp_v) begin
      failures++;
      $display("MISMATCH %s", what);
    end
  endtask

  initial begin
    sram_addr_t rows [$];
    sram_addr_t a;
    rows.push_back('0);
    rows.push_back(sram_addr_t'(ROWS - 1));
    for (int k = 0; k < 200; k++) rows.push_back(sram_addr_t'($urandom_range(0, ROWS - 1)));
    // writes
    foreach (rows[k]) begin
      @(negedge clk);
      wr_en = 1'b1; wr_addr = rows[k]; wr_data = rnd_pkt();
      model[int'(rows[k])] = wr_data;
    end
    @(negedge clk);
    wr_en = 1'b0;
    // reads, one per cycle, data one cycle later
    foreach (rows[k]) begin
      @(negedge clk);
      rd_en = 1'b1; rd_addr = rows[k];
      @(negedge clk);
      rd_en = 1'b0;
      check("read back", rd_data, model[int'(rows[k])]);
    end
    // read and write of the same row in the same cycle: old data
    a = rows[5];
    @(negedge clk);
    rd_en = 1'b1; rd_addr = a; wr_en = 1'b1; wr_addr = a; wr_data = rnd_pkt();
    @(negedge clk);
    rd_en = 1'b0; wr_en = 1'b0;
    check("read during write returns old data", rd_data, model[int'(a)]);
    model[int'(a)] = wr_data;
    @(negedge clk);
    rd_en = 1'b1; rd_addr = a;
    @(negedge clk);
    rd_en = 1'b0;
    check("write landed", rd_data, model[int'(a)]);
    // rd_en low holds the output
    @(negedge clk);
    check("output held while idle", rd_data, model[int'(a)]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

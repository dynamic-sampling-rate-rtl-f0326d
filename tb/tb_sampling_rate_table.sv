// tb_sampling_rate_table: at the full 8100-entry size, checks that the reset
// sweep lasts exactly NUM_TILES cycles and leaves every entry at 1x, then
// runs random reads and writes on both ports against a model, including a
// port-A read of the entry port B writes in the same cycle (old value).
module tb_sampling_rate_table;
  import dsr_pkg::*;

  localparam int NT = 8100;
  logic clk = 0, rst_n = 0;
  logic init_busy;
  logic a_rd_en = 0, b_rd_en = 0, b_wr_en = 0;
  logic [12:0] a_addr = 0, b_addr = 0;
  sr_level_e a_rd_data, b_rd_data, b_wr_data;
  int checks = 0, failures = 0;
  int model [NT];

  sampling_rate_table #(.NUM_TILES(NT)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_eq(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("%s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    int cyc;
    b_wr_data = SR_1X;
    repeat (3) @(negedge clk);
    rst_n = 1;
    cyc = 0;
    while (init_busy) begin @(negedge clk); cyc++; end
    expect_eq("init cycles", cyc, NT);
    // every entry 1x
    for (int i = 0; i < NT; i++) begin
      a_rd_en = 1; a_addr = 13'(i);
      @(negedge clk);
      checks++;
      if (a_rd_data != SR_1X) begin failures++; $display("entry %0d not 1x", i); end
      model[i] = 0;
    end
    a_rd_en = 0;
    // random traffic
    for (int t = 0; t < 20000; t++) begin
      int aa, ba;
      bit  wr, ar, br;
      aa = int'($urandom_range(NT - 1));
      ba = int'($urandom_range(NT - 1));
      if (t % 10 == 0) aa = ba;
      wr = $urandom_range(1); ar = $urandom_range(1); br = !wr && $urandom_range(1);
      a_rd_en = ar; a_addr = 13'(aa);
      b_wr_en = wr; b_rd_en = br; b_addr = 13'(ba);
      b_wr_data = sr_level_e'($urandom_range(4));
      @(negedge clk);
      if (ar) expect_eq("port A read", int'(a_rd_data), model[aa]);
      if (br) expect_eq("port B read", int'(b_rd_data), model[ba]);
      if (wr) model[ba] = int'(b_wr_data);
    end
    a_rd_en = 0; b_wr_en = 0; b_rd_en = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_color_map_table: checks the region-to-color map table with its default
// 64 entries: identity after reset, shadow writes invisible to the live port
// until commit, commit copying the whole shadow copy in one cycle, and the
// shadow read port returning the staged value.
module tb_color_map_table;
  localparam int unsigned NC = 64, CW = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_en = 0, commit = 0;
  logic [CW-1:0] wr_region = '0, wr_color = '0, lk_region = '0, lk_color, sh_region = '0, sh_color;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  color_map_table dut (.*);

  logic [CW-1:0] want [NC];

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    for (int r = 0; r < NC; r++) begin
      lk_region = CW'(r); sh_region = CW'(r); #1;
      check(lk_color == CW'(r) && sh_color == CW'(r), "identity after reset");
    end
    for (int round = 0; round < 4; round++) begin
      // stage a random map that uses only 2^round.. colors
      for (int r = 0; r < NC; r++) begin
        want[r] = CW'($urandom_range(0, (NC >> round) - 1));
        @(negedge clk); wr_en = 1; wr_region = CW'(r); wr_color = want[r];
      end
      @(negedge clk); wr_en = 0;
      for (int r = 0; r < NC; r++) begin
        sh_region = CW'(r); lk_region = CW'(r); #1;
        check(sh_color == want[r], "shadow holds staged entry");
        if (round == 0) check(lk_color == CW'(r), "live unchanged before commit");
      end
      commit = 1; @(negedge clk); commit = 0;
      for (int r = 0; r < NC; r++) begin
        lk_region = CW'(r); #1;
        check(lk_color == want[r], $sformatf("live entry %0d after commit", r));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

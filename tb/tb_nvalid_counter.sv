// tb_nvalid_counter: random insert/evict pulses against a reference count on
// a small counter (MAX_LINES = 100), the estimate min(nValid, Lines(Cs)) for
// random sizes, and the error flag when the count would go below zero.
module tb_nvalid_counter;
  localparam int unsigned MAXL = 100, W = $clog2(MAXL + 1);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic ins = 0, evict = 0, error;
  logic [W-1:0] lines_cs = '0, n_valid, refresh_estimate;
  int checks = 0, failures = 0, model = 0;
  task automatic check(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  nvalid_counter #(.MAX_LINES(MAXL)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      ins   = (model < MAXL) && ($urandom_range(0, 2) != 0);
      evict = (model > 0) && ($urandom_range(0, 2) == 0);
      lines_cs = W'($urandom_range(0, MAXL));
      @(posedge clk); #1;
      model += int'(ins) - int'(evict);
      check(int'(n_valid) == model, $sformatf("count %0d vs %0d", n_valid, model));
      check(int'(refresh_estimate) == ((model < int'(lines_cs)) ? model : int'(lines_cs)), "R = min(nValid, Lines)");
      check(!error, "no error in legal use");
    end
    // drain, then one eviction too many
    while (model > 0) begin
      @(negedge clk); ins = 0; evict = 1; @(posedge clk); #1; model--;
    end
    check(n_valid == '0, "drained to zero");
    @(negedge clk); evict = 1; @(posedge clk); #1; @(negedge clk); evict = 0;
    check(error && n_valid == '0, "underflow flagged, count held");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

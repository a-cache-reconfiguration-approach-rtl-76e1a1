// nvalid_counter: the nValid counter that tracks how many valid lines the
// cache holds, without ever scanning the tag array.
//
// It counts up by one for each insertion of a line (ins) and down by one for
// each eviction or invalidation of a valid line (evict); both in one cycle
// cancel. The refresh estimate R = min(nValid, Lines(Cs)) that software forms
// for a candidate cache size Cs is provided as a combinational output for the
// size given on lines_cs. The count saturates at 0 and at MAX_LINES; a step
// past either end sets the sticky error flag, which in a correct cache never
// happens. Reset clears the count (an empty cache).
//
// The increment/decrement rule and the min() estimate are the paper's; the
// saturation and the error flag are this design's own.
module nvalid_counter #(
  parameter int unsigned MAX_LINES = 32768,
  parameter int unsigned CNT_W     = $clog2(MAX_LINES + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             ins,
  input  logic             evict,
  input  logic [CNT_W-1:0] lines_cs,
  output logic [CNT_W-1:0] n_valid,
  output logic [CNT_W-1:0] refresh_estimate,
  output logic             error
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_valid <= '0;
      error   <= 1'b0;
    end else if (ins && !evict) begin
      if (32'(n_valid) == MAX_LINES) error <= 1'b1;
      else n_valid <= n_valid + 1'b1;
    end else if (evict && !ins) begin
      if (n_valid == '0) error <= 1'b1;
      else n_valid <= n_valid - 1'b1;
    end
  end

  assign refresh_estimate = (n_valid < lines_cs) ? n_valid : lines_cs;

endmodule

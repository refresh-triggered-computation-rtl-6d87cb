// refresh_counter: the Configurable Refresh Counter of full-RTC (Partial-Array
// Auto Refresh, PAAR).
//
// A conventional DRAM refresh counter walks every row of the bank.  This one
// holds a start row and an end row register and walks only start..end,
// wrapping from end back to start, so rows outside the allocated region are
// never refreshed.  After reset the range is the whole bank (0..2^ROW_W-1),
// which is the conventional behaviour.  Writing the start register also moves
// the pointer to the new start row; writing the end register leaves the
// pointer alone unless it now lies outside the range, in which case it is
// moved to the start row.  These update rules are this design's own choice.
//
// Interface: load_start / load_end take cfg_row; `step` advances the pointer
// after the row it points to has been refreshed; `row` is the row to refresh
// next and `wrap` is high when `row` is the last row of the range.
module refresh_counter #(
  parameter int unsigned ROW_W = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             load_start,
  input  logic             load_end,
  input  logic [ROW_W-1:0] cfg_row,
  input  logic             step,
  output logic [ROW_W-1:0] row,
  output logic [ROW_W-1:0] start_row,
  output logic [ROW_W-1:0] end_row,
  output logic             wrap
);

  assign wrap = (row == end_row);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      start_row <= '0;
      end_row   <= '1;
      row       <= '0;
    end else if (load_start) begin
      start_row <= cfg_row;
      row       <= cfg_row;
    end else if (load_end) begin
      end_row <= cfg_row;
      if (row > cfg_row || row < start_row) row <= start_row;
    end else if (step) begin
      row <= wrap ? start_row : row + 1'b1;
    end
  end

endmodule

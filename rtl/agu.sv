// agu: affine Address Generation Unit.  Full-RTC uses two of them: the Row AGU
// produces the rows the application accesses, the Column AGU the columns read
// or written inside each open row.
//
// The paper adopts an AGU that generates "address sequences based on an
// arbitrary affine function" and loads it with a "rate" followed by "other
// parameters".  Here the sequence is addr(i) = base + i * rate (modulo
// 2^ADDR_W) for i = 0 .. count-1, after which it starts again at base; `rate`
// is taken to be the step of the affine function and the other parameters are
// base and count.  A count of 0 is treated as 1.
//
// Interface: load_rate / load_base / load_count write the parameter from
// cfg_data; writing base, or `restart`, returns the pointer to base.  `step`
// advances to the next address; `addr` is the current address and `last` is
// high when it is the final address of the sequence (the Column AGU's `last`
// is the RowC signal of the paper's state machine).
module agu #(
  parameter int unsigned ADDR_W = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              load_rate,
  input  logic              load_base,
  input  logic              load_count,
  input  logic [ADDR_W:0]   cfg_data,     // one bit wider: count may be 2^ADDR_W
  input  logic              restart,
  input  logic              step,
  output logic [ADDR_W-1:0] addr,
  output logic              last
);

  logic [ADDR_W-1:0] rate, base;
  logic [ADDR_W:0]   count, idx;

  assign last = (idx + 1'b1 >= count);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rate  <= ADDR_W'(1);
      base  <= '0;
      count <= (ADDR_W+1)'(1);
      idx   <= '0;
      addr  <= '0;
    end else begin
      if (load_rate)  rate  <= cfg_data[ADDR_W-1:0];
      if (load_count) count <= cfg_data;
      if (load_base) begin
        base <= cfg_data[ADDR_W-1:0];
        addr <= cfg_data[ADDR_W-1:0];
        idx  <= '0;
      end else if (restart) begin
        addr <= base;
        idx  <= '0;
      end else if (step) begin
        if (last) begin
          addr <= base;
          idx  <= '0;
        end else begin
          addr <= addr + rate;
          idx  <= idx + 1'b1;
        end
      end
    end
  end

endmodule

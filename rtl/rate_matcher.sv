// rate_matcher: the rate matching algorithm of Refresh Triggered Transfer.
//
// Each refresh slot is either an implicit refresh (the slot is used for an
// access, whose row activation restores the row) or an explicit refresh
// (the refresh counter row is refreshed).  Given N_a, the number of rows the
// application accesses in one refresh period, and N_r, the number of rows
// that must be refreshed in that period, the block follows the paper's
// credit algorithm:
//   if N_r <= N_a : every slot is implicit (exp_ref = 0)
//   else          : P = N_r / gcd(N_r, N_a); c = N_r; then for P slots:
//                   c > N_r - N_a ? (exp_ref=0, c -= N_r - N_a)
//                                 : (exp_ref=1, c += N_a)
//                   and after P slots c is reloaded with N_r.
// gcd(N_r, N_a) is computed after configuration with a binary (Stein) gcd,
// then P with a restoring divider; both are this design's choice of how to
// evaluate line 6 of the algorithm.  They take at most about 3*CNT_W cycles,
// during which `ready` is low; this fits the paper's "approximately 100
// cycles" for reconfiguring RTC.
//
// Interface: load_nr / load_na write N_r / N_a from cfg_data (one cycle
// each).  exp_ref is the decision for the current slot and is valid while
// ready is high; pulsing `step` consumes the slot and advances the credit.
// `restart` reloads c = N_r and the slot index (start of a new pattern).
module rate_matcher #(
  parameter int unsigned CNT_W = 17   // holds N_r, N_a up to 2^16 rows
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             load_nr,
  input  logic             load_na,
  input  logic [CNT_W-1:0] cfg_data,
  input  logic             restart,
  input  logic             step,
  output logic             exp_ref,
  output logic             ready,
  output logic [CNT_W-1:0] period_p,   // P of Algorithm 1 (1 when N_r <= N_a)
  output logic [CNT_W-1:0] n_r,
  output logic [CNT_W-1:0] n_a
);

  typedef enum logic [1:0] {S_READY, S_GCD, S_DIV} calc_state_e;
  calc_state_e state;

  logic [CNT_W-1:0] a, b;          // gcd operands
  logic [$clog2(CNT_W+1)-1:0] k;   // common power of two
  logic [CNT_W-1:0] g;             // gcd result
  logic [CNT_W-1:0] q, r;          // divider quotient / remainder
  logic [$clog2(CNT_W+1)-1:0] bitn;
  logic [CNT_W:0]   credit;        // c of Algorithm 1, one bit of headroom
  logic [CNT_W-1:0] slot_idx;      // i of Algorithm 1 (0 .. P-1)
  logic [CNT_W-1:0] diff;          // N_r - N_a
  logic             partial;       // N_r > N_a: explicit refreshes needed
  logic [CNT_W:0]   r_shift;

  assign partial  = (n_r > n_a);
  assign diff     = n_r - n_a;
  assign ready    = (state == S_READY);
  assign exp_ref  = partial && !(credit > {1'b0, diff});
  assign r_shift  = {r, q[CNT_W-1]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_READY;
      n_r      <= '0;
      n_a      <= '0;
      a        <= '0;
      b        <= '0;
      k        <= '0;
      g        <= '0;
      q        <= '0;
      r        <= '0;
      bitn     <= '0;
      period_p <= CNT_W'(1);
      credit   <= '0;
      slot_idx <= '0;
    end else begin
      unique case (state)
        S_READY: begin
          if (load_nr || load_na) begin
            if (load_nr) n_r <= cfg_data;
            if (load_na) n_a <= cfg_data;
            a     <= load_nr ? cfg_data : n_r;
            b     <= load_na ? cfg_data : n_a;
            k     <= '0;
            state <= S_GCD;
          end else if (restart) begin
            credit   <= {1'b0, n_r};
            slot_idx <= '0;
          end else if (step && partial) begin
            if (credit > {1'b0, diff}) credit <= credit - {1'b0, diff};  // implicit
            else                       credit <= credit + {1'b0, n_a};   // explicit
            if (slot_idx == period_p - 1'b1) begin
              slot_idx <= '0;
              credit   <= {1'b0, n_r};
            end else begin
              slot_idx <= slot_idx + 1'b1;
            end
          end
        end
        // Binary gcd, one reduction per cycle.
        S_GCD: begin
          if (a == '0 || b == '0) begin
            g     <= (a == '0 ? b : a) << k;
            q     <= n_r;          // dividend, shifted out MSB first
            r     <= '0;
            bitn  <= '0;
            state <= S_DIV;
          end else if (!a[0] && !b[0]) begin
            a <= a >> 1;
            b <= b >> 1;
            k <= k + 1'b1;
          end else if (!a[0]) begin
            a <= a >> 1;
          end else if (!b[0]) begin
            b <= b >> 1;
          end else if (a >= b) begin
            a <= (a - b) >> 1;
          end else begin
            b <= (b - a) >> 1;
          end
        end
        // Restoring division P = N_r / g, one quotient bit per cycle.
        S_DIV: begin
          if (r_shift >= {1'b0, g}) begin
            r <= CNT_W'(r_shift - {1'b0, g});
            q <= {q[CNT_W-2:0], 1'b1};
          end else begin
            r <= r_shift[CNT_W-1:0];
            q <= {q[CNT_W-2:0], 1'b0};
          end
          bitn <= bitn + 1'b1;
          if (bitn == ($clog2(CNT_W+1))'(CNT_W - 1)) begin
            period_p <= (n_r > n_a && g != '0) ?
                        ((r_shift >= {1'b0, g}) ? {q[CNT_W-2:0], 1'b1} : {q[CNT_W-2:0], 1'b0})
                        : CNT_W'(1);
            credit   <= {1'b0, n_r};
            slot_idx <= '0;
            state    <= S_READY;
          end
        end
        default: state <= S_READY;
      endcase
    end
  end

endmodule

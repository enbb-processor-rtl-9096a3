// online_adder: radix-2 signed-digit on-line adder, most significant digit first.
//
// Each cycle with `step` high it takes one digit of each operand, x_j and y_j in
// {-1,0,+1}, and, from the second step on, returns one digit of the sum. The
// on-line delay is 2: the digit returned at step k is z_(k-2), so the first
// digit out (step 2) is the integer digit z_0. After n operand digits, two more
// steps with zero inputs flush z_(n-1) and z_n, and
//     sum_(j=0..n) z_j 2^-j  =  sum_(j=1..n) (x_j + y_j) 2^-j .
// No carry ever propagates: p_j = x_j + y_j is split as p_j = 2 t_j + w_j, with
// the choice for p_j = +-1 made on whether both digits of the next position are
// non-negative, so that z_j = w_j + t_(j+1) always stays in {-1,0,+1}.
//
// The paper asks for on-line, MSD-first operators with a redundant operand
// representation and a small on-line delay; it cites the literature for the
// algorithm. This particular two-level signed-digit scheme is this design's
// choice of that algorithm. `clear` restarts it for a new operation.
module online_adder
  import enbb_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    clear,   // start a new operation
  input  logic    step,    // consume x, y this cycle
  input  sdigit_t x,
  input  sdigit_t y,
  output logic    z_valid, // z is a sum digit (step and at least second step)
  output sdigit_t z
);

  logic signed [2:0] p_prev;   // p_(k-1)
  logic signed [1:0] w_prev2;  // w_(k-2)
  logic              started;  // at least one step taken

  logic signed [2:0] p_now;
  logic              nonneg_now;
  logic signed [1:0] t_prev, w_prev;
  logic signed [2:0] z_int;

  always_comb begin
    p_now      = 3'(signed'(x)) + 3'(signed'(y));
    nonneg_now = !x[1] && !y[1];
    // split p_(k-1) = 2 t + w using the sign information of position k
    unique case (p_prev)
      3'sd2:   begin t_prev =  2'sd1; w_prev =  2'sd0; end
      3'sd1:   begin t_prev = nonneg_now ? 2'sd1 : 2'sd0;  w_prev = nonneg_now ? -2'sd1 : 2'sd1; end
      -3'sd1:  begin t_prev = nonneg_now ? 2'sd0 : -2'sd1; w_prev = nonneg_now ? -2'sd1 : 2'sd1; end
      -3'sd2:  begin t_prev = -2'sd1; w_prev =  2'sd0; end
      default: begin t_prev =  2'sd0; w_prev =  2'sd0; end
    endcase
    z_int   = 3'(w_prev2) + 3'(t_prev);
    z       = z_int[1:0];
    z_valid = step && started && !clear;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p_prev  <= '0;
      w_prev2 <= '0;
      started <= 1'b0;
    end else if (clear) begin
      p_prev  <= '0;
      w_prev2 <= '0;
      started <= 1'b0;
    end else if (step) begin
      p_prev  <= p_now;
      w_prev2 <= w_prev;
      started <= 1'b1;
    end
  end

  // A sum digit must always fit in {-1,0,+1}.
  assert property (@(posedge clk) disable iff (!rst_n) z_valid |-> (z_int >= -3'sd1 && z_int <= 3'sd1));

endmodule

// pe: one processing element of the weight-stationary systolic array.
//
// The PE holds two weight registers (double buffering): one is the active
// weight used by the multiplier, the other is loaded with the next weight
// while the current one is still in use. Weights are preloaded by shifting
// them down the column: with w_shift high the PE takes w_in into its loading
// register and passes its old content on through w_out. w_swap exchanges the
// roles of the two registers. Each cycle the PE multiplies the input arriving
// from the left by the active weight and adds the partial sum arriving from
// above; the input is forwarded to the right and the sum downwards, each
// through one register (one cycle per hop).
//
// From the paper: weight-stationary dataflow, input from the left, partial
// sum from above, two weight registers with alternating read, single-cycle
// delay per PE. This design's choices: signed 8-bit inputs and weights, 32-bit
// partial sums, weight loading by shifting down the column, synchronous
// active-low reset of all registers.
module pe #(
  parameter int unsigned DW = 8,
  parameter int unsigned AW = 32
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 en,       // advance the input/psum pipeline
  input  logic signed [DW-1:0] x_in,
  input  logic                 xv_in,    // x_in carries data
  input  logic signed [AW-1:0] ps_in,
  input  logic signed [DW-1:0] w_in,
  input  logic                 w_shift,
  input  logic                 w_swap,
  output logic signed [DW-1:0] x_out,
  output logic                 xv_out,
  output logic signed [AW-1:0] ps_out,
  output logic signed [DW-1:0] w_out
);
  logic signed [DW-1:0] wreg [2];
  logic                 act;   // index of the active weight register

  assign w_out = wreg[~act];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wreg[0] <= '0;
      wreg[1] <= '0;
      act     <= 1'b0;
      x_out   <= '0;
      xv_out  <= 1'b0;
      ps_out  <= '0;
    end else begin
      if (w_shift) wreg[~act] <= w_in;
      if (w_swap)  act <= ~act;
      if (en) begin
        x_out  <= x_in;
        xv_out <= xv_in;
        ps_out <= ps_in + (xv_in ? AW'(x_in) * AW'(wreg[act]) : AW'(0));
      end
    end
  end
endmodule

// pe: weight-stationary processing element of the systolic array.
//
// Each PE keeps one pre-loaded weight. Every cycle it takes an activation from
// its left neighbour, multiplies it by the weight, adds the partial sum coming
// from the PE above and registers the result for the PE below; the activation
// is registered and handed to the right neighbour. Weights are loaded by
// shifting them down the column: while w_load is high each PE takes w_in from
// the PE above and presents its own weight on w_out.
//
// Timing: one register stage on each path, so psum_out/act_out at cycle t+1
// reflect the inputs at cycle t. psum_valid_out is the activation's valid bit
// delayed with the partial sum; it is what a monitor embedded in the PE samples.
//
// Follows the paper: weight-stationary dataflow (activations move right,
// partial sums move down), 8-bit weights/activations, 16-bit product and
// 24-bit accumulation. This design's own choices: signed two's-complement
// arithmetic, asynchronous active-low reset, column-shift weight loading, and
// the fault-injection hook fi_en/fi_mask, which XORs a mask into the incoming
// activation. The corrupted activation both enters the multiplier and is
// passed on, so the error spreads right and down exactly as the coverage model
// of the monitor placement assumes.
module pe
  import sa_pkg::*;
#(
  parameter int unsigned DW = DATA_W,
  parameter int unsigned AW = ACC_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // weight shift chain (down the column)
  input  logic                 w_load,
  input  logic signed [DW-1:0] w_in,
  output logic signed [DW-1:0] w_out,
  // activations (left to right)
  input  logic                 act_valid_in,
  input  logic signed [DW-1:0] act_in,
  output logic                 act_valid_out,
  output logic signed [DW-1:0] act_out,
  // partial sums (top to bottom)
  input  logic signed [AW-1:0] psum_in,
  output logic signed [AW-1:0] psum_out,
  output logic                 psum_valid_out,
  // fault injection
  input  logic                 fi_en,
  input  logic        [DW-1:0] fi_mask
);

  logic signed [DW-1:0]   w_q;
  logic signed [DW-1:0]   act_eff;
  logic signed [2*DW-1:0] prod;

  assign act_eff = fi_en ? (act_in ^ fi_mask) : act_in;
  assign prod    = w_q * act_eff;
  assign w_out   = w_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_q            <= '0;
      act_out        <= '0;
      act_valid_out  <= 1'b0;
      psum_out       <= '0;
      psum_valid_out <= 1'b0;
    end else begin
      if (w_load) w_q <= w_in;
      act_out        <= act_eff;
      act_valid_out  <= act_valid_in;
      psum_out       <= psum_in + AW'(prod);
      psum_valid_out <= act_valid_in;
    end
  end

endmodule

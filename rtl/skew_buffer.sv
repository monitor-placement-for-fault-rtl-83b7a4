// skew_buffer: per-lane delay line that skews (or de-skews) a vector stream.
//
// Lane i is delayed by i cycles (REVERSE = 0) or by LANES-1-i cycles
// (REVERSE = 1), data and valid together, through a chain of registers. Used in
// front of the systolic array so that row i meets the partial sums arriving
// from above at the right time, and after it so that the column results of one
// input vector leave the array in the same cycle. Lane delays are this design's
// own arrangement of the usual systolic data set-up; registers reset to zero.
module skew_buffer #(
  parameter int unsigned LANES   = 4,
  parameter int unsigned W       = 8,
  parameter bit          REVERSE = 1'b0
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         valid_in  [LANES],
  input  logic [W-1:0] data_in   [LANES],
  output logic         valid_out [LANES],
  output logic [W-1:0] data_out  [LANES]
);

  for (genvar i = 0; i < LANES; i++) begin : g_lane
    localparam int unsigned D = REVERSE ? (LANES - 1 - i) : i;
    if (D == 0) begin : g_wire
      assign valid_out[i] = valid_in[i];
      assign data_out[i]  = data_in[i];
    end else begin : g_delay
      logic         v_q [D];
      logic [W-1:0] d_q [D];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int s = 0; s < int'(D); s++) begin
            v_q[s] <= 1'b0;
            d_q[s] <= '0;
          end
        end else begin
          v_q[0] <= valid_in[i];
          d_q[0] <= data_in[i];
          for (int s = 1; s < int'(D); s++) begin
            v_q[s] <= v_q[s-1];
            d_q[s] <= d_q[s-1];
          end
        end
      end
      assign valid_out[i] = v_q[D-1];
      assign data_out[i]  = d_q[D-1];
    end
  end

endmodule

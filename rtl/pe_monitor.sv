// pe_monitor: MISR-based integrity monitor embedded in one PE.
//
// The monitor compresses the partial sums its PE produces into a signature,
// counts them, and after K of them compares the signature with a golden value
// that represents fault-free computation. A mismatch raises fail.
//
// Operation: a start pulse clears the MISR and the counter and latches K
// (k_cycles, which must be at least 1). In RUN every cycle with psum_valid high
// folds psum into the MISR and counts one. The cycle after the K-th valid word
// the signature is final (CHECK); one cycle later done rises and fail holds the
// comparison result, both until the next start. The golden value sits in a
// register of the monitor, written through golden_we/golden_data; it must be
// written before the comparison. A start while running restarts the monitor.
// Latency: done rises two cycles after the K-th valid word.
//
// Follows the paper: MISR over the PE's partial sums, a cycle counter and a
// comparator against a golden value after a predetermined count. This design's
// own choices: counting valid partial sums rather than raw clock cycles (so a
// gap in the input stream does not shift the window), the start/done handshake
// and the per-monitor golden register.
module pe_monitor
  import sa_pkg::*;
#(
  parameter int unsigned W  = ACC_W,
  parameter int unsigned CW = CNT_W
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [CW-1:0] k_cycles,
  input  logic          golden_we,
  input  logic [W-1:0]  golden_data,
  input  logic          psum_valid,
  input  logic [W-1:0]  psum,
  output logic          busy,
  output logic          done,
  output logic          fail,
  output logic [W-1:0]  sig
);

  typedef enum logic [1:0] {IDLE, RUN, CHECK, DONE} state_e;

  state_e        state_q;
  logic [CW-1:0] cnt_q, k_q;
  logic [W-1:0]  golden_q;
  logic          absorb;

  assign absorb = (state_q == RUN) && psum_valid && !start;

  misr #(.W(W)) u_misr (
    .clk     (clk),
    .rst_n   (rst_n),
    .clear   (start),
    .en      (absorb),
    .data_in (psum),
    .sig     (sig)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) golden_q <= '0;
    else if (golden_we) golden_q <= golden_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= IDLE;
      cnt_q   <= '0;
      k_q     <= '0;
      fail    <= 1'b0;
    end else if (start) begin
      state_q <= RUN;
      cnt_q   <= '0;
      k_q     <= k_cycles;
      fail    <= 1'b0;
    end else begin
      unique case (state_q)
        IDLE:  ;
        RUN:   if (absorb) begin
                 cnt_q <= cnt_q + 1'b1;
                 if (cnt_q + 1'b1 == k_q) state_q <= CHECK;
               end
        CHECK: begin
                 fail    <= (sig != golden_q);
                 state_q <= DONE;
               end
        DONE:  ;
      endcase
    end
  end

  assign busy = (state_q == RUN) || (state_q == CHECK);
  assign done = (state_q == DONE);

  a_k_nonzero: assert property (@(posedge clk) disable iff (!rst_n) start |-> k_cycles != '0)
    else $error("pe_monitor: start with k_cycles == 0");

endmodule

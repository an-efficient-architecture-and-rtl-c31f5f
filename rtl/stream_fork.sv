// stream_fork: copies one valid/ready stream to N consumers.
//
// Each output is offered the item independently; a per-output "taken" flag
// remembers which consumers have already accepted it, and the input is
// acknowledged in the cycle the last outstanding consumer accepts. Outputs
// therefore never wait for each other's ready (valid does not depend on the
// consumer's own ready), and with all consumers ready the fork passes one item
// per cycle with no added latency. Used where the HiLo decision feeds the
// high-entropy coder, the low-entropy coder and the flags side-channel.
//
// The paper's diagram shows the decision output reaching both coders and the
// side-channel; this fork is the implementation's way of doing so.
module stream_fork #(
  parameter int N = 2
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         s_valid,
  output logic         s_ready,
  output logic [N-1:0] m_valid,
  input  logic [N-1:0] m_ready
);
  logic [N-1:0] taken_q, done;

  always_comb begin
    for (int j = 0; j < N; j++) begin
      m_valid[j] = s_valid && !taken_q[j];
      done[j]    = taken_q[j] || m_ready[j];
    end
  end
  assign s_ready = &done;

  always_ff @(posedge clk) begin
    if (!rst_n) taken_q <= '0;
    else if (s_valid) taken_q <= s_ready ? '0 : (taken_q | (m_valid & m_ready));
  end
endmodule

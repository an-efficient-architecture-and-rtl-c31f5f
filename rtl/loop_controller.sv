// loop_controller: flow controller for a pipelined filter with feedback,
// y(t) = f(x(t), y(t - K)), whose feed-forward path has M register stages and
// whose feedback path is a queue.
//
// The controller only steers handshakes. A new input may enter the
// feed-forward path when the feedback value it depends on is available at the
// head of the feedback queue, or, for the first LOOP_SIZE (= K) inputs after
// a restart, when no feedback value exists yet (ffw_in_prime tells the
// datapath to use its initial value instead). Each result leaving the
// feed-forward path is delivered to the output and written back into the
// feedback queue in the same handshake. If K <= M the queue runs dry between
// dependent samples and the controller stalls the input; the loop latency is
// M + 1 cycles (M stages plus the queue write), so the filter then sustains
// K/(M+1) samples/cycle; if K > M the loop runs at one sample per cycle.
// (A feedback path of K plain delay registers, as in the classic description,
// would give K/(K+M); the queue only ever adds one cycle.) `hold` refuses new
// input (used while the queue is being emptied for the image tail) and
// `restart` begins a new priming phase.
//
// The role and handshake names (in, out, ffw_in, ffw_out, fb_in, fb_out)
// follow the coder's ACSS diagram; counting the priming inputs and gating on
// queue occupancy is this implementation's way of enforcing the K dependency.
module loop_controller #(
  parameter int LS_W = 8
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [LS_W-1:0] loop_size,
  input  logic            hold,
  input  logic            restart,
  // upstream
  input  logic            in_valid,
  output logic            in_ready,
  // feed-forward path input / output
  output logic            ffw_in_valid,
  input  logic            ffw_in_ready,
  output logic            ffw_in_prime,
  input  logic            ffw_out_valid,
  output logic            ffw_out_ready,
  // feedback queue write / read
  output logic            fb_in_valid,
  input  logic            fb_in_ready,
  input  logic            fb_out_valid,
  output logic            fb_out_ready,
  // downstream
  output logic            out_valid,
  input  logic            out_ready
);
  logic [LS_W-1:0] prime_cnt;
  logic            priming, dep_ok;

  assign priming      = prime_cnt < loop_size;
  assign dep_ok       = priming || fb_out_valid;
  assign ffw_in_prime = priming;

  assign ffw_in_valid = in_valid && dep_ok && !hold;
  assign in_ready     = ffw_in_ready && dep_ok && !hold;
  assign fb_out_ready = in_valid && ffw_in_ready && !priming && !hold;

  assign out_valid     = ffw_out_valid && fb_in_ready;
  assign fb_in_valid   = ffw_out_valid && out_ready;
  assign ffw_out_ready = out_ready && fb_in_ready;

  always_ff @(posedge clk) begin
    if (!rst_n || restart) prime_cnt <= '0;
    else if (in_valid && in_ready && priming) prime_cnt <= prime_cnt + LS_W'(1);
  end

  // a sample past the priming phase never enters without its feedback value
  a_dep: assert property (@(posedge clk) disable iff (!rst_n)
                          in_valid && in_ready && !priming |-> fb_out_valid);
endmodule

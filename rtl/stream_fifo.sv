// stream_fifo: synchronous first-in first-out queue with valid/ready ports.
//
// Used as the feedback queue of the ACSS loop (one entry per spectral band)
// and as the decision-flags side-channel that carries the per-sample flags
// past the high- and low-entropy coders. Storage is a plain array with
// wrap-around read and write pointers and an occupancy counter; a write and a
// read may happen in the same cycle. Data appear at m_data combinationally
// from the array (first-word fall-through), so m_valid is "not empty" and
// s_ready is "not full". DEPTH need not be a power of two.
//
// The paper asks for a queue at least Nz deep in the ACSS loop and shows the
// side-channel; the circular-buffer realisation is this implementation's.
module stream_fifo #(
  parameter type T     = logic [7:0],
  parameter int  DEPTH = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic s_valid,
  output logic s_ready,
  input  T     s_data,
  output logic m_valid,
  input  logic m_ready,
  output T     m_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int CW = $clog2(DEPTH+1);

  T mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic wr, rd;

  assign s_ready = (count != ($clog2(DEPTH+1))'(DEPTH));
  assign m_valid = (count != '0);
  assign m_data  = mem[rp];
  assign wr      = s_valid && s_ready;
  assign rd      = m_valid && m_ready;

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + AW'(1);
  endfunction

  always_ff @(posedge clk) begin
    if (wr) mem[wp] <= s_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (wr) wp <= inc(wp);
      if (rd) rp <= inc(rp);
      count <= count + CW'(wr) - CW'(rd);
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) count <= CW'(DEPTH));
endmodule

// elastic_buffer: one pipeline register stage with valid/ready (AXI4-Stream
// style) handshakes on both sides.
//
// Every unit of the coder is pipelined with these buffers instead of plain
// registers, so that a stall at any sink propagates back one stage per cycle
// and no central flow controller is needed. The buffer holds a main entry and
// one skid entry; s_ready is a register output (it only depends on whether the
// skid entry is occupied), so ready paths never chain combinationally through
// stages. With neither side stalling it passes one item per cycle with one
// cycle of latency.
//
// The elastic-buffer pattern is the one the coder is built on; the two-entry
// skid realisation is this implementation's choice.
module elastic_buffer #(
  parameter type T = logic [7:0]
) (
  input  logic clk,
  input  logic rst_n,
  input  logic s_valid,
  output logic s_ready,
  input  T     s_data,
  output logic m_valid,
  input  logic m_ready,
  output T     m_data
);
  T     main_q, skid_q;
  logic main_v, skid_v;

  assign s_ready = !skid_v;
  assign m_valid = main_v;
  assign m_data  = main_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      main_v <= 1'b0;
      skid_v <= 1'b0;
    end else if (m_ready || !main_v) begin
      if (skid_v) begin
        main_q <= skid_q;
        main_v <= 1'b1;
        skid_v <= 1'b0;
      end else begin
        main_v <= s_valid;
        if (s_valid) main_q <= s_data;
      end
    end else if (s_valid && !skid_v) begin
      skid_q <= s_data;
      skid_v <= 1'b1;
    end
  end

  // an offered item stays offered, unchanged, until it is taken
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           m_valid && !m_ready |=> m_valid && m_data == $past(m_data));
endmodule

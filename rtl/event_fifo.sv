// event_fifo: common buffer for quantized (dt, amp) events.
//
// Both event sources (processing system over AXI and the 10GbE/UDP
// receiver) feed this FIFO, which absorbs their burstiness in front of the
// sub-phase scheduler.  The paper names the FIFO; its depth, the
// valid/ready handshake on both sides and the first-word-fall-through
// read are this design's choices.
//
// Interface: write side s_valid/s_ready/s_data, read side
// m_valid/m_ready/m_data (m_data is valid whenever m_valid is high).
// A word moves on a cycle where valid and ready are both high.  `level` is
// the number of stored words.  One write and one read per cycle; the
// storage is a plain array that maps to distributed or block RAM.
module event_fifo
  import sipm_pkg::*;
#(
  parameter int DEPTH = 512
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       s_valid,
  output logic                       s_ready,
  input  event_t                     s_data,
  output logic                       m_valid,
  input  logic                       m_ready,
  output event_t                     m_data,
  output logic [$clog2(DEPTH):0]     level
);

  localparam int AW = $clog2(DEPTH);

  event_t mem [DEPTH];
  logic [AW-1:0] wr_ptr, rd_ptr;
  logic push, pop;

  assign s_ready = (level != DEPTH[AW:0]);
  assign m_valid = (level != '0);
  assign m_data  = mem[rd_ptr];
  assign push    = s_valid && s_ready;
  assign pop     = m_valid && m_ready;

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= s_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      level  <= '0;
    end else begin
      if (push) wr_ptr <= (wr_ptr == AW'(DEPTH - 1)) ? '0 : wr_ptr + 1'b1;
      if (pop)  rd_ptr <= (rd_ptr == AW'(DEPTH - 1)) ? '0 : rd_ptr + 1'b1;
      level <= level + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  // the stored count never leaves [0, DEPTH]
  a_level: assert property (@(posedge clk) disable iff (!rst_n) 32'(level) <= DEPTH);

endmodule

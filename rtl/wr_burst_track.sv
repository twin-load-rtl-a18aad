// wr_burst_track: follows DDRx write commands to the write-data window.
// DDRx writes carry no handshake: the data burst starts a fixed T_WL cycles
// after the WR command and lasts BURST cycles. A MEC that routes write data
// (to one child port, to its DRAM, or into a register) uses this block to
// know, in each cycle, whether a write burst is on the bus, which destination
// (SEL) its WR named, and which beat of the burst it is.
// Interface: pulse wr with sel in the WR cycle t; active/sel_o/beat hold for
// cycles t+T_WL .. t+T_WL+BURST-1. Writes from a DDRx controller are at least
// tCCD = BURST cycles apart, so bursts never overlap.
module wr_burst_track #(
  parameter int unsigned SEL_W = 1,
  parameter int unsigned T_WL  = tl_pkg::T_WL,
  parameter int unsigned BURST = tl_pkg::BURST
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             wr,
  input  logic [SEL_W-1:0] sel,
  output logic             active,
  output logic [SEL_W-1:0] sel_o,
  output logic [$clog2(BURST)-1:0] beat
);
  // The WR travels T_WL-1 stages, then the burst counter runs for BURST cycles.
  logic [T_WL-2:0]  vld_q;
  logic [SEL_W-1:0] sel_q [T_WL-1];
  logic             act_q;
  logic [SEL_W-1:0] asel_q;
  logic [$clog2(BURST)-1:0] beat_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld_q  <= '0;
      for (int i = 0; i < T_WL-1; i++) sel_q[i] <= '0;
      act_q  <= 1'b0;
      asel_q <= '0;
      beat_q <= '0;
    end else begin
      vld_q[0] <= wr;
      sel_q[0] <= sel;
      for (int i = 1; i < T_WL-1; i++) begin
        vld_q[i] <= vld_q[i-1];
        sel_q[i] <= sel_q[i-1];
      end
      if (vld_q[T_WL-2]) begin
        act_q  <= 1'b1;
        asel_q <= sel_q[T_WL-2];
        beat_q <= '0;
      end else if (act_q) begin
        beat_q <= beat_q + 1'b1;
        if (beat_q == ($clog2(BURST))'(BURST-1)) act_q <= 1'b0;
      end
    end
  end

  assign active = act_q;
  assign sel_o  = asel_q;
  assign beat   = beat_q;
endmodule

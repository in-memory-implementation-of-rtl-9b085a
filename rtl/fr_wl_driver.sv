// Functional-read (FR) row decoder for the weight rows.
//
// A multi-row functional read turns the BW-bit weight stored down a column
// into a bit-line discharge proportional to its value. To do so all BW weight
// word lines are raised in the same precharge cycle with binary-weighted pulse
// widths: word line i stays on for 2^i periods of T_0, so the MSB row of a
// 4-bit weight is on for 8 T_0. One clock period is T_0 here.
//
// Sequence after a one-cycle start pulse: one cycle of precharge (pre = 1),
// then all word lines rise together and wl[i] falls after 2^i cycles; done
// pulses for one cycle after the last word line has fallen. Total latency from
// start to done: 1 + 2^(BW-1) + 1 cycles. Pulse widths follow the paper; the
// precharge length and the reset are this design's choices.
module fr_wl_driver #(
  parameter int BW = 4
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  output logic          pre,
  output logic [BW-1:0] wl,
  output logic          done
);
  localparam int TMAX = 1 << (BW - 1);
  typedef enum logic [1:0] {IDLE, PRECH, READ, FIN} st_e;
  st_e st;
  logic [$clog2(TMAX+1)-1:0] cnt;   // cycles of the read already elapsed

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      st  <= IDLE;
      cnt <= '0;
    end else begin
      unique case (st)
        IDLE:  if (start) st <= PRECH;
        PRECH: begin st <= READ; cnt <= '0; end
        READ:  begin
                 cnt <= cnt + 1'b1;
                 if (32'(cnt) == TMAX - 1) st <= FIN;
               end
        FIN:   st <= IDLE;
      endcase
    end

  assign pre  = (st == PRECH);
  assign done = (st == FIN);
  always_comb
    for (int i = 0; i < BW; i++) wl[i] = (st == READ) && (32'(cnt) < (1 << i));
endmodule

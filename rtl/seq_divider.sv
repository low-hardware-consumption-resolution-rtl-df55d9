// seq_divider -- unsigned bit-serial restoring divider shared by both phases
// of the C&C core.
//
// The compensation phase uses it once per channel for hit_vir = N/n_vir; the
// width calibration phase uses it for every factor, Coe = (N << MBAR) /
// (n_vir * hit_com). One quotient bit is produced per clock: a start pulse
// loads num and den, and done pulses W + 1 clocks after the start clock with quo valid. A zero
// divisor gives a zero quotient. Sharing one divider between both phases
// follows the paper; the bit-serial structure is this design's choice.
`timescale 1ps/1ps
module seq_divider #(
  parameter int unsigned W = 40
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [W-1:0] num,
  input  logic [W-1:0] den,
  output logic         busy,
  output logic         done,
  output logic [W-1:0] quo
);
  logic [W-1:0]         rem, d_q;
  logic [$clog2(W+1)-1:0] cnt;
  logic [W:0]           trial;

  assign trial = {rem, quo[W-1]} - {1'b0, d_q};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rem  <= '0; d_q <= '0; quo <= '0;
      cnt  <= '0; busy <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        rem  <= '0;
        quo  <= num;
        d_q  <= den;
        cnt  <= ($clog2(W+1))'(W);
        busy <= 1'b1;
      end else if (busy) begin
        if (!trial[W]) begin
          rem <= trial[W-1:0];
          quo <= {quo[W-2:0], 1'b1};
        end else begin
          rem <= {rem[W-2:0], quo[W-1]};
          quo <= {quo[W-2:0], 1'b0};
        end
        cnt <= cnt - 1'b1;
        if (cnt == 1) begin
          busy <= 1'b0;
          done <= 1'b1;
          if (d_q == '0) quo <= '0;
        end
      end
    end
  end
endmodule

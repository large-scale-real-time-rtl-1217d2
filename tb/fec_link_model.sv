// fec_link_model: behavioural model of the GBT frames one front-end link
// delivers (five SAMPA half-streams and three ADC-clock E-links).
//
// After `start` the model sends, on every half-stream, the SYNC pattern
// beginning at nibble `offset` and then the samples of sample_value(), the
// 16 channels of a half-stream in order, low nibble first. One frame (four
// nibbles per half-stream) is produced every PERIOD cycles. The ADC clock
// E-links carry a 32-nibble clock, high for the first 16 nibbles of each
// time-bin shifted by CLK_SHIFT. The frame bit layout matches the decoder.
module fec_link_model
  import tb_util_pkg::*;
#(
  parameter int unsigned           SYNC_NIB     = 8,
  parameter logic [SYNC_NIB*5-1:0] SYNC_PATTERN = 40'h15_A5_3C_96,
  parameter int                    PERIOD       = 6,
  parameter int                    LINK         = 0
) (
  input  logic         clk,
  input  logic         start,
  input  int           offset,
  input  int           clk_shift,
  input  logic         glitch_clk,
  output logic         frame_valid,
  output logic [111:0] frame
);
  int  nib;        // nibbles sent since start, -1: idle
  int  cyc;
  bit  running = 0;

  function automatic logic [4:0] nibble(input int h, input int n);
    int d, i;
    if (n < offset) return 5'(((n * 7) + h * 3) % 32) ^ 5'h0A;
    if (n < offset + int'(SYNC_NIB))
      return SYNC_PATTERN[5*(int'(SYNC_NIB) - 1 - (n - offset)) +: 5];
    d = n - offset - int'(SYNC_NIB);
    i = d / 2;
    if (d % 2 == 0) return sample_value(LINK, h, i % 16, i / 16)[4:0];
    else            return sample_value(LINK, h, i % 16, i / 16)[9:5];
  endfunction

  function automatic logic clkbit(input int n);
    int d;
    d = n - offset - int'(SYNC_NIB) - clk_shift;
    d = ((d % 32) + 32) % 32;
    return d < 16;
  endfunction

  always @(posedge clk) begin
    frame_valid <= 1'b0;
    if (start) begin
      running = 1;
      nib     = 0;
      cyc     = 0;
    end else if (running) begin
      cyc++;
      if (cyc == PERIOD) begin
        cyc = 0;
        for (int k = 0; k < 4; k++) begin
          for (int h = 0; h < 5; h++) begin
            logic [4:0] v;
            v = nibble(h, nib + k);
            for (int b = 0; b < 5; b++) frame[4*(5*h+b) + k] <= v[b];
          end
          for (int c = 25; c < 28; c++)
            frame[4*c + k] <= (glitch_clk && c == 27) ? ~clkbit(nib + k) : clkbit(nib + k);
        end
        nib += 4;
        frame_valid <= 1'b1;
      end
    end
  end
endmodule

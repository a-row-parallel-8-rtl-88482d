// ai_decimator -- serial-to-parallel input section: raster pixels in, one row out.
//
// Pixels of an image that has already been cut into 8x8 blocks and stacked arrive one
// per clock (the pixel rate Fs) in raster order, eight pixels per row. A 7-deep delay
// chain holds the previous pixels of the row; when the eighth pixel arrives the chain
// and the new pixel are downsampled by 8 into the row register. row[i] is pixel i of
// the row (column i of the block) and row_stb pulses for one clock in the cycle after
// the eighth pixel, so row_stb is the Fclock = Fs/8 enable for the rest of the design.
// pix_valid may be low for any number of clocks; only valid pixels are counted. The
// delay-and-downsample structure follows the paper; the strobe in place of a second
// clock, pix_valid and the tap order are this design's choices.
module ai_decimator #(
  parameter int unsigned L = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         pix_valid,
  input  logic [L-1:0] pix,
  output logic         row_stb,
  output logic [L-1:0] row [8]
);

  logic [L-1:0] dly [7];   // dly[0] = newest previous pixel
  logic [2:0]   phase;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase   <= '0;
      row_stb <= 1'b0;
      for (int i = 0; i < 7; i++) dly[i] <= '0;
      for (int i = 0; i < 8; i++) row[i] <= '0;
    end else begin
      row_stb <= 1'b0;
      if (pix_valid) begin
        dly[0] <= pix;
        for (int i = 1; i < 7; i++) dly[i] <= dly[i-1];
        phase <= phase + 3'd1;
        if (phase == 3'd7) begin
          // downsample by 8: pixel i of the row sits 7-i taps down the chain
          for (int i = 0; i < 7; i++) row[i] <= dly[6-i];
          row[7]  <= pix;
          row_stb <= 1'b1;
        end
      end
    end
  end

endmodule

// ai_frs -- final reconstruction step (FRS) of the 2-D AI DCT.
//
// The four row-DCT blocks deliver, every enabled clock, 8 coefficients each encoded
// as 16 integers x[u][p][q] (row channel p of column channel q of output port u);
// only 88 of the 128 are ever non-zero, because port u carries just the channels
// listed in ai_dct_pkg::CH_MASK[u]. One reconstruction unit per output port turns its
// 16 integers into a two's-complement number. The units are independent: no rounding
// happens anywhere before them, so the precision of each port could be chosen alone.
// KIND selects the Dempster-Macleod unit (FRS_DM, 11 fraction bits, latency 7) or the
// expansion-factor unit (FRS_EF_437 / FRS_EF_12, output scaled by alpha, 8 / 9
// fraction bits, latency 4). Both methods are from the paper; the default is the
// alpha* expansion factor, the paper's recommended 8-bit configuration.
module ai_frs import ai_dct_pkg::*; #(
  parameter int unsigned W    = 19,
  parameter frs_kind_e   KIND = FRS_EF_437,
  parameter int unsigned WF   = frs_out_width(KIND, W)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 ce,
  input  logic signed [W-1:0]  x [8][4][4],   // [u][p][q]
  output logic signed [WF-1:0] y [8]
);

  for (genvar u = 0; u < 8; u++) begin : g_port
    if (KIND == FRS_DM) begin : g_dm
      frs_dm_unit #(.W(W), .WO(WF)) u_unit (.clk, .rst_n, .ce, .x(x[u]), .y(y[u]));
    end else begin : g_ef
      frs_ef_unit #(.W(W), .ALPHA(KIND), .WO(WF)) u_unit (.clk, .rst_n, .ce, .x(x[u]), .y(y[u]));
    end
  end

endmodule

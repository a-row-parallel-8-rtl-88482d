// wl_design_meter -- one configuration of the 2-D AI DCT core plus an accuracy meter.
// Rows driven on x_row (8 bits, of which the low L are used) go into an
// ai_dct2d_core #(L, KIND); the meter keeps the blocks it sent and, for every output
// coefficient, the relative error of (output / scale) against the exact scaled 2-D
// DCT (floating point), counting how many coefficients are within each tolerance of
// TOL_PCT. scale is 2^11 for the Dempster-Macleod FRS and alpha * 2^frac for the
// expansion-factor FRS (alpha from its Booth code).
module wl_design_meter import ai_dct_pkg::*; import tb_ref_pkg::*; #(
  parameter int unsigned L    = 8,
  parameter frs_kind_e   KIND = FRS_EF_437
) (
  input logic       clk,
  input logic       rst_n,
  input logic       ce,
  input logic [7:0] x_row [8]
);
  localparam int unsigned WF = frs_out_width(KIND, L + 11);
  localparam real TOL_PCT [7] = '{10.0, 5.0, 1.0, 0.1, 0.05, 0.01, 0.005};

  function automatic real alpha_of(frs_kind_e k);
    case (k)
      FRS_EF_437: return real'(2**15 + 2**13 + 2**11 - 2**8 + 2**6 - 2**2 - 1) / 256.0;
      FRS_EF_12:  return real'(2**11 + 2**8 + 2**5 + 2**4 + 1) / 512.0;
      default:    return 1.0;
    endcase
  endfunction

  localparam real SCALE = alpha_of(KIND) * real'(2 ** frs_frac(KIND));

  logic [L-1:0] xr [8];
  logic out_stb;
  logic [2:0] out_hfreq;
  logic signed [WF-1:0] out_coef [8];

  always_comb for (int c = 0; c < 8; c++) xr[c] = x_row[c][L-1:0];

  ai_dct2d_core #(.L(L), .KIND(KIND)) u_core (
    .clk, .rst_n, .ce, .in_valid(1'b1), .x_row(xr), .out_stb, .out_hfreq, .out_coef
  );

  real blk_q [$][8][8];
  real cur [8][8];
  int  row = 0;
  int unsigned hits [7];
  int unsigned total = 0;
  int unsigned blocks = 0;

  initial for (int e = 0; e < 7; e++) hits[e] = 0;

  always @(posedge clk) if (rst_n && ce) begin
    for (int c = 0; c < 8; c++) cur[row][c] = real'(xr[c]);
    if (row == 7) blk_q.push_back(cur);
    row = (row + 1) % 8;
  end

  always @(negedge clk) if (rst_n && out_stb && blk_q.size() > 0) begin
    for (int v = 0; v < 8; v++) begin
      real e, got;
      e = dct2_ref(blk_q[0], v, int'(out_hfreq));
      got = real'(out_coef[v]) / SCALE;
      total++;
      for (int k = 0; k < 7; k++)
        if (rabs(got - e) <= TOL_PCT[k] / 100.0 * rabs(e)) hits[k]++;
    end
    if (out_hfreq == 7) begin void'(blk_q.pop_front()); blocks++; end
  end

  function automatic real rate(int k);
    return (total == 0) ? 0.0 : 100.0 * real'(hits[k]) / real'(total);
  endfunction
endmodule

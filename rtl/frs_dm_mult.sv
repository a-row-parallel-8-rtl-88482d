// frs_dm_mult -- pipelined multiplierless constant multiplier y = M * x.
//
// Each constant of the Dempster-Macleod FRS is built from shifts and a few 2-input
// adders, with the adder chain cut into pipeline stages so that registers at the same
// depth line up across the whole FRS. The decompositions are (v = intermediate):
//   669 : v1 = 3x,  v2 = v1 - 8v1,        y = -v1 - 32v2
//   2217: v1 = 17x, v2 = 3x, v3 = v1+8v2,  y = 128v1 + v3
//   181 : v1 = 3x,  v2 = 8x + v1,         y = 64v1 - v2
//   3135: v1 = 3x,  v2 = x - 64x,         y = 1024v1 - v2
//   473 : v1 = 5x,  v2 = x - 8v1,         y = 512x + v2
//   437 : v1 = 5x,  v2 = 32x - v1,        y = v1 + 16v2
//   2399: v1 = 5x,  v2 = x + 32v1,        y = 512v1 - v2
//   8, 1: wired shift only.
// Timing: input register, then three stages; y follows x by 4 enabled clocks for
// every M, so products of different constants stay aligned. The decompositions and
// stage placement follow the paper; M values other than those above are rejected.
module frs_dm_mult #(
  parameter int          M  = 669,
  parameter int unsigned W  = 19,
  parameter int unsigned WO = W + 13
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 ce,
  input  logic signed [W-1:0]  x,
  output logic signed [WO-1:0] y
);

  typedef logic signed [WO-1:0] word_t;

  word_t xr;                 // input register
  word_t s1a, s1b, s1c;      // after stage 1
  word_t s2a, s2b;           // after stage 2
  word_t n1a, n1b, n1c, n2a, n2b, ny;

  always_comb begin
    n1a = '0; n1b = '0; n1c = '0; n2a = '0; n2b = '0; ny = '0;
    case (M)
      669: begin
        n1a = xr + (xr <<< 1);                 // v1 = 3x
        n2a = s1a - (s1a <<< 3);               // v2 = -21x
        n2b = s1a;                             // v1
        ny  = -s2b - (s2a <<< 5);
      end
      2217: begin
        n1a = xr + (xr <<< 4);                 // v1 = 17x
        n1b = xr + (xr <<< 1);                 // v2 = 3x
        n2a = s1a + (s1b <<< 3);               // v3 = 41x
        n2b = s1a <<< 7;                       // 128 v1
        ny  = s2a + s2b;
      end
      181: begin
        n1a = xr + (xr <<< 1);                 // v1 = 3x
        n1b = xr <<< 3;                        // 8x
        n2a = -(s1b + s1a);                    // -v2
        n2b = s1a <<< 6;                       // 64 v1
        ny  = s2a + s2b;
      end
      3135: begin
        n1a = xr - (xr <<< 6);                 // v2 = -63x
        n1b = xr + (xr <<< 1);                 // v1 = 3x
        n2a = (s1b <<< 10) - s1a;              // y
        ny  = s2a;
      end
      473: begin
        n1a = xr <<< 9;                        // 512x
        n1b = xr;
        n1c = xr + (xr <<< 2);                 // v1 = 5x
        n2a = s1a;
        n2b = s1b - (s1c <<< 3);               // v2 = -39x
        ny  = s2a + s2b;
      end
      437: begin
        n1a = xr <<< 5;                        // 32x
        n1b = xr + (xr <<< 2);                 // v1 = 5x
        n2a = (s1a - s1b) <<< 4;               // 16 v2
        n2b = s1b;
        ny  = s2a + s2b;
      end
      2399: begin
        n1a = xr;
        n1b = xr + (xr <<< 2);                 // v1 = 5x
        n2a = -(s1a + (s1b <<< 5));            // -v2
        n2b = s1b <<< 9;                       // 512 v1
        ny  = s2a + s2b;
      end
      8: begin
        n1a = xr <<< 3;
        n2a = s1a;
        ny  = s2a;
      end
      default: begin                           // M = 1
        n1a = xr;
        n2a = s1a;
        ny  = s2a;
      end
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      xr <= '0; s1a <= '0; s1b <= '0; s1c <= '0; s2a <= '0; s2b <= '0; y <= '0;
    end else if (ce) begin
      xr  <= word_t'(x);
      s1a <= n1a; s1b <= n1b; s1c <= n1c;
      s2a <= n2a; s2b <= n2b;
      y   <= ny;
    end
  end

  initial begin
    assert (M == 1 || M == 8 || M == 181 || M == 437 || M == 473 || M == 669 ||
            M == 2217 || M == 2399 || M == 3135)
      else $error("frs_dm_mult: unsupported constant %0d", M);
  end

endmodule

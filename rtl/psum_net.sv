// Partial-sum network.
//
// Every g node needs u_sum, a modulo-2 sum of already decided bits. For the
// natural-order code x = u G_N, G_N = [1 0; 1 1]^(x log2 N), the g node in the
// lower half of a size-B block (stage s, rows base+B/2 .. base+B-1) takes bit
// j of the upper half of that block's u_hat re-encoded with G_{B/2}. Layer k
// of the polar encoding butterfly holds exactly these re-encoded halves for
// all blocks of size 2^k, so the network is one encoder butterfly whose
// intermediate layers are tapped. This generalises the u_sum labels printed
// in the paper's n = 4 example (u1^u2, u2, u1, u3).
//
// Stage s (0 = channel side) has half-block size H = N >> (s+1); its g node
// number gi (block gi/H, offset gi%H) gets layer log2(H) at row
// (gi/H)*2H + gi%H. Combinational.
module psum_net #(
  parameter int N = 1024,
  localparam int M = $clog2(N)
) (
  input  logic [N-1:0]            u_hat,
  output logic [M-1:0][N/2-1:0]   ps
);
  // layer[k] = u_hat encoded blockwise with G_{2^k}
  logic [M-1:0][N-1:0] layer;

  assign layer[0] = u_hat;

  for (genvar k = 1; k < M; k++) begin : g_layer
    localparam int HB = 1 << (k - 1);
    for (genvar r = 0; r < N; r++) begin : g_row
      if ((r / HB) % 2 == 0) begin : g_up
        assign layer[k][r] = layer[k-1][r] ^ layer[k-1][r + HB];
      end else begin : g_lo
        assign layer[k][r] = layer[k-1][r];
      end
    end
  end

  for (genvar s = 0; s < M; s++) begin : g_stage
    localparam int H  = N >> (s + 1);
    localparam int KL = M - 1 - s;
    for (genvar gi = 0; gi < N / 2; gi++) begin : g_g
      assign ps[s][gi] = layer[KL][(gi / H) * 2 * H + gi % H];
    end
  end

  if (N < 2 || (N & (N - 1)) != 0) begin : g_bad_n
    $error("psum_net: N must be a power of two >= 2");
  end
endmodule

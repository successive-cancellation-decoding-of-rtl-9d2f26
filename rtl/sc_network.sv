// Unrolled stochastic SC decoding network.
//
// The paper's SC decoding graph (its n = 4 example generalised to N = 2^M):
// M stages, each holding N/2 stochastic f nodes and N/2 stochastic g nodes.
// Stage 0 reads the N channel streams; in every size-B block of stage s
// (B = N >> s) row base+j holds f(in[base+j], in[base+j+B/2]) and row
// base+B/2+j holds g(in[base+j], in[base+j+B/2], u_sum) for j < B/2. Output
// row i of the last stage carries the stream for u_i.
//
// All nodes work on their streams every clock, so the whole path from the
// channel to an output is live at once; the controller decides one u index
// per window of L clocks while the partial sums ps select what the g nodes
// compute (this replaces the stage-by-stage activation of a deterministic SC
// decoder, an own choice). With RERAND = 1, which the paper's final
// configuration uses, every stream between two stages passes through a
// re-randomizer; their random slot addresses come from banks of xorshift32
// generators, log2(D) bits per re-randomizer (placement and sharing are own
// choices). No re-randomizer follows the last stage.
//
// Timing: f nodes are combinational, g nodes and re-randomizers add one
// register or buffer stage each; clr clears the g nodes' flip-flops.
module sc_network #(
  parameter int N      = 1024,
  parameter bit RERAND = 1'b1,
  parameter int D      = 4,
  localparam int M     = $clog2(N)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  clr,
  input  logic [N-1:0]          ch,
  input  logic [M-1:0][N/2-1:0] ps,
  output logic [N-1:0]          out
);
  import scd_pkg::*;

  localparam int SW    = $clog2(D);
  localparam int BANKS = (N * SW + 31) / 32;

  // st[s] is the input of stage s; nd[s] the raw node outputs of stage s.
  logic [M:0][N-1:0]   st;
  logic [M-1:0][N-1:0] nd;

  assign st[0] = ch;
  assign out   = st[M];

  for (genvar s = 0; s < M; s++) begin : g_stage
    localparam int H = N >> (s + 1);
    for (genvar gi = 0; gi < N / 2; gi++) begin : g_pair
      localparam int R_UP = (gi / H) * 2 * H + gi % H;
      localparam int R_LO = R_UP + H;
      f_node u_f (.pa(st[s][R_UP]), .pb(st[s][R_LO]), .pc(nd[s][R_UP]));
      g_node u_g (.clk(clk), .rst_n(rst_n), .clr(clr),
                  .pa(st[s][R_UP]), .pb(st[s][R_LO]), .usum(ps[s][gi]),
                  .pc(nd[s][R_LO]));
    end

    if (RERAND && s < M - 1) begin : g_rr
      logic [BANKS*32-1:0] rbits;
      for (genvar b = 0; b < BANKS; b++) begin : g_bank
        xorshift32 #(.SEED(seed_of(1 + s, b))) u_prng (
          .clk(clk), .rst_n(rst_n), .rnd(rbits[b*32 +: 32]));
      end
      for (genvar r = 0; r < N; r++) begin : g_row
        rerandomizer #(.D(D)) u_rr (
          .clk(clk), .rst_n(rst_n), .sel(rbits[r*SW +: SW]),
          .bit_i(nd[s][r]), .bit_o(st[s+1][r]));
      end
    end else begin : g_direct
      assign st[s+1] = nd[s];
    end
  end
endmodule

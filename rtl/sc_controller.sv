// Successive-cancellation sequencer.
//
// SC decoding decides u_0, u_1, ... u_{N-1} strictly in order, each bit using
// the bits already decided. In this stochastic decoder every bit gets one
// window of L clocks: during window i the h node counts the ones of output
// stream i (idx = i steers the selector), and in the first clock of window
// i+1 the controller stores the result as u_hat[i], or 0 when the frozen
// mask marks i as frozen. Storing u_hat[i] changes the partial sums, so the
// g nodes compute the next bit's path. The order and the frozen-bit rule are
// SC decoding as the paper describes it; the window schedule, the handshake
// and the one-window overlap are this design's own.
//
// Handshake: a start pulse while idle latches the frozen mask, clears u_hat,
// and pulses clr for one clock (clears the g nodes). busy is high from the
// clock after start until done. done pulses for one clock, N*L+1 clocks after
// the clock that sampled start, and u_hat then holds the decoded word until
// the next start. start while busy is ignored.
module sc_controller #(
  parameter int N = 1024,
  parameter int L = 1024,
  localparam int M  = $clog2(N),
  localparam int LW = (L > 1) ? $clog2(L) : 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [N-1:0] frozen,
  input  logic         h_decision,
  output logic         busy,
  output logic         done,
  output logic         clr,
  output logic         h_en,
  output logic         h_clr,
  output logic [M-1:0] idx,
  output logic [N-1:0] u_hat
);
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_LAST} state_t;

  state_t        state;
  logic [LW-1:0] cyc;
  logic [N-1:0]  frz;

  assign busy  = (state != S_IDLE);
  assign clr   = (state == S_IDLE) && start;
  assign h_en  = (state == S_RUN);
  assign h_clr = (state == S_RUN) && (cyc == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      cyc   <= '0;
      idx   <= '0;
      frz   <= '0;
      u_hat <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (start) begin
            frz   <= frozen;
            u_hat <= '0;
            idx   <= '0;
            cyc   <= '0;
            state <= S_RUN;
          end
        end
        S_RUN: begin
          // first clock of window idx > 0: store the previous window's bit
          if (cyc == '0 && idx != '0)
            u_hat[idx - 1'b1] <= h_decision & ~frz[idx - 1'b1];
          if (cyc == LW'(L - 1)) begin
            cyc <= '0;
            if (idx == M'(N - 1)) state <= S_LAST;
            else                  idx   <= idx + 1'b1;
          end else begin
            cyc <= cyc + 1'b1;
          end
        end
        S_LAST: begin
          u_hat[N-1] <= h_decision & ~frz[N-1];
          done       <= 1'b1;
          state      <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A window must hold at least two bits for the one-clock overlap to work.
  if (L < 2 || N < 2) begin : g_bad_size
    $error("sc_controller: need N >= 2 and L >= 2");
  end
endmodule

// bidir_sweep: bi-directional horizontal contraction of an SMPO chain.
//
// After the vertical contraction every site between a chain end and the
// output (anchor) site is a B x B bond matrix with no free leg. Two boundary
// environments, a row vector coming from the leftmost site and a column
// vector coming from the rightmost site, each absorb one neighbouring matrix
// per clock, concurrently, until only the anchor site is left between them:
//     lenv[r] <- sum_b lenv[b] * lmat[k][b][r]   (left wing,  sites 1, 2, ...)
//     renv[l] <- sum_b rmat[k][l][b] * renv[b]   (right wing, sites N-2, N-3, ...)
// Each step costs B*B multiply-accumulates per wing and is cut back to fx_t.
// The two wings always have the same number of steps, NSTEP, because the
// output site sits in the middle of the chain.
//
// Timing: on the clock edge where start is high the first step is applied to
// lenv0/renv0; step k is applied on the k-th edge after that. done is high
// for one cycle, NSTEP cycles after start, and lenv/renv then hold the final
// environments until the next start. lmat/rmat must stay stable while busy.
// The contraction order follows the reference implementation; registering one
// step per clock is this design's choice.
// The lint note that rst_n is used both asynchronously and synchronously
// refers to the disable condition of the assertion below; the logic itself
// uses rst_n only as an asynchronous reset.
module bidir_sweep
  import tn_pkg::*;
#(
  parameter int B     = 4,
  parameter int NSTEP = 8
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  fx_t  lenv0 [B],
  input  fx_t  renv0 [B],
  input  fx_t  lmat  [NSTEP][B][B],
  input  fx_t  rmat  [NSTEP][B][B],
  output fx_t  lenv  [B],
  output fx_t  renv  [B],
  output logic busy,
  output logic done
);

  localparam int CW = $clog2(NSTEP + 1);
  logic [CW-1:0] step;
  fx_t lsrc [B], rsrc [B];
  fx_t lnext [B], rnext [B];
  int k;

  always_comb begin
    k = start ? 0 : int'(step);
    for (int i = 0; i < B; i++) begin
      lsrc[i] = start ? lenv0[i] : lenv[i];
      rsrc[i] = start ? renv0[i] : renv[i];
    end
    for (int i = 0; i < B; i++) begin
      acc_t la, ra;
      la = '0;
      ra = '0;
      for (int j = 0; j < B; j++) begin
        la += mul(lsrc[j], lmat[k][j][i]);
        ra += mul(rmat[k][i][j], rsrc[j]);
      end
      lnext[i] = fx_quant(la);
      rnext[i] = fx_quant(ra);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      step <= '0;
      busy <= 1'b0;
      done <= 1'b0;
      for (int i = 0; i < B; i++) begin
        lenv[i] <= '0;
        renv[i] <= '0;
      end
    end else begin
      done <= 1'b0;
      if (start || busy) begin
        lenv <= lnext;
        renv <= rnext;
        if (k == NSTEP - 1) begin
          busy <= 1'b0;
          done <= 1'b1;
          step <= '0;
        end else begin
          busy <= 1'b1;
          step <= CW'(k + 1);
        end
      end
    end
  end

  // a new contraction may only start when the previous one has finished
  assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy);

endmodule

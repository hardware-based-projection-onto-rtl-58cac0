// sort_network: input-invariant descending sort of D signed words.
//
// A sorting network performs the same compare-and-swap operations whatever
// the data, so it maps to a fixed combinational circuit. This one is
// Batcher's merge-exchange network (Knuth, TAOCP vol. 3, Algorithm 5.2.2M),
// which is Batcher's odd-even merge sort written for any D. It has
// t(t+1)/2 stages with t = ceil(log2 D), so its delay grows as (log D)^2
// and its comparator count as D (log D)^2. The stage list comes from
// proj_pkg::sort_stage. Stage s compares lane i with lane i+d when
// (i & p) == r; lanes that no comparator touches pass through.
//
// Interface: x[0..D-1] unsorted, y[0..D-1] the same values with y[0] the
// largest. Purely combinational, with no pipeline registers.
//
// The Batcher construction above D = 16 follows the paper. For D <= 16 the
// paper takes Knuth's delay-optimal networks, whose comparator lists it does
// not print. This design uses the Batcher network for every D instead. It
// has the same function, and the same depth for D <= 8, but up to three more
// stages for 9 <= D <= 16.
module sort_network
  import proj_pkg::*;
#(
  parameter int D = 9,  // number of words
  parameter int W = 8   // word width (two's complement)
) (
  input  logic signed [W-1:0] x [D],
  output logic signed [W-1:0] y [D]
);

  localparam int S = (D < 2) ? 0 : int'(sort_num_stages(D));

  if (S == 0) begin : g_trivial
    assign y = x;
  end else begin : g_net
    for (genvar s = 0; s < S; s++) begin : g_stage
      localparam sort_stage_t P = sort_stage(D, s);
      localparam int SP = int'(P.p);
      localparam int SD = int'(P.d);
      localparam int SR = int'(P.r);

      logic signed [W-1:0] cur [D];
      logic signed [W-1:0] nxt [D];

      if (s == 0) begin : g_in
        assign cur = x;
      end else begin : g_chain
        assign cur = g_stage[s-1].nxt;
      end

      for (genvar i = 0; i < D; i++) begin : g_lane
        if (((i & SP) == SR) && (i + SD < D)) begin : g_cmp
          compare_swap #(.W(W)) u_cs (
            .a (cur[i]),
            .b (cur[i+SD]),
            .hi(nxt[i]),
            .lo(nxt[i+SD])
          );
        end else if (!((i >= SD) && (((i - SD) & SP) == SR))) begin : g_pass
          assign nxt[i] = cur[i];
        end
      end
    end
    assign y = g_stage[S-1].nxt;
  end

endmodule

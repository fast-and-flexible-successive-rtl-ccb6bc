// PM memory: the path metric of each of the L paths (Q_PM bits), kept in
// registers, together with the per-path state a special node needs across
// its phases: a live flag, the SPC node's least reliable position i_min,
// its parity gamma and |alpha_min|, and the mask of node bits already
// decided by forks.
//
// Operations (one per cycle, chosen by the controller):
//   init      : PM = 0, only path 0 alive, mask cleared (new frame)
//   clr_mask  : mask cleared (a node has been finished)
//   upd_en    : PM = pm_next (steps without a fork); with spc1_load the SPC
//               registers are loaded and i_min is marked decided
//   fork_en   : path l becomes the survivor chosen by the sorter: PM and
//               live flag from the sorter, the other registers copied from
//               path parent[l]; with mark_fork the forked position of the
//               parent is added to the mask.
//
// The PM memory of L words of Q_PM bits follows the design; the extra
// per-path registers are this implementation's way of carrying the
// Rate-1/SPC phase state.
module pm_memory #(
  parameter int unsigned L    = 2,
  parameter int unsigned P    = 64,
  parameter int unsigned Q    = 6,
  parameter int unsigned Q_PM = 8
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       init,
  input  logic                       clr_mask,
  input  logic                       upd_en,
  input  logic                       spc1_load,
  input  logic                       fork_en,
  input  logic                       mark_fork,
  input  logic [Q_PM-1:0]            pm_next   [L],
  input  logic [$clog2(P)-1:0]       imin_in   [L],
  input  logic                       gamma_in  [L],
  input  logic [Q-2:0]               amin_in   [L],
  input  logic [$clog2(P)-1:0]       fork_pos  [L],
  input  logic [$clog2(L)-1:0]       parent    [L],
  input  logic [Q_PM-1:0]            new_pm    [L],
  input  logic                       new_valid [L],
  output logic [Q_PM-1:0]            pm        [L],
  output logic                       valid     [L],
  output logic [P-1:0]               decided   [L],
  output logic [$clog2(P)-1:0]       imin      [L],
  output logic                       gamma     [L],
  output logic [Q-2:0]               amin      [L]
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < L; l++) begin
        pm[l]      <= '0;
        valid[l]   <= (l == 0);
        decided[l] <= '0;
        imin[l]    <= '0;
        gamma[l]   <= 1'b0;
        amin[l]    <= '0;
      end
    end else if (init) begin
      for (int l = 0; l < L; l++) begin
        pm[l]      <= '0;
        valid[l]   <= (l == 0);
        decided[l] <= '0;
        imin[l]    <= '0;
        gamma[l]   <= 1'b0;
        amin[l]    <= '0;
      end
    end else if (clr_mask) begin
      for (int l = 0; l < L; l++) decided[l] <= '0;
    end else if (upd_en) begin
      for (int l = 0; l < L; l++) begin
        pm[l] <= pm_next[l];
        if (spc1_load) begin
          imin[l]    <= imin_in[l];
          gamma[l]   <= gamma_in[l];
          amin[l]    <= amin_in[l];
          decided[l] <= P'(1) << imin_in[l];
        end
      end
    end else if (fork_en) begin
      for (int l = 0; l < L; l++) begin
        pm[l]      <= new_pm[l];
        valid[l]   <= new_valid[l];
        decided[l] <= decided[parent[l]] | (mark_fork ? (P'(1) << fork_pos[parent[l]]) : '0);
        imin[l]    <= imin[parent[l]];
        gamma[l]   <= gamma[parent[l]];
        amin[l]    <= amin[parent[l]];
      end
    end
  end
endmodule

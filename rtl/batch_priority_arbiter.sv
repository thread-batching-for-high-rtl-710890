// batch_priority_arbiter: chooses the thread batch to promote into the running set.
//
// Each of the N candidates is a resident block slot, tagged with the age
// (dispatch ordinal) of the thread batch it belongs to and a flag saying whether
// that batch has enough ready warps to be promoted. The arbiter grants the
// eligible candidate with the smallest age, so the oldest pending batch runs
// first; equal ages (several slots of one batch) resolve to the lowest index.
// It is a purely combinational minimum search, N-1 comparators deep in this
// linear form; with N = 8 block slots per SM it stays small.
// Oldest-first promotion is the paper's rule; the age encoding is this design's.
module batch_priority_arbiter #(
  parameter int N     = temp_pkg::MAX_TB_PER_SM,
  parameter int AGE_W = temp_pkg::AGE_W,
  localparam int IDX_W = (N > 1) ? $clog2(N) : 1
) (
  input  logic             eligible [N],
  input  logic [AGE_W-1:0] age      [N],
  output logic             grant_valid,
  output logic [IDX_W-1:0] grant_idx,
  output logic [AGE_W-1:0] grant_age
);

  always_comb begin
    grant_valid = 1'b0;
    grant_idx   = '0;
    grant_age   = '0;
    for (int i = 0; i < N; i++) begin
      if (eligible[i] && (!grant_valid || age[i] < grant_age)) begin
        grant_valid = 1'b1;
        grant_idx   = IDX_W'(i);
        grant_age   = age[i];
      end
    end
  end

endmodule

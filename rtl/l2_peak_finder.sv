// l2_peak_finder: 3x3 sliding-window peak finder of the L2 linker.
//
// Input is the hit matrix found around one seed: for each of the four
// trigger groups a 5x5 array of bits, cell (a,b) set when that group has an
// unused track segment in bin (kappa_seed + a - 2, phi_seed + b - 2). The
// nine 3x3 windows that fit in the 5x5 array are evaluated in parallel; the
// score of a window is the number of set (group, cell) bits inside it, i.e.
// the number of matched segments, and the window with the highest score is
// chosen (ties: the centred window first, then row-major order). Every such
// window contains the seed cell. The link is valid when the chosen window
// holds segments of at least two trigger groups. Purely combinational, one
// step as in the paper. The scoring and tie rule are this design's reading
// of "maximizes the number of matched track segments".
module l2_peak_finder
  import ftt_pkg::*;
(
  input  logic [NGROUPS-1:0][4:0][4:0] hits,      // [group][kappa][phi]
  output logic                         valid,
  output logic [1:0]                   win_k,     // window centre = seed + win - 1
  output logic [1:0]                   win_p,
  output logic [NGROUPS-1:0]           group_mask,
  output logic [6:0]                   score
);
  logic [6:0]             sc   [3][3];
  logic [NGROUPS-1:0]     gm   [3][3];

  always_comb begin
    for (int i = 0; i < 3; i++)
      for (int j = 0; j < 3; j++) begin
        sc[i][j] = '0;
        gm[i][j] = '0;
        for (int g = 0; g < NGROUPS; g++)
          for (int a = 0; a < 3; a++)
            for (int b = 0; b < 3; b++)
              if (hits[g][i+a][j+b]) begin
                sc[i][j] = sc[i][j] + 7'd1;
                gm[i][j][g] = 1'b1;
              end
      end
  end

  always_comb begin
    win_k = 2'd1;
    win_p = 2'd1;
    score = sc[1][1];
    for (int i = 0; i < 3; i++)
      for (int j = 0; j < 3; j++)
        if (sc[i][j] > score) begin
          score = sc[i][j];
          win_k = 2'(i);
          win_p = 2'(j);
        end
    group_mask = gm[win_k][win_p];
    valid      = ($countones(group_mask) >= 2);
  end
endmodule

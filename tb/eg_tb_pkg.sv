// eg_tb_pkg: testbench helpers shared by the processing-cluster and
// top-level testbenches.
//
// A conv_job is one pass of the 3 x 4 PE cluster: ROWS reuse rows of length
// S (with |B| magnitudes), ROWS+COLS-1 streamed rows of length L, and a
// training phase. It produces the flit streams a host would place in the GLB
// banks (reuse-load stream, streamed-operand stream) and the expected result
// of every output element, computed directly in 2-D form:
//   phase 1: O[j][e]  = sum_r sum_s W[r][s] * A[j+r][e+s]
//   phase 2: G[j][x]  = sum_r sum_s sign(W[r][s])|B[r][s]| * D[j-r][x-s]
//            (error row y travels on diagonal y+ROWS-1; filter rows reversed)
//   phase 3: dW[j][c] = sum_r sum_s D[r][s] * A[r+j][c+s]
// All results wrap to 16 bits like the partial-sum scratchpad.
package eg_tb_pkg;
  import eg_pkg::*;

  localparam int ROWS  = 3;
  localparam int COLS  = 4;
  localparam int NDIAG = ROWS + COLS - 1;
  localparam int MAXL  = 64;

  class conv_job;
    phase_e ph;
    int S, L, plen;
    int R  [ROWS][MAXL];
    int Bm [ROWS][MAXL];
    int X  [NDIAG][MAXL];

    function new(phase_e p, int l, int s);
      ph = p; L = l; S = s;
      plen = (p == PH_BWD) ? L + S - 1 : L - S + 1;
      for (int i = 0; i < ROWS; i++)
        for (int k = 0; k < S; k++) begin
          R[i][k]  = ($urandom_range(0, 3) == 0) ? 0 : int'($urandom_range(0, 15)) - 8;
          Bm[i][k] = $urandom_range(0, 15);
        end
      for (int d = 0; d < NDIAG; d++)
        for (int x = 0; x < L; x++)
          X[d][x] = (p == PH_BWD && d < ROWS - 1) ? 0 :
                    (($urandom_range(0, 2) == 0) ? 0 : int'($urandom_range(0, 255)) - 128);
    endfunction

    function automatic int fb(int r, int k);
      return (R[r][k] == 0) ? 0 : (R[r][k] < 0 ? -Bm[r][k] : Bm[r][k]);
    endfunction

    // expected output element e of column (output row) j
    function automatic int expected(int j, int e);
      longint acc = 0;
      for (int r = 0; r < ROWS; r++)
        for (int k = 0; k < S; k++) begin
          if (ph == PH_FWD && e + k < L)
            acc += longint'(R[r][k] * X[j+r][e+k]);
          else if (ph == PH_BWD && e - k >= 0 && e - k < L && j - r + ROWS - 1 >= 0)
            acc += longint'(fb(r, k) * X[j-r+ROWS-1][e-k]);
          else if (ph == PH_WGRAD && e + k < L)
            acc += longint'(R[r][k] * X[r+j][e+k]);
        end
      return int'(signed'(16'(acc)));
    endfunction

    // reuse-load stream: PE row i gets filter row i (reversed in phase 2)
    function automatic void ld_stream(ref flit_t q[$]);
      for (int i = 0; i < ROWS; i++) begin
        int r;
        r = (ph == PH_BWD) ? ROWS - 1 - i : i;
        for (int k = 0; k < S; k++) begin
          flit_t f;
          f = '0;
          f.tag = 4'(i); f.off = 8'(k); f.last = (k == S - 1);
          f.data = 16'({Bm[r][k][3:0], R[r][k][3:0]});
          q.push_back(f);
        end
      end
    endfunction

    // streamed-operand stream: diagonal d carries row d
    function automatic void act_stream(ref flit_t q[$]);
      for (int d = 0; d < NDIAG; d++)
        for (int x = 0; x < L; x++) begin
          flit_t f;
          f = '0;
          f.tag = 4'(d); f.off = 8'(x); f.last = (x == L - 1);
          f.data = 16'(X[d][x]);
          q.push_back(f);
        end
    endfunction
  endclass
endpackage

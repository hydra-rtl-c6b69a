// tb_tpf_ref: real-number reference of the tiled permeability filter for the
// testbenches. filter_tile runs K iterations of an X pass (every row) and a Y
// pass (every column) of the 1D filter on one 48x48 tile, starting from
// J = A, with pi stored at a pixel as the permeability to its right (X) or
// lower (Y) neighbour. weight1d is the blending profile in 1/64 units.
package tb_tpf_ref;
  localparam int T = 48;
  typedef real tile_r [T][T];

  function automatic void pf_line(input real j[T], input real a[T], input real p[T],
                                  input real lam, output real o[T]);
    real F [T+1], Fh [T+1], B [T], Bh [T];
    F[0] = 0.0; Fh[0] = 0.0;
    for (int q = 0; q < T; q++) begin
      F[q+1]  = p[q] * (F[q] + j[q]);
      Fh[q+1] = p[q] * (Fh[q] + 1.0);
    end
    B[T-1] = 0.0; Bh[T-1] = 0.0;
    for (int q = T-1; q > 0; q--) begin
      B[q-1]  = p[q-1] * (B[q] + j[q]);
      Bh[q-1] = p[q-1] * (Bh[q] + 1.0);
    end
    for (int q = 0; q < T; q++)
      o[q] = (F[q] + j[q] + B[q] + lam * (a[q] - j[q])) / (Fh[q] + 1.0 + Bh[q]);
  endfunction

  function automatic void filter_tile(input tile_r A, input tile_r PX, input tile_r PY,
                                      input real lam, input int K, output tile_r J);
    real jl[T], al[T], pl[T], ol[T];
    J = A;
    for (int k = 0; k < K; k++) begin
      for (int y = 0; y < T; y++) begin
        for (int x = 0; x < T; x++) begin jl[x] = J[y][x]; al[x] = A[y][x]; pl[x] = PX[y][x]; end
        pf_line(jl, al, pl, lam, ol);
        for (int x = 0; x < T; x++) J[y][x] = ol[x];
      end
      for (int x = 0; x < T; x++) begin
        for (int y = 0; y < T; y++) begin jl[y] = J[y][x]; al[y] = A[y][x]; pl[y] = PY[y][x]; end
        pf_line(jl, al, pl, lam, ol);
        for (int y = 0; y < T; y++) J[y][x] = ol[y];
      end
    end
  endfunction

  // Linear blending weight along one axis, in 1/64 units. b: block 0..2,
  // u: position in the block, first/last: tile at the frame border.
  function automatic int weight1d(int b, int u, bit first, bit last);
    if (b == 0) return first ? 64 : 2 * u + 1;
    if (b == 2) return last ? 64 : 31 - 2 * u;
    return 32 + (first ? 31 - 2 * u : 0) + (last ? 2 * u + 1 : 0);
  endfunction
endpackage

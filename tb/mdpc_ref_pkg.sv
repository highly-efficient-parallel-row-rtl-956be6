// mdpc_ref_pkg -- behavioural reference of the row-layered scaled Min-sum
// decoder, for the testbenches.
//
// The class mdpc_ref holds a code (the ascending row-0 supports of the n0
// circulants), generates codewords by circular products (x0 = u*h1,
// x1 = u*h0, which makes H0 x0 + H1 x1 = 0 without any inversion) and
// decodes a received word layer by layer, one row at a time, with plain
// integer arithmetic: no pipeline, no memories. It uses the same number
// formats as the hardware (a-posteriori in units of 2^-FRAC, q-bit integer
// v2c/c2v magnitudes, alpha with two signed power-of-two digits, rounding)
// and the same stopping rule (all row parities of an iteration even and no
// a-posteriori sign change during it), so hardware and model must agree bit
// for bit. It also computes the true syndrome of a word from H.
package mdpc_ref_pkg;
  import mdpc_pkg::*;

  class mdpc_ref #(int NSUB = 2, int RSZ = 67, int WCOL = 5, int LANES = 4, int IMAXP = 10);
    localparam int NLAY = (RSZ + LANES - 1) / LANES;
    localparam int NSL  = NSUB * WCOL;
    localparam int AMAX = (1 << (PW - 1)) - 1;
    localparam int AMIN = -(1 << (PW - 1));

    int supp [NSUB][WCOL];         // row-0 support of each circulant, ascending
    int gam  [NSUB][RSZ];          // a-posteriori values
    int m1 [RSZ], m2 [RSZ], mi [RSZ], ms [RSZ];  // compressed c2v per row
    bit sgn  [RSZ][NSL];           // v2c sign per row and block
    int iters;
    bit success;

    // random support with circular distance >= LANES between entries: each
    // new entry is drawn until it keeps that distance to the ones chosen
    function void random_code();
      for (int i = 0; i < NSUB; i++) begin
        bit used [RSZ];
        int cnt;
        foreach (used[c]) used[c] = 0;
        cnt = 0;
        while (cnt < WCOL) begin
          int c;
          bit ok;
          c = int'($urandom_range(RSZ - 1));
          ok = 1;
          for (int d = -(LANES - 1); d <= LANES - 1; d++)
            if (used[(c + d + RSZ) % RSZ]) ok = 0;
          if (ok) begin used[c] = 1; cnt++; end
        end
        cnt = 0;
        for (int c = 0; c < RSZ; c++) if (used[c]) begin supp[i][cnt] = c; cnt++; end
      end
    endfunction

    // codeword from a random information vector u (NSUB must be 2)
    function void codeword(output bit x [NSUB][RSZ]);
      bit u [RSZ];
      foreach (u[t]) u[t] = bit'($urandom_range(1));
      for (int t = 0; t < RSZ; t++) begin
        x[0][t] = 0; x[1][t] = 0;
        for (int k = 0; k < WCOL; k++) begin
          x[0][t] ^= u[(t + supp[1][k]) % RSZ];
          x[1][t] ^= u[(t + supp[0][k]) % RSZ];
        end
      end
    endfunction

    function bit syndrome_zero(input bit x [NSUB][RSZ]);
      for (int j = 0; j < RSZ; j++) begin
        bit p;
        p = 0;
        for (int i = 0; i < NSUB; i++)
          for (int k = 0; k < WCOL; k++) p ^= x[i][(j + supp[i][k]) % RSZ];
        if (p) return 0;
      end
      return 1;
    endfunction

    static function int sat(input int v);
      return (v > AMAX) ? AMAX : (v < AMIN) ? AMIN : v;
    endfunction

    // alpha * (sign, mag), in units of 2^-FRAC, rounded half up on magnitude
    static function int scale(input int sign, input int mag);
      int prod, r;
      prod = mag * (AD1 * (1 << (AFW - AE1)) + AD2 * (1 << (AFW - AE2)));
      r    = (prod + (1 << (AFW - FRAC - 1))) >>> (AFW - FRAC);
      return sign ? -r : r;
    endfunction

    function void decode(input bit y [NSUB][RSZ]);
      for (int i = 0; i < NSUB; i++)
        for (int t = 0; t < RSZ; t++) gam[i][t] = y[i][t] ? -(CH << FRAC) : (CH << FRAC);
      success = 0;
      iters   = 0;
      for (int k = 1; k <= IMAXP; k++) begin
        bit par_ok, flip;
        par_ok = 1;
        flip   = 0;
        for (int l = 0; l < NLAY; l++) begin
          int nrow;
          nrow = (l == NLAY - 1) ? RSZ - (NLAY - 1) * LANES : LANES;
          for (int m = 0; m < nrow; m++) begin
            int row, u [NSL], cols [NSL], subs [NSL];
            bit rsg [NSL];
            int n1, n2, nidx, ns;
            bit par;
            row = l * LANES + m;
            n1 = (1 << Q) - 1; n2 = (1 << Q) - 1; nidx = -1; ns = 0; par = 0;
            for (int j = 0; j < NSL; j++) begin
              int i, c, g, vm, vs, mag;
              i = j / WCOL;
              c = (supp[i][j % WCOL] + row) % RSZ;
              subs[j] = i; cols[j] = c;
              g = gam[i][c];
              rsg[j] = g < 0;
              par ^= rsg[j];
              if (k == 1) begin vm = 0; vs = 0; end
              else begin
                vm = (c + i * (1 << LCW) == mi[row]) ? m2[row] : m1[row];
                vs = ms[row] ^ sgn[row][j];
              end
              u[j] = sat(g - scale(vs, vm));
              sgn[row][j] = u[j] < 0;
              mag = ((u[j] < 0 ? -u[j] : u[j]) + (1 << (FRAC - 1))) >> FRAC;
              if (mag > (1 << Q) - 1) mag = (1 << Q) - 1;
              ns ^= int'(u[j] < 0);
              if (mag < n1) begin n2 = n1; n1 = mag; nidx = c + i * (1 << LCW); end
              else if (mag < n2) n2 = mag;
            end
            m1[row] = n1; m2[row] = n2; mi[row] = nidx; ms[row] = ns;
            if (par) par_ok = 0;
            for (int j = 0; j < NSL; j++) begin
              int vm, vs, g;
              vm = (cols[j] + subs[j] * (1 << LCW) == nidx) ? n2 : n1;
              vs = ns ^ int'(u[j] < 0);
              g  = sat(u[j] + scale(vs, vm));
              if ((g < 0) != rsg[j]) flip = 1;
              gam[subs[j]][cols[j]] = g;
            end
          end
        end
        iters = k;
        if (par_ok && !flip) begin success = 1; break; end
      end
    endfunction

    function bit hard(input int i, input int c);
      return gam[i][c] < 0;
    endfunction
  endclass
endpackage

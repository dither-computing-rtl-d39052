// dc_ref_pkg -- reference arithmetic for the testbenches.
//
// Written from the definitions, in 64-bit integers and independent of the RTL:
//   xorshift32     the generator step x ^= x<<13; x ^= x>>17; x ^= x<<5.
//   ref_dither     pulse of rank `rank` of the dither representation of
//                  x = xi / 2^fw for length n and random integer r (rw bits):
//                  x <= 1/2: 1 if rank < floor(nx), else 1 iff r/2^rw < delta,
//                            delta = (nx - floor(nx)) / (n - floor(nx));
//                  x >  1/2: 0 if rank >= ceil(nx), else 1 iff r/2^rw >= delta,
//                            delta = (ceil(nx) - nx) / ceil(nx).
//                  Both comparisons are cross-multiplied so they are exact.
package dc_ref_pkg;

  function automatic logic [31:0] xorshift32(input logic [31:0] s);
    logic [31:0] t;
    t = s ^ (s << 13);
    t = t ^ (t >> 17);
    t = t ^ (t << 5);
    return t;
  endfunction

  function automatic bit ref_dither(input longint unsigned xi, input int fw,
                                    input longint unsigned n,
                                    input longint unsigned rank,
                                    input longint unsigned r, input int rw);
    longint unsigned one, nx, nfl, ncl;
    one = 64'd1 << fw;
    nx  = n * xi;                      // N x scaled by 2^fw
    nfl = nx / one;
    ncl = (nx + one - 1) / one;
    if (xi * 2 <= one) begin
      if (rank < nfl) return 1'b1;
      // r / 2^rw < (nx/one - nfl) / (n - nfl)
      return (r * (n - nfl) * one) < ((nx - nfl * one) << rw);
    end else begin
      if (rank >= ncl) return 1'b0;
      // r / 2^rw >= (ncl - nx/one) / ncl
      return (r * ncl * one) >= ((ncl * one - nx) << rw);
    end
  endfunction

endpackage

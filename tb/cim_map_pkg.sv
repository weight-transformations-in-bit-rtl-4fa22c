// cim_map_pkg: offline weight-mapping routines used by the macro testbenches.
//
// On a real chip these searches run in software before the weights are
// written, using the chip's stuck-at-fault map from manufacturing test; the
// testbenches need them to produce the stored codes and flip masks that the
// hardware is meant to correct. All weights are 8-bit two's complement.
//
//   closest(t, sa0, sa1, inv): among the codes c a faulty weight location can
//     hold (bits with a stuck-at-0 cell are 0, bits with a stuck-at-1 cell
//     are 1), the one whose decoded value of c ^ inv is nearest to t; ties go
//     to the lowest code. With inv = 0 this is closest-value mapping (CVM).
//     With inv = j it is CVM for a weight whose slices marked in j are stored
//     complemented, i.e. the bit-flip candidate for flip pattern j.
//   Sign-flip picks, per weight column, CVM(w) or CVM(-w), whichever has the
//   smaller summed absolute error over the column's rows.
//   Bit-flip picks, per weight column, the flip pattern j with the smallest
//   summed error of the effective values (stored ^ j). The published listing
//   of the bit-flip search compares the mapped candidate with the target
//   directly; this version compares the effective value stored ^ j, which is
//   what the hardware reproduces after its sum(I) correction.
//   The negation of -128 (+128) is not representable; CVM then returns the
//   nearest storable value, at most +127.
package cim_map_pkg;

  function automatic int sval(input logic [7:0] c);
    return int'($signed(c));
  endfunction

  function automatic int iabs(input int v);
    return (v < 0) ? -v : v;
  endfunction

  function automatic logic legal(input logic [7:0] c, input logic [7:0] sa0, input logic [7:0] sa1);
    return ((c & sa0) == 8'h00) && ((c & sa1) == sa1);
  endfunction

  function automatic logic [7:0] closest(input int t, input logic [7:0] sa0, input logic [7:0] sa1,
                                         input logic [7:0] inv);
    int best_err;
    logic [7:0] best;
    best_err = 1 << 30;
    best = 8'h00;
    for (int i = 0; i < 256; i++) begin
      logic [7:0] c;
      int err;
      c = 8'(i);
      if (legal(c, sa0, sa1)) begin
        err = iabs(sval(c ^ inv) - t);
        if (err < best_err) begin
          best_err = err;
          best = c;
        end
      end
    end
    return best;
  endfunction

endpackage

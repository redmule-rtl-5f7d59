// redmule_cast: the mixed-precision cast module between memory and streamer.
//
// As in the paper's cast-module figure it holds two cast units, each with a
// bypass mux (SEL = cast ? 1 : 0):
//   input side:  D elements read from memory, either FP16 (passed through) or
//                8-bit hybrid FP8 (E4M3 or E5M2, packed in the low D bytes),
//                widened exactly to FP16 for the datapath;
//   output side: D FP16 results, either passed through or rounded (nearest
//                even) to FP8 and packed into the low D bytes.
// The datapath therefore always computes in FP16.  The format of each side is
// chosen per access (the streamer passes the format of the tensor it moves).
// The FP8 encodings (IEEE-like: all-ones exponent is Inf/NaN; overflow rounds
// to Inf) are this design's choice.  Purely combinational.
module redmule_cast #(
  parameter int unsigned D = 16
) (
  input  redmule_pkg::fmt_e  ld_fmt_i,
  input  logic [D*16-1:0]    ld_raw_i,
  output logic [15:0]        ld_row_o [D],
  input  redmule_pkg::fmt_e  st_fmt_i,
  input  logic [15:0]        st_row_i [D],
  output logic [D*16-1:0]    st_raw_o
);
  import redmule_pkg::*;

  always_comb begin
    for (int i = 0; i < D; i++)
      ld_row_o[i] = (ld_fmt_i != FMT_FP16) ? fp8_to_fp16(ld_raw_i[8*i +: 8], ld_fmt_i)
                                           : ld_raw_i[16*i +: 16];
    st_raw_o = '0;
    for (int i = 0; i < D; i++) begin
      if (st_fmt_i != FMT_FP16) st_raw_o[8*i +: 8]   = fp16_to_fp8(st_row_i[i], st_fmt_i);
      else                      st_raw_o[16*i +: 16] = st_row_i[i];
    end
  end
endmodule

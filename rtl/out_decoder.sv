// out_decoder: one of the eight output decoders of the compression decoder.
//
// Following Fig. 4 of the paper, it holds sixteen match cells, one per
// sparse word held in the two line buffers (Buf1 and Buf2, eight words
// each). Cell i fires when its word is valid (mask), its row index equals
// the tile row being emitted (glb_r) and its column index equals this
// decoder's column (loc_c). The sixteen hits form a one-hot select of the
// word's 16-bit value; when no cell fires, a zero is inserted. Purely
// combinational. If malformed data gave two hits, the values would be ORed.
module out_decoder
  import cc_pkg::*;
#(
  parameter int unsigned N = 2 * WPL       // words visible: Buf1 + Buf2
) (
  input  sword_t           words [N],
  input  logic [N-1:0]     mask,
  input  logic [ROW_W-1:0] glb_r,
  input  logic [COL_W-1:0] loc_c,
  output logic [NZV_W-1:0] value,
  output logic             hit        // a non-zero value was found
);

  logic [N-1:0] sel;

  always_comb begin
    value = '0;
    for (int i = 0; i < N; i++) begin
      sel[i] = mask[i] && (words[i].r == glb_r) && (words[i].c == loc_c);
      if (sel[i]) value = value | words[i].value;
    end
    hit = |sel;
  end

endmodule

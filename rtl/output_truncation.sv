// output_truncation: configurable selective truncation and packing of the
// 16 encoder outputs into the transmitted payload (combinational).
//
// Each output o has a configured width width_i[o] of 0..9 bits. The output
// keeps its width_i[o] most significant bits (the low bits are dropped, so a
// truncated value keeps its scale and loses resolution); width 0 drops the
// output. The kept fields are packed back to back from bit 0 upwards in
// output order, unused payload bits are zero, and nbits_o reports the payload
// length. Uniform widths of 3, 5, 7 and 9 bits give the 48-, 80-, 112- and
// 144-bit payloads; mixed widths and fewer than 16 outputs are allowed.
// Width codes above 9 are treated as 9.
//
// From the paper: 16 outputs of up to 9 bits, 48..144-bit payload, fully
// configurable truncation including fewer outputs and mixed precisions. This
// design's choice: keeping the MSBs, LSB-first packing, the 4-bit width code
// per output and where the configuration comes from (a top-level input).
module output_truncation
  import ae_pkg::*;
(
  input  logic [OUT_W-1:0]   y_i     [N_OUT],
  input  logic [TRW_W-1:0]   width_i [N_OUT],
  output logic [PAY_W-1:0]   payload_o,
  output logic [7:0]         nbits_o
);
  always_comb begin
    int unsigned pos;
    int unsigned w;
    logic [OUT_W-1:0] field;
    payload_o = '0;
    pos       = 0;
    for (int o = 0; o < N_OUT; o++) begin
      w     = (width_i[o] > TRW_W'(OUT_W)) ? OUT_W : int'(width_i[o]);
      field = y_i[o] >> (OUT_W - w);
      for (int b = 0; b < OUT_W; b++) begin
        if (b < w) payload_o[pos + b] = field[b];
      end
      pos = pos + w;
    end
    nbits_o = 8'(pos);
  end
endmodule

// secded_dec: (72,64) SECDED decoder for one burst beat.
//
// Recomputes the seven Hamming check bits from the received data and XORs them
// with the received ones (the syndrome), and recomputes the parity of the
// whole 72-bit word:
//   syndrome 0, parity even  -> no error
//   parity odd               -> single error: if the syndrome names a data bit
//                               position it is flipped back; a check-bit or
//                               overall-parity error leaves the data as is (ce)
//   syndrome != 0, parity even, or a syndrome that names no position
//                            -> two or more errors, uncorrectable (ue)
//
// Interface: code (72) in, layout as secded_enc; data (64), ce, ue out.
// Purely combinational.
//
// The paper relies on SECDED correcting one bit per codeword and flagging
// multi-bit errors; the code construction is this design's own.
module secded_dec
  import diva_pkg::*;
(
  input  logic [CW_W-1:0]   code,
  output logic [DATA_W-1:0] data,
  output logic              ce,
  output logic              ue
);

  logic [DATA_W-1:0] d_in;
  logic [6:0]        syn;
  logic              par_odd;
  logic              hit;

  always_comb begin
    d_in    = code[DATA_W-1:0];
    syn     = secded_check(d_in) ^ code[70:64];
    par_odd = ^code;
    data    = d_in;
    ce      = 1'b0;
    ue      = 1'b0;
    hit     = 1'b0;
    if (par_odd) begin
      if (syn == 7'd0 || (syn & (syn - 7'd1)) == 7'd0) begin
        ce = 1'b1;                       // overall-parity or check-bit error
      end else begin
        for (int i = 0; i < DATA_W; i++) begin
          if (DPOS_TBL[7*i +: 7] == syn) begin
            data[i] = ~d_in[i];
            hit     = 1'b1;
          end
        end
        ce = hit;
        ue = ~hit;                       // syndrome beyond position 71
      end
    end else if (syn != 7'd0) begin
      ue = 1'b1;
    end
  end

endmodule

// hlc_ec: stage S2, entropy coding of one CU. A header is written first:
// the PLT flag (1 bit), the QP (4 bits) and, for DP CUs, the DP mode
// (2 bits, 0 DC, 1 VT, 2 HT); the header layout is this design's. It is
// followed by the output of the palette path (hlc_ec_plt) or the DP path
// (hlc_ec_dp), whichever RDO selected. The CU bitstream and its length are
// registered (one clock latency); bits_len is also the actual size B_act
// fed back to rate control.
module hlc_ec
  import hlc_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  input  s1_t          in,
  output logic         out_valid,
  output cubits_t      out_bits,
  output logic [11:0]  out_len
);
  cubits_t     plt_bits, dp_bits, hdr, body, all_bits;
  logic [11:0] plt_len, dp_len, hlen, blen;

  hlc_ec_plt u_plt (.palette(in.palette), .ncc(in.ncc), .idx_map(in.idx_map), .nruns(in.nruns),
                    .run_sym(in.run_sym), .run_len(in.run_len), .bits(plt_bits), .len(plt_len));
  hlc_ec_dp  u_dp  (.coef(in.coef), .bitplane(in.bitplane), .bits(dp_bits), .len(dp_len));

  always_comb begin
    hdr = '0; hlen = '0;
    put_bits(hdr, hlen, 32'(in.is_plt), 6'd1);
    put_bits(hdr, hlen, 32'(in.qp), 6'd4);
    if (!in.is_plt) put_bits(hdr, hlen, 32'(in.dp_mode), 6'd2);
    body     = in.is_plt ? plt_bits : dp_bits;
    blen     = in.is_plt ? plt_len  : dp_len;
    all_bits = hdr | (body << hlen);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_bits <= '0; out_len <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_bits <= all_bits;
        out_len  <= hlen + blen;
      end
    end
  end
endmodule

// tb_sc_leaf4: the 4-bit sub-tree decoder against the bit-level SC reference
// for random LLRs and random frozen patterns; enc must equal u * G4.
module tb_sc_leaf4;
  import polar_pkg::*;
  import tb_ref_pkg::*;
`include "tb_common.svh"
  llr_t llr [4];
  logic [3:0] frozen, u, enc;
  int ch[];
  bit fz[], ur[], xr[];
  sc_leaf4 dut (.llr, .frozen, .u, .enc);
  initial begin
    ch = new[4];
    fz = new[4];
    for (int n = 0; n < 3000; n++) begin
      for (int i = 0; i < 4; i++) begin
        ch[i] = int'($urandom_range(126)) - 63;
        if (n % 3 == 0) ch[i] = ch[i] / 8;
        fz[i] = ($urandom_range(3) == 0);
        llr[i] = to_llr(ch[i]);
        frozen[i] = fz[i];
      end
      #1;
      sc_decode(ch, fz, ur);
      encode(ur, xr);
      for (int i = 0; i < 4; i++) begin
        check(u[i] == ur[i], $sformatf("u[%0d] case %0d", i, n));
        check(enc[i] == xr[i], $sformatf("enc[%0d] case %0d", i, n));
      end
    end
    finish_tb();
  end
endmodule

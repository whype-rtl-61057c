// tb_hv_permute: self-checking test of hv_permute.
// Drives random hypervectors and permutation powers, compares against a
// bit-by-bit reference of rho^a (out[i] = in[(i-a) mod D]) and its inverse,
// and checks that the inverse undoes the forward permutation.
module tb_hv_permute;
  localparam int unsigned D = 512;
  int checks = 0, failures = 0;

  logic [D-1:0] hv, fwd, inv, back;
  logic [$clog2(D)-1:0] amt;

  hv_permute #(.D(D)) u_fwd  (.hv_i(hv),  .amt_i(amt), .inv_i(1'b0), .hv_o(fwd));
  hv_permute #(.D(D)) u_inv  (.hv_i(hv),  .amt_i(amt), .inv_i(1'b1), .hv_o(inv));
  hv_permute #(.D(D)) u_back (.hv_i(fwd), .amt_i(amt), .inv_i(1'b1), .hv_o(back));

  function automatic logic [D-1:0] rand_hv();
    logic [D-1:0] v;
    for (int w = 0; w < D / 32; w++) v[w*32 +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 200; t++) begin
      logic [D-1:0] ef, ei;
      int a;
      hv  = rand_hv();
      a   = (t < 4) ? t : int'($urandom_range(D - 1));
      amt = $clog2(D)'(a);
      #1;
      for (int i = 0; i < D; i++) begin
        ef[i] = hv[(i - a + D) % D];
        ei[i] = hv[(i + a) % D];
      end
      checks++; if (fwd !== ef) begin failures++; $display("fwd mismatch amt=%0d", a); end
      checks++; if (inv !== ei) begin failures++; $display("inv mismatch amt=%0d", a); end
      checks++; if (back !== hv) begin failures++; $display("round trip mismatch amt=%0d", a); end
    end
    // rho^1 on a single one moves it one position up.
    hv = '0; hv[D-1] = 1'b1; amt = 1; #1;
    checks++; if (fwd !== {{(D-1){1'b0}}, 1'b1}) begin failures++; $display("wrap mismatch"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

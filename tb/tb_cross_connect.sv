// tb_cross_connect: drives every rotation with random bank words and checks that PE p
// receives bank (p + rot) mod PP.
module tb_cross_connect;
  import virt_pkg::*;
  localparam int N = PP;
  logic [$clog2(N)-1:0] rot;
  logic [WORD_W-1:0] bank_in [N];
  logic [WORD_W-1:0] pe_out  [N];
  int checks = 0, failures = 0;

  cross_connect dut (.rot, .bank_in, .pe_out);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 50; t++) begin
      rot = $clog2(N)'($urandom_range(0, N-1));
      for (int b = 0; b < N; b++) bank_in[b] = {$urandom, $urandom};
      #1;
      for (int p = 0; p < N; p++) begin
        checks++;
        if (pe_out[p] !== bank_in[(p + int'(rot)) % N]) begin
          failures++;
          $display("mismatch rot=%0d pe=%0d", rot, p);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

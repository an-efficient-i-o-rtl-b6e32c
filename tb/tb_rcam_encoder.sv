// tb_rcam_encoder -- exhaustive test of the RCB write-strobe encoder at its
// full size (8 RCBs x 32 words): for every row address and both write-strobe
// values, the strobe must reach exactly the RCB caddr/32 and the word address
// must be caddr mod 32.
module tb_rcam_encoder;
  logic       cwe;
  logic [7:0] caddr;
  logic [7:0] rcb_we;
  logic [4:0] word_addr;
  int checks = 0, failures = 0;

  rcam_encoder dut (.*);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int w = 0; w < 2; w++) begin
      for (int a = 0; a < 256; a++) begin
        cwe = w[0]; caddr = 8'(a);
        #1;
        checks++;
        if (rcb_we !== (w[0] ? 8'(1 << (a / 32)) : 8'h00) || word_addr !== 5'(a % 32)) begin
          failures++;
          $display("caddr %0d cwe %0d: rcb_we %b word_addr %0d", a, w, rcb_we, word_addr);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

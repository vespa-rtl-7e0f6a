// tb_bank_decoder: exhaustive check of the 2-bank (32 kB) and 4-bank
// (64 kB) bank decoders: with the superpage-TLB miss low exactly the bank
// named by the bank index is enabled, with it high all banks are.
module tb_bank_decoder;
  logic [0:0] idx2;
  logic [1:0] idx4;
  logic miss;
  logic [1:0] en2;
  logic [3:0] en4;
  int checks = 0, failures = 0;

  bank_decoder #(.NUM_BANKS(2)) dut2 (.bank_index(idx2), .sp_miss(miss), .bank_en(en2));
  bank_decoder #(.NUM_BANKS(4)) dut4 (.bank_index(idx4), .sp_miss(miss), .bank_en(en4));

  initial begin
    for (int m = 0; m < 2; m++) begin
      for (int i = 0; i < 4; i++) begin
        miss = m[0]; idx2 = i[0]; idx4 = i[1:0];
        #1;
        checks++;
        if (en2 != (m ? 2'b11 : (i[0] ? 2'b10 : 2'b01))) begin failures++; $display("FAIL 2-bank idx=%0d miss=%0d en=%b", i, m, en2); end
        checks++;
        if (en4 != (m ? 4'b1111 : 4'(1 << i))) begin failures++; $display("FAIL 4-bank idx=%0d miss=%0d en=%b", i, m, en4); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

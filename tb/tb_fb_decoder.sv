// tb_fb_decoder: exhaustive test of the feedback decoder for KMAX = 4: every
// 5-bit word with valid high and low is compared with the expected enables.
module tb_fb_decoder;
  localparam int KMAX = 4;
  logic       fb_valid, restart, n_en;
  logic [4:0] fb;
  logic [3:0] x_en, t_en;
  int checks = 0, failures = 0;

  fb_decoder #(.KMAX(KMAX)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 2; v++)
      for (int w = 0; w < 32; w++) begin
        logic [3:0] et, ex;
        logic er, en;
        fb_valid = v[0]; fb = 5'(w);
        #1;
        er = v[0] && w[3];
        en = v[0] && !w[3];
        et = '0; ex = '0;
        for (int k = 1; k <= KMAX; k++)
          if (en && (w & 7) == k) begin et[k-1] = 1'b1; ex[k-1] = w[4]; end
        checks++;
        if (restart !== er || n_en !== en || t_en !== et || x_en !== ex) begin
          failures++;
          $display("FAIL word %b valid %0d: restart %b n_en %b t_en %b x_en %b", fb, v, restart, n_en, t_en, x_en);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

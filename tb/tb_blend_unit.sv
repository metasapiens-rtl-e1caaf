// tb_blend_unit: random colours, weights and blend flags against the
// per-channel linear interpolation worked out in the testbench.
module tb_blend_unit;
  logic [23:0] a, b, o;
  logic [7:0]  w;
  logic        bl;
  int checks = 0, failures = 0;

  blend_unit dut (.rgb_a(a), .rgb_b(b), .w(w), .blend(bl), .rgb_out(o));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 2000; n++) begin
      int exp_o;
      a = 24'($urandom); b = 24'($urandom); w = 8'($urandom); bl = 1'($urandom);
      if (n == 0) begin a = 24'h0000FF; b = 24'hFF0000; w = 8'd128; bl = 1'b1; end
      #1;
      exp_o = 0;
      for (int ch = 0; ch < 3; ch++) begin
        int ca, cb;
        ca = (a >> (8*ch)) & 255; cb = (b >> (8*ch)) & 255;
        exp_o += (bl ? (ca * (256 - w) + cb * w) / 256 : ca) << (8*ch);
      end
      checks++;
      if (o !== 24'(exp_o)) begin
        failures++;
        if (failures < 5) $display("mismatch a=%h b=%h w=%0d bl=%0d got %h exp %h", a, b, w, bl, o, exp_o);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

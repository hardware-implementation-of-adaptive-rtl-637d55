// tb_embedding_module: exhaustive check of the per-pixel embedding logic.
// Every pixel value, watermark bit and block type is applied to an
// enhanced and a basic instance, and both outputs are compared with the
// reference model. Also checks that the MSB is never changed.
module tb_embedding_module;
  import wm_pkg::*;
  import wm_ref_pkg::*;

  logic        clk = 1'b0;
  pixel_t      pix_in, out_enh, out_basic;
  logic        wm_bit;
  block_type_e btype;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  embedding_module #(.ENHANCED(1'b1)) dut_enh (
    .pix_in(pix_in), .wm_bit(wm_bit), .btype(btype), .pix_out(out_enh));
  embedding_module #(.ENHANCED(1'b0)) dut_basic (
    .pix_in(pix_in), .wm_bit(wm_bit), .btype(btype), .pix_out(out_basic));

  initial begin
    for (int v = 0; v < 256; v++) begin
      for (int w = 0; w < 2; w++) begin
        for (int t = 0; t < 2; t++) begin
          logic [7:0] e_enh, e_basic;
          pix_in = 8'(v);
          wm_bit = w[0];
          btype  = block_type_e'(t[0]);
          @(posedge clk);
          e_enh   = embed_pixel(8'(v), w[0], t[0], 1'b1);
          e_basic = embed_pixel(8'(v), w[0], t[0], 1'b0);
          checks += 3;
          if (out_enh !== e_enh) begin
            failures++;
            if (failures < 10) $display("FAIL enh p=%h w=%0d t=%0d got %h exp %h", v, w, t, out_enh, e_enh);
          end
          if (out_basic !== e_basic) begin
            failures++;
            if (failures < 10) $display("FAIL basic p=%h w=%0d t=%0d got %h exp %h", v, w, t, out_basic, e_basic);
          end
          if (out_enh[7] !== pix_in[7]) failures++;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

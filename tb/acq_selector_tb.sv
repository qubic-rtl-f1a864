// acq_selector_tb -- checks that each output follows its selected source.
module acq_selector_tb;
  import qubic_pkg::*;
  localparam int NSRC = 18, L = 2;
  logic clk = 0;
  always #2 clk = ~clk;
  int checks = 0, failures = 0;
  sample_t src [NSRC][NS];
  logic [7:0] sel [L];
  sample_t out [L][NS];
  int expv [L][NS];

  acq_selector #(.NSRC(NSRC), .L(L)) dut (.clk, .src, .sel, .out);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      if (n > 0)
        for (int l = 0; l < L; l++)
          for (int k = 0; k < NS; k++) begin
            checks++;
            if (int'(out[l][k]) != expv[l][k]) failures++;
          end
      for (int s = 0; s < NSRC; s++)
        for (int k = 0; k < NS; k++) src[s][k] = sample_t'($urandom);
      for (int l = 0; l < L; l++) begin
        sel[l] = 8'($urandom_range(0, NSRC + 2));
        for (int k = 0; k < NS; k++) expv[l][k] = (int'(sel[l]) < NSRC) ? int'(src[int'(sel[l])][k]) : 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

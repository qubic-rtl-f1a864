// dac_switch_tb -- checks routing, adding and saturation of the M-to-N switch.
//
// Random element outputs, destinations and activity are applied each clock;
// one clock later every DAC sample must equal the saturated sum of the active
// elements aimed at its pair (I on even, Q on odd DACs).
module dac_switch_tb;
  import qubic_pkg::*;
  localparam int M = 4, ND = 4;
  logic clk = 0;
  always #2 clk = ~clk;
  int checks = 0, failures = 0, n_add = 0, n_sat = 0;
  sample_t in_i [M][NS], in_q [M][NS];
  logic [M-1:0] in_active;
  logic [1:0] in_dest [M];
  sample_t dac [2*ND][NS];
  int exp_dac [2*ND][NS];

  dac_switch #(.M(M), .NDEST(ND)) dut (.clk, .in_i, .in_q, .in_active, .in_dest, .dac);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int sat(input int v);
    return v > 32767 ? 32767 : (v < -32768 ? -32768 : v);
  endfunction

  initial begin
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      if (n > 0)
        for (int d = 0; d < 2*ND; d++)
          for (int k = 0; k < NS; k++) begin
            checks++;
            if (int'(dac[d][k]) != exp_dac[d][k]) begin
              failures++;
              if (failures < 10) $display("n %0d dac %0d k %0d got %0d exp %0d", n, d, k, dac[d][k], exp_dac[d][k]);
            end
          end
      // new stimulus; small amplitudes mostly, full scale sometimes
      for (int m = 0; m < M; m++) begin
        in_active[m] = ($urandom_range(0, 3) != 0);
        in_dest[m] = 2'($urandom);
        for (int k = 0; k < NS; k++) begin
          in_i[m][k] = (n % 4 == 0) ? sample_t'($urandom) : sample_t'(int'($urandom_range(0, 8000)) - 4000);
          in_q[m][k] = (n % 4 == 0) ? sample_t'($urandom) : sample_t'(int'($urandom_range(0, 8000)) - 4000);
        end
      end
      for (int d = 0; d < ND; d++) begin
        int cnt;
        cnt = 0;
        for (int m = 0; m < M; m++) if (in_active[m] && in_dest[m] == 2'(d)) cnt++;
        if (cnt > 1) n_add++;
        for (int k = 0; k < NS; k++) begin
          int si, sq;
          si = 0; sq = 0;
          for (int m = 0; m < M; m++)
            if (in_active[m] && in_dest[m] == 2'(d)) begin si += int'(in_i[m][k]); sq += int'(in_q[m][k]); end
          if (sat(si) != si) n_sat++;
          exp_dac[2*d][k] = sat(si);
          exp_dac[2*d+1][k] = sat(sq);
        end
      end
    end
    checks++;
    if (n_add == 0 || n_sat == 0) failures++;
    $display("adds %0d saturations %0d", n_add, n_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

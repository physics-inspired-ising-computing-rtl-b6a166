// synapse_tb -- random neighbour states, weights, bias and valid masks; the
// local field is compared with a sum formed in integers.
module synapse_tb;
  import pbit_pkg::*;
  logic [DEG-1:0] m_nbr, nv;
  weight_t        jw [DEG];
  weight_t        h;
  field_t         fld;
  int checks = 0, failures = 0;

  synapse dut (.m_nbr(m_nbr), .j_w(jw), .h(h), .nbr_valid(nv), .i_field(fld));

  initial begin
    #1000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int expv;
    for (int t = 0; t < 5000; t++) begin
      m_nbr = DEG'($urandom);
      nv    = (t % 3 == 0) ? '1 : DEG'($urandom);
      // weights in the normalised range [-1, +1] (-256 .. 256), sometimes extreme
      for (int s = 0; s < DEG; s++)
        jw[s] = (t % 7 == 0) ? weight_t'(256) : weight_t'(int'($urandom_range(512)) - 256);
      h = (t % 7 == 0) ? weight_t'(256) : weight_t'(int'($urandom_range(512)) - 256);
      #1;
      expv = int'(h);
      for (int s = 0; s < DEG; s++)
        if (nv[s]) expv += m_nbr[s] ? int'(jw[s]) : -int'(jw[s]);
      checks++;
      if (int'(fld) != expv) begin
        failures++;
        if (failures < 10) $display("FAIL t=%0d I=%0d expected %0d", t, fld, expv);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

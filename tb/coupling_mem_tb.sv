// coupling_mem_tb -- a 16-p-bit store: checks reset to zero, random writes
// against a model, that slot 7 and out-of-range indices are ignored and
// that a write is visible on the next cycle.
module coupling_mem_tb;
  import pbit_pkg::*;
  localparam int N = 12;
  localparam int AW = $clog2(N) + SLOT_W;
  logic clk = 1'b0, rst_n, we;
  logic [AW-1:0] addr;
  weight_t wd;
  weight_t j_all [N][DEG];
  weight_t h_all [N];
  weight_t mj [N][DEG];
  weight_t mh [N];
  int checks = 0, failures = 0;
  always #1 clk = ~clk;

  coupling_mem #(.N(N)) dut (.clk(clk), .rst_n(rst_n), .cfg_we(we), .cfg_addr(addr),
                             .cfg_wdata(wd), .j_all(j_all), .h_all(h_all));

  task automatic compare(string tag);
    for (int i = 0; i < N; i++) begin
      checks++;
      if (h_all[i] !== mh[i]) begin failures++; $display("FAIL %s h[%0d]=%0d exp %0d", tag, i, h_all[i], mh[i]); end
      for (int s = 0; s < DEG; s++) begin
        checks++;
        if (j_all[i][s] !== mj[i][s]) begin
          failures++; $display("FAIL %s J[%0d][%0d]=%0d exp %0d", tag, i, s, j_all[i][s], mj[i][s]);
        end
      end
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int idx, slot;
    rst_n = 1'b0; we = 1'b0; addr = '0; wd = '0;
    for (int i = 0; i < N; i++) begin mh[i] = '0; for (int s = 0; s < DEG; s++) mj[i][s] = '0; end
    #3 rst_n = 1'b1;
    compare("reset");
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      idx  = $urandom_range(15);   // includes indices >= N
      slot = $urandom_range(7);    // includes unused slot 7
      addr = AW'(idx * 8 + slot);
      wd   = weight_t'($urandom);
      we   = 1'b1;
      @(posedge clk); #0.1;
      we = 1'b0;
      if (idx < N) begin
        if (slot < DEG) mj[idx][slot] = wd;
        else if (slot == SLOT_H) mh[idx] = wd;
      end
      if (t % 20 == 0) compare("write");
    end
    // idle cycles without we change nothing
    @(negedge clk); addr = '0; wd = weight_t'(77);
    repeat (3) @(posedge clk);
    #0.1 compare("idle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_rr_arbiter: self-checking test of the round-robin bank arbiter.
//
// The testbench keeps its own priority pointer and predicts every grant. It
// checks: with all N requesting, grants rotate 0, 1, ..., N-1, 0; random request
// patterns match the prediction; advance = 0 freezes the pointer; and a core
// that keeps requesting among N-1 competitors is granted within N cycles.
module tb_rr_arbiter;
  localparam int unsigned N  = ndft_pkg::CORES_PER_STACK;
  localparam int unsigned IW = $clog2(N);

  logic clk = 1'b0, rst_n = 1'b0;
  logic [N-1:0] req, gnt;
  logic advance;
  logic [IW-1:0] gnt_idx;

  rr_arbiter dut (.*);

  always #5 clk = ~clk;

  int unsigned checks = 0, failures = 0;
  int unsigned ptr_model = 0;

  task automatic expect_grant();
    logic [N-1:0] eg = '0;
    int unsigned ei = 0;
    for (int unsigned k = 0; k < N; k++) begin
      int unsigned j = (ptr_model + k) % N;
      if (req[j]) begin eg[j] = 1'b1; ei = j; break; end
    end
    checks++;
    if (gnt !== eg || (eg != '0 && gnt_idx !== IW'(ei))) begin
      failures++;
      if (failures < 10) $display("FAIL req=%h gnt=%h exp=%h idx=%0d exp %0d", req, gnt, eg, gnt_idx, ei);
    end
    if (advance && eg != '0) ptr_model = (ei + 1) % N;
  endtask

  initial begin
    req = '0; advance = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // rotation with everyone requesting
    for (int unsigned n = 0; n < 2 * N; n++) begin
      @(negedge clk);
      req = '1; advance = 1;
      #1;
      checks++;
      if (gnt_idx !== IW'(n % N)) begin
        failures++;
        $display("FAIL rotation: step %0d granted %0d", n, gnt_idx);
      end
      expect_grant();
      checks--; // expect_grant counted the same grant again
    end
    // random patterns, random advance
    for (int n = 0; n < 5000; n++) begin
      @(negedge clk);
      req = N'($urandom()) & N'($urandom());
      advance = $urandom_range(0, 3) != 0;
      #1;
      expect_grant();
    end
    // bounded wait: core 5 keeps asking among everyone else
    begin
      int unsigned waited = 0;
      @(negedge clk);
      req = '1; advance = 1;
      #1;
      while (!gnt[5]) begin
        expect_grant();
        waited++;
        @(negedge clk); #1;
      end
      expect_grant();
      checks++;
      if (waited > N - 1) begin failures++; $display("FAIL starvation: waited %0d", waited); end
    end
    @(negedge clk); req = '0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

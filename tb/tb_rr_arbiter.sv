// tb_rr_arbiter -- self-checking test of the round-robin SM arbiter.
//
// Drives random request vectors (sparse and dense) into a 108-way arbiter, with
// `advance` random, and compares the grant against a reference that scans from
// its own copy of the pointer. Also checks that a grant appears in the same cycle
// as the request (zero-cycle arbitration), that a lone requester is granted, and
// that the pointer wraps from the last SM back to SM 0.
module tb_rr_arbiter;
  localparam int N = 108;
  localparam int W = $clog2(N);

  logic clk = 0, rst_n = 0;
  logic [N-1:0] req;
  logic advance;
  logic [N-1:0] gnt;
  logic [W-1:0] gnt_idx, ptr;
  logic gnt_valid;
  int checks = 0, failures = 0;
  int ref_ptr = 0;
  int wraps = 0;

  rr_arbiter #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s (ptr=%0d ref_ptr=%0d gnt_idx=%0d)", what, ptr, ref_ptr, gnt_idx);
    end
  endtask

  initial begin
    req = '0; advance = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 3000; it++) begin
      int exp_idx;
      logic exp_valid;
      @(negedge clk);
      // mixes: very sparse, half, single requester, all
      case (it % 4)
        0: for (int i = 0; i < N; i++) req[i] = ($urandom % 16) == 0;
        1: for (int i = 0; i < N; i++) req[i] = $urandom % 2;
        2: begin req = '0; req[$urandom % N] = 1'b1; end
        default: req = (it % 40 == 3) ? '0 : {N{1'b1}};
      endcase
      advance = ($urandom % 4) != 0;
      #1;
      exp_valid = 0; exp_idx = 0;
      for (int i = 0; i < N; i++) begin
        int j;
        j = (ref_ptr + i) % N;
        if (!exp_valid && req[j]) begin exp_valid = 1; exp_idx = j; end
      end
      check(gnt_valid == exp_valid, "grant valid");
      if (exp_valid) begin
        check(int'(gnt_idx) == exp_idx, "grant index");
        check(gnt == (N'(1) << exp_idx), "one-hot grant");
      end else begin
        check(gnt == '0, "no grant without request");
      end
      check(int'(ptr) == ref_ptr, "pointer");
      @(posedge clk);
      if (advance && exp_valid) begin
        if (exp_idx == N - 1) wraps++;
        ref_ptr = (exp_idx + 1) % N;
      end
    end
    check(wraps > 0, "pointer wrapped at least once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

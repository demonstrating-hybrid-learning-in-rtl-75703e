// tb_fair_arbiter: checks the favoured-requester arbiter against a reference
// model: with two requesters the favour flips on every conflict and the
// favoured one wins; a lone requester always wins without changing the
// favour. Also runs N = 5 with random requests against the same model.
module tb_fair_arbiter;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic [1:0] req2, gnt2; logic idx2, c2;
  logic [4:0] req5, gnt5; logic [2:0] idx5; logic c5;
  fair_arbiter #(.N(2)) dut2 (.clk, .rst_n, .req(req2), .gnt(gnt2), .gnt_idx(idx2), .conflict(c2));
  fair_arbiter #(.N(5)) dut5 (.clk, .rst_n, .req(req5), .gnt(gnt5), .gnt_idx(idx5), .conflict(c5));

  int fav2 = 0, fav5 = 0;
  function automatic logic [4:0] model(input logic [4:0] r, input int fav, input int n);
    for (int k = 0; k < n; k++) begin
      int i; i = (fav + k) % n;
      if (r[i]) return 5'(1 << i);
    end
    return '0;
  endfunction

  initial begin
    req2 = 0; req5 = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // directed: both request four times, favour alternates 0,1,0,1
    for (int t = 0; t < 4; t++) begin
      @(negedge clk); req2 = 2'b11; #0.1;
      checks++; if (gnt2 != 2'(1 << (t % 2))) begin failures++; $display("FAIL conflict %0d gnt=%b", t, gnt2); end
    end
    // lone requester 1 wins whatever the favour, favour unchanged
    @(negedge clk); req2 = 2'b10; #0.1;
    checks++; if (gnt2 != 2'b10) failures++;
    @(negedge clk); req2 = 2'b11; #0.1;
    checks++; if (gnt2 != 2'b01) begin failures++; $display("FAIL favour kept"); end
    @(negedge clk); req2 = 0;
    fav2 = 0;
    @(negedge clk);
    // random, both arbiters against the model
    fav2 = 1; // one conflict happened in the last directed step
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      req2 = 2'($urandom); req5 = 5'($urandom);
      #0.1;
      checks++; if (gnt2 != 2'(model(5'(req2), fav2, 2))) begin failures++; $display("FAIL n2 t=%0d", t); end
      checks++; if (gnt5 != model(req5, fav5, 5)) begin failures++; $display("FAIL n5 t=%0d", t); end
      if (req2 == 2'b11) fav2 = (fav2 + 1) % 2;
      if ((req5 & (req5 - 1)) != 0) fav5 = (fav5 + 1) % 5;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #5000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

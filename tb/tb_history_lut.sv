// tb_history_lut: random writes and lookups against a queue model of the
// table (same key overwrites in place, otherwise round-robin replacement).
// Hits, misses and returned indices must agree with the model.
module tb_history_lut;
  logic clk = 0, rst_n = 0;
  logic [2:0] q_expert, w_expert;
  logic [18:0] q_dh, w_dh;
  logic hit, we = 0;
  logic [9:0] idx, w_idx;
  int checks = 0, failures = 0, nhit = 0;
  bit          mv [8];
  int          me [8], md [8], mi [8];
  int          wp = 0;

  history_lut #(.ENTRIES(8), .EW(3), .DW(19), .IW(10)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit h, f;
    int hi, pos;
    for (int i = 0; i < 8; i++) mv[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      q_expert = 3'($urandom_range(0, 2));
      q_dh     = 19'($urandom_range(0, 12));
      #1;
      h = 0; hi = 0;
      for (int i = 0; i < 8; i++) if (!h && mv[i] && me[i] == int'(q_expert) && md[i] == int'(q_dh)) begin h = 1; hi = mi[i]; end
      checks++;
      if (hit != h || (h && int'(idx) != hi)) failures++;
      if (h) nhit++;
      we       = 1'($urandom);
      w_expert = 3'($urandom_range(0, 2));
      w_dh     = 19'($urandom_range(0, 12));
      w_idx    = 10'($urandom);
      @(posedge clk);
      #1;
      if (we) begin
        f = 0; pos = wp;
        for (int i = 0; i < 8; i++) if (!f && mv[i] && me[i] == int'(w_expert) && md[i] == int'(w_dh)) begin f = 1; pos = i; end
        mv[pos] = 1; me[pos] = int'(w_expert); md[pos] = int'(w_dh); mi[pos] = int'(w_idx);
        if (!f) wp = (wp + 1) % 8;
      end
      we = 0;
    end
    checks++;
    if (nhit == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

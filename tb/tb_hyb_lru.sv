// tb_hyb_lru: drives random touches and random valid masks into a 4-set,
// 4-way hyb_lru and compares its victim with a recency-list model (most
// recent first); invalid ways must be chosen first, lowest index first.
module tb_hyb_lru;
  localparam int SETS = 4, WAYS = 4;
  logic       clk = 0, rst_n = 0;
  logic [1:0] rd_set = 0, touch_set = 0, touch_way = 0, victim;
  logic [3:0] valid = '1;
  logic       touch = 0;
  int checks = 0, failures = 0;
  int order [SETS][$];   // recency list per set, most recent first

  hyb_lru #(.SETS(SETS), .WAYS(WAYS)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int model_victim(int s, logic [3:0] v);
    for (int w = 0; w < WAYS; w++) if (!v[w]) return w;
    return order[s][WAYS-1];
  endfunction

  initial begin
    for (int s = 0; s < SETS; s++) begin
      order[s] = {};
      for (int w = 0; w < WAYS; w++) order[s].push_back(w);  // reset: way i age i
    end
    #12 rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      // query
      rd_set = 2'($urandom);
      valid  = ($urandom % 4 == 0) ? 4'($urandom) : 4'hF;
      #1;
      checks++;
      if (int'(victim) != model_victim(rd_set, valid)) begin
        failures++;
        $display("FAIL set %0d valid %b: dut %0d model %0d", rd_set, valid, victim, model_victim(rd_set, valid));
      end
      // touch
      touch     = ($urandom % 4 != 0);
      touch_set = 2'($urandom);
      touch_way = 2'($urandom);
      @(posedge clk);
      if (touch) begin
        int s;
        s = touch_set;
        foreach (order[s][k]) if (order[s][k] == int'(touch_way)) begin order[s].delete(k); break; end
        order[s].push_front(int'(touch_way));
      end
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

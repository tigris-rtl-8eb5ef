// tb_fe_query_queue: three sources push and two consumers pop random traffic
// through a 16-entry FE Query Queue. Checks FIFO order against a model queue,
// the occupancy count, that nothing is accepted when full and nothing popped
// when empty, and that every token comes out exactly once.
module tb_fe_query_queue;
  import tigris_pkg::*;
  localparam int NPUSH = 3, NPOP = 2, DEPTH = 16;
  logic clk = 0, rst_n = 0;
  logic [NPUSH-1:0] push_valid, push_ready;
  fq_token_t [NPUSH-1:0] push_token;
  logic [NPOP-1:0] pop_req, pop_gnt;
  fq_token_t pop_token;
  logic [$clog2(DEPTH):0] count;
  int checks = 0, failures = 0, npushed = 0, npopped = 0, saw_full = 0;
  fq_token_t model[$];
  int serial = 0;

  fe_query_queue #(.NPUSH(NPUSH), .NPOP(NPOP), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", s); end
  endtask

  initial begin
    push_valid = '0; pop_req = '0; push_token = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      int phase;
      phase = (cyc / 500) % 2;   // alternate filling and draining phases
      for (int i = 0; i < NPUSH; i++) begin
        if (!push_valid[i] && ($urandom % 4 < (phase == 0 ? 3 : 1))) begin
          push_valid[i] = 1;
          push_token[i] = '{qid: qid_t'(serial), sp: SP_W'(i), started: 1'b1};
          serial++;
        end
      end
      for (int i = 0; i < NPOP; i++) pop_req[i] = ($urandom % 4 < (phase == 0 ? 1 : 3));
      #1;
      chk(int'(count) == model.size(), "count");
      chk($countones(push_ready) <= 1 && $countones(pop_gnt) <= 1, "one push and one pop per cycle");
      if (model.size() == DEPTH) begin saw_full++; chk(push_ready == '0, "push accepted while full"); end
      if (model.size() == 0) chk(pop_gnt == '0, "pop while empty");
      if (|pop_gnt) begin
        fq_token_t e;
        e = model.pop_front();
        chk(pop_token == e, $sformatf("order: got %0d expected %0d", pop_token.qid, e.qid));
        npopped++;
      end
      for (int i = 0; i < NPUSH; i++) if (push_ready[i]) begin
        model.push_back(push_token[i]);
        npushed++;
      end
      @(negedge clk);
      // drop pushes that were accepted at the edge
      for (int i = 0; i < NPUSH; i++) if (push_valid[i] && model.size() > 0 && model[$] == push_token[i]) push_valid[i] = 0;
    end
    chk(saw_full > 0, "queue never became full");
    chk(npopped > 100, "too few pops");
    $display("pushed %0d popped %0d full cycles %0d", npushed, npopped, saw_full);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

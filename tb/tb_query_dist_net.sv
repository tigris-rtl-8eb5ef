// tb_query_dist_net: four recursion units send random tokens to two search
// units that accept at random. Checks that every token reaches exactly the
// search unit named by the low-order bit of its leaf id, exactly once, that
// each search unit receives at most one token per cycle, and that contention
// (two units aiming at one search unit) occurs.
module tb_query_dist_net;
  import tigris_pkg::*;
  localparam int NRU = 4, NSU = 2;
  logic clk = 0, rst_n = 0;
  logic [NRU-1:0] in_valid, in_ready;
  be_token_t [NRU-1:0] in_token;
  logic [NSU-1:0] out_valid, out_ready;
  be_token_t [NSU-1:0] out_token;
  int checks = 0, failures = 0, sent = 0, recvd = 0, conflicts = 0;
  int seen [int];
  int serial = 0;

  query_dist_net #(.NRU(NRU), .NSU(NSU)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", s); end
  endtask

  initial begin
    in_valid = '0; in_token = '0; out_ready = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      int tgt_cnt [NSU];
      for (int i = 0; i < NRU; i++) if (!in_valid[i] && $urandom % 2) begin
        in_valid[i] = 1;
        in_token[i] = '{qid: qid_t'(serial), leaf: leaf_t'($urandom), sp: '0};
        serial++;
      end
      out_ready = NSU'($urandom);
      #1;
      for (int j = 0; j < NSU; j++) tgt_cnt[j] = 0;
      for (int i = 0; i < NRU; i++) if (in_valid[i]) tgt_cnt[in_token[i].leaf[0]]++;
      for (int j = 0; j < NSU; j++) if (tgt_cnt[j] > 1) conflicts++;
      for (int j = 0; j < NSU; j++) if (out_valid[j] && out_ready[j]) begin
        chk(int'(out_token[j].leaf[0]) == j, "token routed to the wrong search unit");
        chk(!seen.exists(int'(out_token[j].qid)), "token delivered twice");
        seen[int'(out_token[j].qid)] = j;
        recvd++;
      end
      for (int i = 0; i < NRU; i++) if (in_ready[i]) begin
        chk(seen.exists(int'(in_token[i].qid)), "accepted token not delivered");
        in_valid[i] = 0;
        sent++;
      end
      @(negedge clk);
    end
    chk(sent == recvd, "sent and received counts differ");
    chk(conflicts > 0, "no contention exercised");
    $display("sent %0d received %0d contention cycles %0d", sent, recvd, conflicts);
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

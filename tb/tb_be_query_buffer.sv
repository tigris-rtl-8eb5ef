// tb_be_query_buffer: fills a 16-entry BE Query Buffer (batches of up to 4,
// associative search in groups of 4) with queries of three leaves and drains
// it. Checks that every batch holds only queries of its key leaf, that the
// key is the first query, that a batch is full whenever enough queries of
// that leaf were waiting, that every query is issued exactly once, that
// push_ready drops when full, and the scan time (at most DEPTH/GROUP cycles
// plus the key-selection cycle).
module tb_be_query_buffer;
  import tigris_pkg::*;
  localparam int DEPTH = 16, NPE = 4, GROUP = 4;
  logic clk = 0, rst_n = 0;
  logic push_valid, push_ready, batch_valid, batch_ack;
  be_token_t push_token;
  be_token_t [NPE-1:0] batch_tok;
  logic [NPE-1:0] batch_mask;
  leaf_t batch_leaf;
  logic [$clog2(DEPTH):0] occupancy;
  int checks = 0, failures = 0, issued = 0, pushed = 0, saw_full = 0, batches = 0, full_batches = 0;
  be_token_t waiting [int];
  be_token_t snap [int];      // queries present when the current scan began
  int serial = 0, scan_cycles = 0;

  be_query_buffer #(.DEPTH(DEPTH), .NPE(NPE), .GROUP(GROUP)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", s); end
  endtask

  initial begin
    push_valid = 0; push_token = '0; batch_ack = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 5000; cyc++) begin
      int phase;
      phase = (cyc / 300) % 2;
      if (!push_valid && (phase == 0 || $urandom % 4 == 0) && serial < 1500) begin
        push_valid = 1;
        push_token = '{qid: qid_t'(serial), leaf: leaf_t'($urandom % 3), sp: SP_W'(serial % 7)};
        serial++;
      end
      batch_ack = batch_valid && (phase == 1 || $urandom % 8 == 0);
      #1;
      if (occupancy == DEPTH) begin saw_full++; chk(!push_ready, "push_ready while full"); end
      if (!batch_valid && occupancy != 0) scan_cycles++;
      if (batch_valid && batch_ack) begin
        int n, avail, least;
        n = 0; avail = 0; least = 0;
        foreach (waiting[k]) if (waiting[k].leaf == batch_leaf) avail++;
        foreach (snap[k]) if (snap[k].leaf == batch_leaf) least++;
        chk(batch_mask[0], "empty batch");
        for (int p = 0; p < NPE; p++) if (batch_mask[p]) begin
          n++;
          chk(batch_tok[p].leaf == batch_leaf, "query of another leaf in the batch");
          chk(waiting.exists(int'(batch_tok[p].qid)), "query issued twice or never pushed");
          waiting.delete(int'(batch_tok[p].qid));
        end
        // queries written while a scan runs may be left for a later batch
        chk(n <= avail && (n == NPE || n >= least),
            $sformatf("batch of %0d while %0d (at least %0d) were waiting", n, avail, least));
        if (n == NPE) full_batches++;
        issued += n;
        batches++;
        chk(scan_cycles <= DEPTH / GROUP + 1, "scan took too long");
        scan_cycles = 0;
        snap = waiting;
      end
      if (push_valid && push_ready) begin
        waiting[int'(push_token.qid)] = push_token;
        pushed++;
      end
      @(negedge clk);
      if (push_valid && waiting.exists(int'(push_token.qid))) push_valid = 0;
    end
    chk(issued == pushed - waiting.num(), "issued count");
    chk(saw_full > 0, "buffer never full");
    chk(full_batches > 0, "no full batch");
    $display("pushed %0d issued %0d batches %0d (full %0d)", pushed, issued, batches, full_batches);
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

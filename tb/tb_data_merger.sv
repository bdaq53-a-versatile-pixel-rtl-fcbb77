// tb_data_merger: self-checking test of the tagging round-robin merger with
// 3 lanes (5 sources). Each source holds a queue of random payloads and
// offers them with random gaps; the FIFO side is randomly full. Checks for
// every write: header type (data / user-K / trigger / TDC), channel ID and
// that the payload is the next one of that source; that nothing is written
// while full; that all words arrive; and the round-robin order when every
// source is always valid (grants 0,1,2,3,4,0,...).
module tb_data_merger;
  import bdaq_pkg::*;
  localparam int NL = 3, NS = NL + 2;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [NS-1:0] src_valid = '0, src_sub = '0, src_ready;
  logic [63:0]   src_payload [NS];
  logic          fifo_wr, fifo_full = 1'b0;
  daq_word_t     fifo_din;

  data_merger #(.N_LANES(NL)) dut (.*);

  typedef struct { logic k; logic [63:0] d; } item_t;
  item_t q [NS][$];

  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // present the head of each queue, sometimes hiding it
  logic hide [NS];
  always_comb
    for (int s = 0; s < NS; s++) begin
      src_valid[s]   = q[s].size() != 0 && !hide[s];
      src_payload[s] = (q[s].size() != 0) ? q[s][0].d : 64'h0;
      src_sub[s]     = (q[s].size() != 0) ? q[s][0].k : 1'b0;
    end

  int last_src = -1, rr_mode = 0, rr_errors = 0, writes = 0;

  initial begin
    for (int s = 0; s < NS; s++) hide[s] = 1'b0;
    for (int s = 0; s < NS; s++)
      for (int i = 0; i < 300; i++) begin
        item_t it;
        it.d = {32'(s), 32'(i)};
        it.k = (s < NL) ? 1'($urandom % 2) : 1'b0;
        q[s].push_back(it);
      end
    repeat (3) @(negedge clk);
    rst = 1'b0;
    // phase 1: everything always valid, never full -> strict rotation
    rr_mode = 1;
    repeat (100) begin
      @(negedge clk);
      chk(fifo_wr, "no write while all sources valid");
      for (int s = 0; s < NS; s++) if (src_ready[s]) begin
        if (last_src >= 0) chk(s == (last_src + 1) % NS, $sformatf("grant %0d after %0d", s, last_src));
        last_src = s;
      end
      chk($countones(src_ready) == 1, "not exactly one grant");
      for (int s = 0; s < NS; s++) if (src_ready[s]) begin
        item_t it;
        it = q[s].pop_front();
        chk(fifo_din.payload == it.d, "payload");
        writes++;
      end
    end
    // phase 2: random gaps and full
    rr_mode = 0;
    while (q[0].size() + q[1].size() + q[2].size() + q[3].size() + q[4].size() != 0) begin
      @(negedge clk);
      for (int s = 0; s < NS; s++) hide[s] = ($urandom % 3) == 0;
      fifo_full = ($urandom % 4) == 0;
      #1;
      if (fifo_full) chk(!fifo_wr && src_ready == '0, "write while full");
      if (fifo_wr) begin
        int s;
        item_t it;
        s = -1;
        for (int i = 0; i < NS; i++) if (src_ready[i]) s = i;
        chk($countones(src_ready) == 1, "grant not one-hot");
        it = q[s][0];
        chk(fifo_din.payload == it.d, $sformatf("payload from source %0d", s));
        if (s < NL) begin
          chk(fifo_din.chan == 4'(s), "lane channel ID");
          chk(fifo_din.wtype == (it.k ? WT_AURORA_USERK : WT_AURORA_DATA), "lane word type");
        end else if (s == NL) begin
          chk(fifo_din.wtype == WT_TRIGGER, "trigger word type");
        end else begin
          chk(fifo_din.wtype == WT_TDC, "TDC word type");
        end
        void'(q[s].pop_front());
        writes++;
      end else begin
        chk(fifo_full || src_valid == '0, "no write although a source is valid");
      end
    end
    chk(writes == NS * 300, $sformatf("%0d words written", writes));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

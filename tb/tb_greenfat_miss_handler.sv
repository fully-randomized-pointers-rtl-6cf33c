// tb_greenfat_miss_handler -- self-checking test of the miss controller.
//
// Starts misses for random ids; a memory-side model here accepts the request
// after a random delay and answers after a random latency, with a random
// found flag and metadata. Checks that the id sent to memory is the missed
// id, that done pulses exactly one cycle after the answer with the answer's
// found/meta and the id, that busy covers the whole miss, and that no second
// request is made.
module tb_greenfat_miss_handler;
  import frp_pkg::*;

  logic clk = 0, rst_n = 0;
  logic start, busy, map_req_valid, map_req_ready, map_rsp_valid, map_rsp_found;
  logic done, found;
  obj_id_t start_id, map_req_id, id;
  obj_meta_t map_rsp_meta, meta;

  greenfat_miss_handler dut (.clk, .rst_n, .start, .start_id, .busy,
    .map_req_valid, .map_req_ready, .map_req_id, .map_rsp_valid, .map_rsp_found,
    .map_rsp_meta, .done, .found, .id, .meta);

  int checks = 0, failures = 0, cycle = 0;

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cycle++;
    if (cycle > 100000) begin
      failures++;
      $display("watchdog expired");
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

  task automatic fail(string msg);
    failures++;
    $display("FAIL %s", msg);
  endtask

  initial begin
    start = 0; start_id = '0; map_req_ready = 0; map_rsp_valid = 0;
    map_rsp_found = 0; map_rsp_meta = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int n = 0; n < 500; n++) begin
      obj_id_t   want;
      obj_meta_t m;
      logic      f;
      int        d_ready, d_rsp, reqs;
      want = {$urandom, 8'($urandom)};
      m    = {$urandom, $urandom, $urandom, $urandom};
      f    = 1'($urandom);
      d_ready = $urandom_range(0, 3);
      d_rsp   = $urandom_range(0, 30);
      checks++;
      if (busy || done) fail("not idle before start");
      start = 1; start_id = want;
      @(negedge clk);
      start = 0; start_id = ~want;
      reqs = 0;
      // request phase
      repeat (d_ready) begin
        checks++;
        if (!map_req_valid || map_req_id != want || !busy) fail("request not offered");
        @(negedge clk);
      end
      map_req_ready = 1;
      checks++;
      if (!map_req_valid || map_req_id != want) fail("request id");
      @(negedge clk);
      map_req_ready = 0;
      // wait phase
      repeat (d_rsp) begin
        checks++;
        if (map_req_valid || done || !busy) fail("unexpected activity while waiting");
        @(negedge clk);
      end
      map_rsp_valid = 1; map_rsp_found = f; map_rsp_meta = m;
      @(negedge clk);
      map_rsp_valid = 0; map_rsp_meta = '0; map_rsp_found = 0;
      checks++;
      if (!done || found != f || (f && meta != m) || id != want)
        fail($sformatf("done=%b found=%b/%b id=%h/%h", done, found, f, id, want));
      @(negedge clk);
      checks++;
      if (done || busy) fail("done longer than one cycle");
      repeat ($urandom_range(0, 2)) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

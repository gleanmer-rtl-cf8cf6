// tb_map_query_unit: self-checking testbench for the batch Map Query Unit.
//
// The testbench plays the three neighbours of the unit. As the R-tree engine it answers each
// search with a random list of Gaussian pointers at random rates and then pulses done; as the
// memory it returns, after a random latency, the line of a Gaussian whose fields are derived
// from its pointer; as the regression unit it accepts Gaussians at random and, after the
// finish request, stays busy for a random time. For random batches (full batches of 16 and
// batches ended early by q_last) it checks that every coordinate is written to its slot, that the
// search box is exactly the enclosing box of the batch, that every retrieved Gaussian reaches
// every slot exactly once with the right contents, that one finish request per batch names the
// batch size, and the two counters.
module tb_map_query_unit;
  import gleanmer_pkg::*;
  localparam int BATCH = 16;
  localparam int SW = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic q_valid, q_last, q_ready;
  vec3_t q_coord;
  logic rt_start, rt_done, rt_valid, rt_ready;
  bbox_t rt_qbox;
  ptr_t rt_ptr;
  logic mreq_valid, mreq_ready, mresp_valid;
  ptr_t mreq_addr;
  logic [LINE_W-1:0] mresp_data;
  logic c_we, g_clear, g_valid, g_ready, fin_start, g_busy;
  logic [SW-1:0] c_idx, g_slot;
  vec3_t c_val;
  gaussian_t g_out;
  logic [SW:0] fin_n;
  logic [31:0] batches, gaussians_fetched;

  map_query_unit #(.BATCH(BATCH)) dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic gaussian_t g_of(input ptr_t p);
    gaussian_t g;
    g = '0;
    g.occ = p[0];
    g.weight = 16'(p * 7 + 3);
    g.mean.x = coord_t'(p * 3);
    g.mean.y = coord_t'(p * 5);
    g.mean.z = coord_t'(p * 11);
    for (int i = 0; i < 6; i++) g.prec[i] = cov_t'(p * (i + 1));
    return g;
  endfunction

  // per-batch expectation
  vec3_t coords[BATCH];
  int n_batch;
  ptr_t ptrs[$];
  int fed[int];            // key ptr*BATCH+slot
  int fin_seen;
  int exp_fetched = 0;

  // memory model
  int mem_lat;
  ptr_t mem_addr_q;
  logic mem_busy;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      mem_busy <= 0; mresp_valid <= 0;
    end else begin
      mresp_valid <= 0;
      if (mreq_valid && mreq_ready) begin
        mem_busy <= 1; mem_addr_q <= mreq_addr; mem_lat <= int'($urandom_range(0, 4));
      end else if (mem_busy) begin
        if (mem_lat == 0) begin
          mem_busy <= 0; mresp_valid <= 1; mresp_data <= gaussian_to_line(g_of(mem_addr_q));
        end else mem_lat <= mem_lat - 1;
      end
    end
  end
  assign mreq_ready = !mem_busy && !mresp_valid;

  // regression model
  int busy_cnt;
  always_ff @(posedge clk) begin
    if (!rst_n) begin busy_cnt <= 0; g_ready <= 0; end
    else begin
      g_ready <= ($urandom_range(0, 3) != 0);
      if (fin_start) busy_cnt <= int'($urandom_range(2, 12));
      else if (busy_cnt > 0) busy_cnt <= busy_cnt - 1;
    end
  end
  assign g_busy = busy_cnt > 0;

  // monitor
  always @(posedge clk) if (rst_n) begin
    if (c_we) begin
      chk(c_val == coords[c_idx], "coordinate written to slot");
    end
    if (g_valid && g_ready) begin
      int key;
      key = int'(dut.mreq_addr) * BATCH + int'(g_slot);
      chk(g_out == g_of(dut.mreq_addr), "gaussian contents");
      chk(int'(g_slot) < n_batch, "slot in range");
      if (fed.exists(key)) fed[key]++; else fed[key] = 1;
    end
    if (fin_start) begin
      fin_seen++;
      chk(int'(fin_n) == n_batch, "finish names batch size");
    end
  end

  // R-tree model
  initial begin
    rt_valid = 0; rt_done = 0; rt_ptr = '0;
    forever begin
      @(posedge clk);
      if (rst_n && rt_start) begin
        bbox_t eb;
        eb.lo = coords[0]; eb.hi = coords[0];
        for (int i = 1; i < n_batch; i++) begin
          if ($signed(coords[i].x) < $signed(eb.lo.x)) eb.lo.x = coords[i].x;
          if ($signed(coords[i].y) < $signed(eb.lo.y)) eb.lo.y = coords[i].y;
          if ($signed(coords[i].z) < $signed(eb.lo.z)) eb.lo.z = coords[i].z;
          if ($signed(coords[i].x) > $signed(eb.hi.x)) eb.hi.x = coords[i].x;
          if ($signed(coords[i].y) > $signed(eb.hi.y)) eb.hi.y = coords[i].y;
          if ($signed(coords[i].z) > $signed(eb.hi.z)) eb.hi.z = coords[i].z;
        end
        @(negedge clk);
        chk(rt_qbox == eb, "search box encloses batch");
        foreach (ptrs[i]) begin
          repeat ($urandom_range(0, 3)) @(negedge clk);
          rt_valid = 1; rt_ptr = ptrs[i];
          do @(posedge clk); while (!rt_ready);
          @(negedge clk);
          rt_valid = 0;
        end
        repeat ($urandom_range(0, 3)) @(negedge clk);
        rt_done = 1;
        @(negedge clk);
        rt_done = 0;
      end
    end
  end

  initial begin
    q_valid = 0; q_last = 0; q_coord = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int b = 0; b < 40; b++) begin
      int k, t0;
      n_batch = (b % 3 == 0) ? BATCH : int'($urandom_range(1, BATCH));
      ptrs.delete(); fed.delete(); fin_seen = 0;
      k = int'($urandom_range(0, 6));
      for (int i = 0; i < k; i++) ptrs.push_back(ptr_t'($urandom_range(1, 8191)));
      for (int i = 0; i < n_batch; i++) begin
        coords[i].x = coord_t'($urandom); coords[i].y = coord_t'($urandom);
        coords[i].z = coord_t'($urandom);
      end
      for (int i = 0; i < n_batch; i++) begin
        @(negedge clk);
        q_valid = 1; q_coord = coords[i]; q_last = (i == n_batch - 1);
        do @(posedge clk); while (!q_ready);
      end
      @(negedge clk);
      q_valid = 0; q_last = 0;
      // wait until the unit is ready for the next batch
      t0 = 0;
      do begin @(posedge clk); t0++; end while (!q_ready && t0 < 5000);
      chk(t0 < 5000, "batch completes");
      chk(fin_seen == 1, "one finish request per batch");
      exp_fetched += k;
      chk(fed.num() <= k * n_batch, "feed count");
      foreach (ptrs[i]) for (int s = 0; s < n_batch; s++) begin
        int key;
        key = int'(ptrs[i]) * BATCH + s;
        chk(fed.exists(key), "gaussian reached slot");
      end
      begin
        int tot;
        tot = 0;
        foreach (fed[key]) tot += fed[key];
        chk(tot == k * n_batch, "each gaussian fed once per slot");
      end
      chk(batches == 32'(b + 1), "batch counter");
      chk(gaussians_fetched == 32'(exp_fetched), "fetch counter");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

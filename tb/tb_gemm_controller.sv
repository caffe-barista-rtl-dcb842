// tb_gemm_controller: checks the blocked-GEMM sequencing on its own.
//
// The testbench plays the burst engines and the mesh: it answers each read
// and write request after a random delay, reports the mesh idle a random time
// after the drain starts, and raises c_valid exactly (Q+1)*(ADD_LAT+1) cycles
// after reduce_start, as the PEs do. It checks the order and addresses of all
// tile reads (A tile, then B tile, for every inner tile of every output tile),
// the C write addresses, that each FEED reads Tp consecutive indices, the
// compute-cycle count of the paper's model, the number of tiles and `done`.
module tb_gemm_controller;
  import barista_pkg::*;
  localparam int unsigned TR = 2, TC = 3, TP = 4, Q = 2, ADD_LAT = 2;
  localparam int unsigned RED = (Q + 1) * (ADD_LAT + 1);

  logic clk = 0, rst_n = 0;
  logic start, busy, done;
  addr_t a_base, b_base, c_base;
  logic [CNT_W-1:0] n_rt, n_ct, n_pt;
  ctrl_state_e state;
  logic rd_start, rd_done, ld_to_a, a_ld_clear, b_ld_clear;
  addr_t rd_base, wr_base;
  len_t rd_len, wr_len;
  logic fd_valid;
  logic [$clog2(TP)-1:0] fd_k;
  logic reduce_start, arr_c_valid, arr_idle, c_capture, wr_start, wr_done;
  logic [31:0] cyc_total, cyc_compute, tiles_done;
  int checks = 0, failures = 0;

  gemm_controller #(.TR(TR), .TC(TC), .TP(TP), .Q(Q), .ADD_LAT(ADD_LAT)) dut (.*);

  always #5 clk = ~clk;

  // ---- responders (driven on the falling edge) ----
  int rd_wait = -1, wr_wait = -1, idle_wait = -1, red_wait = -1;
  addr_t rd_log [$], wr_log [$];
  len_t  len_log [$];
  int    fd_run = 0, feeds = 0, captures = 0;
  always @(negedge clk) begin
    rd_done = 0; wr_done = 0; arr_c_valid = 0;
    if (rd_wait > 0) rd_wait--; else if (rd_wait == 0) begin rd_done = 1; rd_wait = -1; end
    if (wr_wait > 0) wr_wait--; else if (wr_wait == 0) begin wr_done = 1; wr_wait = -1; end
    if (red_wait > 0) red_wait--; else if (red_wait == 0) begin arr_c_valid = 1; red_wait = -1; end
    if (state == ST_DRAIN) begin
      if (idle_wait < 0) idle_wait = int'($urandom_range(5, 0));
      else if (idle_wait > 0) idle_wait--;
      arr_idle = (idle_wait == 0);
    end else begin
      idle_wait = -1;
      arr_idle = 0;
    end
  end

  always @(posedge clk) if (rst_n) begin
    if (rd_start) begin
      rd_log.push_back(rd_base); len_log.push_back(rd_len);
      rd_wait <= int'($urandom_range(8, 1));
      checks++;
      if (ld_to_a != a_ld_clear || ld_to_a == b_ld_clear) begin failures++; $display("buffer clear/select mismatch"); end
    end
    if (wr_start) begin wr_log.push_back(wr_base); wr_wait <= int'($urandom_range(8, 1)); end
    if (reduce_start) red_wait <= int'(RED) - 1;
    if (c_capture) captures++;
    if (fd_valid) begin
      checks++;
      if (int'(fd_k) != fd_run) begin failures++; $display("feed index %0d expected %0d", fd_k, fd_run); end
      fd_run <= fd_run + 1;
    end else begin
      if (fd_run != 0) begin
        checks++; feeds++;
        if (fd_run != int'(TP)) begin failures++; $display("feed of %0d reads", fd_run); end
      end
      fd_run <= 0;
    end
  end

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int nrt, nct, npt, exp_cyc, idx;
    start = 0; a_base = 0; b_base = 0; c_base = 0; n_rt = 0; n_ct = 0; n_pt = 0;
    rd_done = 0; wr_done = 0; arr_c_valid = 0; arr_idle = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int job = 0; job < 2; job++) begin
      nrt = job ? 1 : 2; nct = job ? 1 : 3; npt = job ? 1 : 2;
      rd_log.delete(); wr_log.delete(); len_log.delete(); feeds = 0; captures = 0;
      @(negedge clk);
      a_base = 100; b_base = 1000; c_base = 5000;
      n_rt = CNT_W'(nrt); n_ct = CNT_W'(nct); n_pt = CNT_W'(npt);
      start = 1;
      @(negedge clk);
      start = 0;
      while (!done) @(negedge clk);
      // expected read order
      idx = 0;
      for (int rt = 0; rt < nrt; rt++)
        for (int ct = 0; ct < nct; ct++)
          for (int pt = 0; pt < npt; pt++) begin
            checks += 2;
            if (rd_log.size() < idx + 2) begin failures++; break; end
            if (rd_log[idx] != addr_t'(100 + (rt*npt + pt)*TR*TP) || len_log[idx] != len_t'(TR*TP)) begin
              failures++; $display("read %0d: A tile at %0d", idx, rd_log[idx]);
            end
            if (rd_log[idx+1] != addr_t'(1000 + (ct*npt + pt)*TP*TC) || len_log[idx+1] != len_t'(TP*TC)) begin
              failures++; $display("read %0d: B tile at %0d", idx + 1, rd_log[idx+1]);
            end
            idx += 2;
          end
      checks++;
      if (rd_log.size() != idx) begin failures++; $display("%0d reads, expected %0d", rd_log.size(), idx); end
      for (int n = 0; n < nrt * nct; n++) begin
        checks++;
        if (n >= wr_log.size() || wr_log[n] != addr_t'(5000 + n*TR*TC)) begin failures++; $display("write %0d wrong", n); end
      end
      exp_cyc = nrt * nct * (npt * (TP + TC + TR - 2) + (Q + 1) * (Q + 1));
      checks += 4;
      if (cyc_compute != 32'(exp_cyc)) begin failures++; $display("compute cycles %0d model %0d", cyc_compute, exp_cyc); end
      if (tiles_done != 32'(nrt * nct)) begin failures++; $display("tiles %0d", tiles_done); end
      if (feeds != nrt * nct * npt) begin failures++; $display("feeds %0d", feeds); end
      if (captures != nrt * nct) begin failures++; $display("captures %0d", captures); end
      @(negedge clk);
      checks++;
      if (busy) begin failures++; $display("still busy after done"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

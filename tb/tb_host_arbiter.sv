// tb_host_arbiter: three request sources (one per vFPGA) issue random host
// reads and writes of 1..4096 bytes. A host model serves the DMA interface:
// it returns read data in request order and collects write data, then
// acknowledges each write after a delay. Checks: requests are interleaved
// round-robin while several sources wait; read beats go to the issuing
// vFPGA with the request's destination stream and packet-end flag; write
// data are pulled from the right vFPGA with c2h_last on each packet's final
// beat; write completions reach the right vFPGA in order.
module tb_host_arbiter;
  import coyote_pkg::*;
  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic finish();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    finish();
  end

  localparam int NR = 3;
  logic [NR-1:0] req_valid, req_ready, rd_valid, wr_pull, wr_valid, wr_cpl_valid;
  dreq_t [NR-1:0] req;
  logic dma_valid, dma_ready, h2c_valid, h2c_ready, c2h_valid, c2h_ready, c2h_last, wr_done;
  dreq_t dma_req;
  logic [DATA_W-1:0] h2c_data, c2h_data, rd_data;
  logic [DEST_W-1:0] rd_dest, wr_dest, wr_cpl_dest;
  logic rd_pkt_end, rd_req_last, wr_cpl_req_last;
  logic [NR-1:0][DATA_W-1:0] wr_data;
  host_arbiter #(.N_REG(NR), .TAG_DEPTH(8)) dut (.*);

  function automatic logic [511:0] pat(input int v, input int n, input int w);
    return {16{32'(v * 7777 + n * 3 + w * 99991) * 32'h9e3779b1}};
  endfunction

  // sources
  int issued [NR], rd_exp_beats [NR][$], rd_exp_dest [NR][$], wr_exp [NR][$];
  int rd_got [NR], wr_pulled [NR], wr_cpl_got [NR];
  int n_req = 150;
  dreq_t nxt [NR];
  function automatic dreq_t mkreq(input int v);
    dreq_t r;
    r = '0; r.vfid = 4'(v); r.wr = 1'($urandom); r.dest = 4'($urandom % 4);
    r.len = 28'(1 + $urandom % 4096); r.last = 1'($urandom); r.strm = STRM_HOST;
    r.addr = 48'($urandom);
    return r;
  endfunction
  // the sources' write queues: a counter per vFPGA gives the data
  always_comb for (int v = 0; v < NR; v++) begin
    wr_valid[v] = 1'b1;
    wr_data[v]  = pat(v, wr_pulled[v], 1);
  end
  int last_gnt = -1, switches = 0, same_while_others = 0;
  always @(posedge clk) if (rst_n) begin
    for (int v = 0; v < NR; v++) begin
      if (req_valid[v] && req_ready[v]) begin
        if (last_gnt == v && (req_valid & ~(NR'(1) << v)) != 0) same_while_others++;
        if (last_gnt != v) switches++;
        last_gnt = v;
        if (req[v].wr) wr_exp[v].push_back(beats_of(req[v].len));
        else begin rd_exp_beats[v].push_back(beats_of(req[v].len)); rd_exp_dest[v].push_back(int'(req[v].dest)); end
        issued[v]++;
        nxt[v] = mkreq(v);
      end
      if (rd_valid[v]) begin
        checks++;
        if (rd_exp_beats[v].size() == 0 || int'(rd_dest) != rd_exp_dest[v][0]) begin failures++; $display("FAIL: read beat to %0d", v); end
        else begin
          rd_got[v]++;
          if (rd_pkt_end != (rd_got[v] == rd_exp_beats[v][0])) begin failures++; $display("FAIL: pkt_end"); end
          if (rd_pkt_end) begin void'(rd_exp_beats[v].pop_front()); void'(rd_exp_dest[v].pop_front()); rd_got[v] = 0; end
        end
      end
      if (wr_pull[v]) wr_pulled[v]++;
      if (wr_cpl_valid[v]) wr_cpl_got[v]++;
    end
  end
  always_comb for (int v = 0; v < NR; v++) begin
    req[v] = nxt[v];
    req_valid[v] = rst_n && issued[v] < n_req;
  end

  // host model
  dreq_t hq[$];       // accepted requests, reads served in order
  dreq_t wq[$];
  int hb = 0, wb = 0, wr_acks_due[$], cyc = 0;
  int c2h_errors = 0, writes_in_host = 0;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (dma_valid && dma_ready) begin
      if (dma_req.wr) wq.push_back(dma_req); else hq.push_back(dma_req);
    end
    if (h2c_valid && h2c_ready) begin
      hb++;
      if (hb == beats_of(hq[0].len)) begin void'(hq.pop_front()); hb = 0; end
    end
    if (c2h_valid && c2h_ready) begin
      automatic int v = int'(wq[0].vfid);
      if (c2h_data != pat(v, wr_pulled[v], 1)) c2h_errors++;
      wb++;
      if (c2h_last != (wb == beats_of(wq[0].len))) c2h_errors++;
      if (wb == beats_of(wq[0].len)) begin void'(wq.pop_front()); wb = 0; wr_acks_due.push_back(cyc + 5 + $urandom % 20); end
    end
  end
  always_comb begin
    h2c_valid = hq.size() != 0 && hv_rand;
    h2c_data  = '0;
    wr_done   = wr_acks_due.size() != 0 && wr_acks_due[0] <= cyc;
  end
  logic hv_rand;
  always @(negedge clk) begin
    hv_rand   = $urandom % 4 != 0;
    dma_ready = $urandom % 3 != 0;
    c2h_ready = $urandom % 4 != 0;
  end
  always @(posedge clk) if (rst_n && wr_done) void'(wr_acks_due.pop_front());

  initial begin
    for (int v = 0; v < NR; v++) begin nxt[v] = mkreq(v); issued[v] = 0; rd_got[v] = 0; wr_pulled[v] = 0; wr_cpl_got[v] = 0; end
    hv_rand = 0; dma_ready = 0; c2h_ready = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    wait (issued[0] == n_req && issued[1] == n_req && issued[2] == n_req);
    repeat (3000) @(posedge clk);
    for (int v = 0; v < NR; v++) begin
      check(rd_exp_beats[v].size() == 0, $sformatf("all reads of vFPGA %0d delivered", v));
      check(wr_cpl_got[v] == int'(wr_exp[v].size()), $sformatf("write completions of vFPGA %0d: %0d of %0d", v, wr_cpl_got[v], wr_exp[v].size()));
    end
    check(c2h_errors == 0, "write data and last flags");
    check(same_while_others == 0, "round-robin: no source granted twice while another waits");
    check(switches > 300, $sformatf("requests interleaved (%0d switches)", switches));
    finish();
  end
endmodule

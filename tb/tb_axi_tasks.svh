// Manager-side AXI4 tasks shared by the testbenches. The including module
// provides `clk`, `mreq` (axi_req_t, driven here) and `mresp` (axi_resp_t).
// Signals are driven 1 ns after a rising edge and sampled at the falling edge,
// so each handshake completes on the following rising edge. b_ready and
// r_ready are expected to be held high by the including module.

task automatic axi_aw(input id_t id, input addr_t addr, input len_t len,
                      input logic [3:0] cache, input logic lock, input logic [1:0] burst);
  mreq.aw       = '0;
  mreq.aw.id    = id;
  mreq.aw.addr  = addr;
  mreq.aw.len   = len;
  mreq.aw.size  = 3'd3;
  mreq.aw.burst = burst;
  mreq.aw.cache = cache;
  mreq.aw.lock  = lock;
  mreq.aw_valid = 1'b1;
  @(negedge clk);
  while (!mresp.aw_ready) @(negedge clk);
  @(posedge clk); #1;
  mreq.aw_valid = 1'b0;
endtask

task automatic axi_w(input len_t len, input data_t base, input int unsigned gap);
  for (int i = 0; i <= int'(len); i++) begin
    mreq.w.data = base + data_t'(i);
    mreq.w.strb = '1;
    mreq.w.last = (i == int'(len));
    mreq.w_valid = 1'b1;
    @(negedge clk);
    while (!mresp.w_ready) @(negedge clk);
    @(posedge clk); #1;
    mreq.w_valid = 1'b0;
    if (i < int'(len)) begin
      repeat (gap) @(posedge clk);
      #1;
    end
  end
endtask

task automatic axi_b(input id_t id, output logic [1:0] resp);
  @(negedge clk);
  while (!(mresp.b_valid && mresp.b.id == id)) @(negedge clk);
  resp = mresp.b.resp;
  @(posedge clk); #1;
endtask

task automatic axi_write(input id_t id, input addr_t addr, input len_t len,
                         input logic [3:0] cache, input data_t base, output logic [1:0] resp);
  axi_aw(id, addr, len, cache, 1'b0, BURST_INCR);
  axi_w(len, base, 0);
  axi_b(id, resp);
endtask

// Reads len+1 beats; checks data against base+i when check_data is set.
// Returns the number of beats carrying R.last too early or missing it at the
// end (lasterr), the number of data mismatches and the OR of the responses.
task automatic axi_read(input id_t id, input addr_t addr, input len_t len,
                        input logic [3:0] cache, input data_t base, input logic check_data,
                        output int lasterr, output int dataerr, output logic [1:0] resp);
  int beat;
  mreq.ar       = '0;
  mreq.ar.id    = id;
  mreq.ar.addr  = addr;
  mreq.ar.len   = len;
  mreq.ar.size  = 3'd3;
  mreq.ar.burst = BURST_INCR;
  mreq.ar.cache = cache;
  mreq.ar_valid = 1'b1;
  @(negedge clk);
  while (!mresp.ar_ready) @(negedge clk);
  @(posedge clk); #1;
  mreq.ar_valid = 1'b0;
  lasterr = 0;
  dataerr = 0;
  resp    = '0;
  beat    = 0;
  while (beat <= int'(len)) begin
    @(negedge clk);
    if (mresp.r_valid && mresp.r.id == id) begin
      if (mresp.r.last != (beat == int'(len))) lasterr++;
      if (check_data && mresp.r.data != base + data_t'(beat)) dataerr++;
      resp |= mresp.r.resp;
      beat++;
    end
  end
  @(posedge clk); #1;
endtask

// tb_bus_if: self-checking test of the SoC bus interface with the
// behavioural memory. Random 32-bit writes go to FP16, spike and Para words
// through the address map and must land in the right bank, word and lanes
// only; reads must return them one cycle later with bus_rvalid. Register
// accesses must reach the controller port, and SRAM accesses must be held
// off (bus_ready low, no request) while the controller is busy.
module tb_bus_if;
  import e2atst_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic bus_valid, bus_we, bus_ready, bus_rvalid;
  logic [19:0] bus_addr;
  logic [31:0] bus_wdata, bus_rdata;
  logic ctrl_busy, reg_we, reg_re;
  logic [4:0] reg_addr;
  logic [31:0] reg_wdata, reg_rdata;
  mem_req_t req;
  mem_rsp_t rsp;
  int checks = 0, failures = 0;
  int n_stall = 0;

  bus_if dut (.*);
  tb_mem_model #(.DEPTH(1024)) mem (.clk, .req, .rsp);

  // controller register file model
  logic [31:0] regs [32];
  always @(posedge clk) begin
    if (reg_we) regs[reg_addr] <= reg_wdata;
    if (reg_re) reg_rdata <= regs[reg_addr] ^ 32'hA5A5_0000;
  end

  initial begin
    #3000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic bus_write(logic [19:0] a, logic [31:0] d);
    @(negedge clk);
    bus_valid = 1; bus_we = 1; bus_addr = a; bus_wdata = d;
    #1;
    while (!bus_ready) begin @(negedge clk); #1; n_stall++; end
    @(negedge clk);
    bus_valid = 0; bus_we = 0;
  endtask

  task automatic bus_read(logic [19:0] a, output logic [31:0] d);
    @(negedge clk);
    bus_valid = 1; bus_we = 0; bus_addr = a;
    #1;
    while (!bus_ready) begin @(negedge clk); #1; n_stall++; end
    @(negedge clk);
    bus_valid = 0;
    checks++;
    if (!bus_rvalid) begin failures++; $display("FAIL rvalid"); end
    d = bus_rdata;
  endtask

  function automatic logic [19:0] amap(int region, int word, int chunk);
    return {4'(region), 1'b0, 10'(word), 5'(chunk)};
  endfunction

  initial begin
    logic [31:0] d, e;
    bus_valid = 0; bus_we = 0; bus_addr = 0; bus_wdata = 0; ctrl_busy = 0;
    for (int b = 0; b < NFP; b++) for (int a = 0; a < 1024; a++) mem.fp[b][a] = '0;
    for (int b = 0; b < NSPK; b++) for (int a = 0; a < 1024; a++) mem.spk[b][a] = '0;
    for (int a = 0; a < 64; a++) mem.par[a] = '0;
    for (int a = 0; a < 32; a++) regs[a] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 300; it++) begin
      int region, word, chunk;
      logic [31:0] v;
      region = $urandom_range(0, 7);
      word   = $urandom_range(0, (region == 7) ? 63 : 1023);
      chunk  = $urandom_range(0, (region == 5 || region == 6) ? 1 : 31);
      if (region == 0) begin word = 0; chunk = $urandom_range(0, 31); end
      v = $urandom;
      bus_write(amap(region, word, chunk), v);
      @(negedge clk);
      checks++;
      case (region)
        0: e = regs[chunk];
        1, 2, 3, 4: e = {mem.fp[region-1][word][2*chunk+1], mem.fp[region-1][word][2*chunk]};
        5, 6: e = mem.spk[region-5][word][32*chunk +: 32];
        default: e = {mem.par[word][2*chunk+1], mem.par[word][2*chunk]};
      endcase
      if (e !== v) begin failures++; $display("FAIL write region %0d word %0d chunk %0d: %h vs %h", region, word, chunk, e, v); end
      // neighbouring lanes untouched
      if (region >= 1 && region <= 4 && chunk < 31) begin
        checks++;
        if (mem.fp[region-1][word][2*chunk+2] !== 16'h0) begin failures++; $display("FAIL lane mask"); end
        mem.fp[region-1][word][2*chunk+1] = 0; mem.fp[region-1][word][2*chunk] = 0;
        mem.fp[region-1][word][2*chunk+1] = v[31:16]; mem.fp[region-1][word][2*chunk] = v[15:0];
      end
      bus_read(amap(region, word, chunk), d);
      checks++;
      if (region == 0) v = v ^ 32'hA5A5_0000;
      if (d !== v) begin failures++; $display("FAIL read region %0d: %h vs %h", region, d, v); end
      if (region >= 1 && region <= 4) mem.fp[region-1][word] = '0;
    end
    // busy controller: SRAM access stalls, registers still reachable
    ctrl_busy = 1;
    @(negedge clk);
    bus_valid = 1; bus_we = 1; bus_addr = amap(1, 5, 0); bus_wdata = 32'hDEAD_BEEF;
    repeat (4) begin
      #1;
      checks++;
      if (bus_ready || req.fw[0].en) begin failures++; $display("FAIL access while busy"); end
      @(negedge clk);
    end
    bus_valid = 0;
    fork
      bus_write(amap(0, 0, 3), 32'h55);
    join
    checks++;
    if (regs[3] !== 32'h55) begin failures++; $display("FAIL reg write while busy"); end
    fork
      bus_write(amap(2, 7, 1), 32'h1234_5678);
      begin repeat (5) @(negedge clk); ctrl_busy = 0; end
    join
    @(negedge clk);
    checks++;
    if (mem.fp[1][7][3:2] !== 32'h1234_5678 || mem.fp[0][5][0] !== 16'h0) begin failures++; $display("FAIL stalled write %h %h", mem.fp[1][7][3:2], mem.fp[0][5][0]); end
    checks++;
    if (n_stall == 0) begin failures++; $display("FAIL no stall seen"); end
    $display("stall cycles=%0d", n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

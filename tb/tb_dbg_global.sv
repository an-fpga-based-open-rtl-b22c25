// tb_dbg_global: self-checking test of the global debug unit.
// The testbench sends request messages byte by byte (random gaps), takes the
// response bytes with random back-pressure, and plays a Wishbone slave (a
// small memory; err above 0x1000; no answer at all at 0x2000) and both local
// debug units (they echo back a value computed from the request fields).
// Checks: read and write message lengths (6/10 bytes in, 5/1 bytes out), the
// response COMMAND byte (A=bit 1, E=bit 0), byte order of DATA; memory-mapped
// writes and reads in both halves of the 64-bit word with SEL placed by
// ADDRESS[2], CTI and BTE passed through from COMMAND; local tokens routed to
// the right link with token, address and data intact; error responses for
// INVALID, an unknown token code, CPU_ID != 0, a bus error and a bus timeout.
`timescale 1ns/1ps
module tb_dbg_global;
  import soc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #10 clk = ~clk;

  logic rx_valid = 0, tx_valid, tx_ready = 0;
  logic [7:0] rx_data = 0, tx_data;
  wb_m2s_t wbm;
  wb_s2m_t wbs = WB_S2M_IDLE;
  dbg_req_t creq, dreq;
  dbg_rsp_t crsp = '0, drsp = '0;
  int checks = 0, failures = 0;
  int ncpu = 0, ndfs = 0;
  logic [63:0] mem [512];
  logic [2:0] last_cti; logic [1:0] last_bte; logic [7:0] last_sel;

  dbg_global #(.TIMEOUT(64)) dut (.clk, .rst_n, .rx_valid, .rx_data, .tx_valid, .tx_data, .tx_ready,
                                  .wbm_o(wbm), .wbm_i(wbs), .cpu_req_o(creq), .cpu_rsp_i(crsp),
                                  .dfs_req_o(dreq), .dfs_rsp_i(drsp));

  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // Wishbone slave model
  always @(posedge clk) begin
    wbs.ack <= 0; wbs.err <= 0;
    if (wbm.cyc && wbm.stb && !wbs.ack && !wbs.err) begin
      last_cti <= wbm.cti; last_bte <= wbm.bte; last_sel <= wbm.sel;
      if (wbm.adr < 32'h1000) begin
        wbs.ack <= 1;
        wbs.dat <= mem[wbm.adr[11:3]];
        if (wbm.we) for (int b = 0; b < 8; b++)
          if (wbm.sel[b]) mem[wbm.adr[11:3]][8*b +: 8] <= wbm.dat[8*b +: 8];
      end else if (wbm.adr < 32'h2000) wbs.err <= 1;
    end
  end

  // local unit models: four-phase, answer data = f(token, addr, data)
  always @(posedge clk) begin
    if (creq.req && !crsp.ack) begin
      crsp <= '{ack: 1, err: 0, data: {26'(creq.addr ^ creq.data), creq.token}};
      ncpu++;
    end else if (!creq.req) crsp.ack <= 0;
    if (dreq.req && !drsp.ack) begin
      drsp <= '{ack: 1, err: 0, data: {26'(dreq.addr ^ dreq.data), dreq.token} ^ 32'hFFFF_0000};
      ndfs++;
    end else if (!dreq.req) drsp.ack <= 0;
  end

  task automatic send_byte(logic [7:0] b);
    repeat ($urandom_range(3)) @(negedge clk);
    @(negedge clk);
    rx_valid = 1; rx_data = b;
    @(negedge clk);
    rx_valid = 0;
  endtask

  task automatic get_byte(output logic [7:0] b);
    forever begin
      @(negedge clk);
      tx_ready = ($urandom_range(2) != 0);
      @(posedge clk);
      if (tx_ready && tx_valid) begin b = tx_data; break; end
    end
    @(negedge clk) tx_ready = 0;
  endtask

  // one request / response exchange
  task automatic xact(input logic [15:0] cmd, input logic [31:0] a, d, input bit wr,
                      output logic [7:0] rcmd, output logic [31:0] rdata);
    logic [7:0] b;
    send_byte(cmd[7:0]); send_byte(cmd[15:8]);
    for (int i = 0; i < 4; i++) send_byte(a[8*i +: 8]);
    if (wr) for (int i = 0; i < 4; i++) send_byte(d[8*i +: 8]);
    get_byte(rcmd);
    rdata = 0;
    if (!wr) for (int i = 0; i < 4; i++) begin get_byte(b); rdata[8*i +: 8] = b; end
    // no further byte may follow
    repeat (8) begin @(posedge clk); check(!tx_valid, "response length"); end
  endtask

  function automatic logic [15:0] mmap_cmd(bit w, logic [3:0] sel, logic [2:0] cti, logic [1:0] bte);
    return {bte, w, cti, sel, w ? TK_MMAP_WRITE : TK_MMAP_READ};
  endfunction
  function automatic logic [15:0] local_cmd(logic [4:0] id, logic [5:0] tok);
    return {5'b0, id, tok};
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] rc;
    logic [31:0] rd;
    for (int i = 0; i < 512; i++) mem[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // memory-mapped writes/reads, both halves
    for (int n = 0; n < 10; n++) begin
      automatic logic [31:0] a = {$urandom_range(500), 3'b0} | (n[0] ? 32'h4 : 32'h0);
      automatic logic [31:0] d = $urandom;
      automatic logic [2:0] cti = (n % 3 == 0) ? CTI_EOB : CTI_CLASSIC;
      automatic logic [1:0] bte = 2'(n);
      xact(mmap_cmd(1, 4'hF, cti, bte), a, d, 1, rc, rd);
      check(rc == 8'h02, $sformatf("write ack byte %02x", rc));
      check(last_sel == (a[2] ? 8'hF0 : 8'h0F), "SEL placed by ADDRESS[2]");
      check(last_cti == cti && last_bte == bte, "CTI/BTE forwarded");
      xact(mmap_cmd(0, 4'hF, CTI_CLASSIC, 0), a, 0, 0, rc, rd);
      check(rc == 8'h02 && rd == d, $sformatf("mmap read %08x expected %08x", rd, d));
    end
    // partial write: only byte 1
    xact(mmap_cmd(1, 4'hF, 0, 0), 32'h100, 32'h11223344, 1, rc, rd);
    xact(mmap_cmd(1, 4'b0010, 0, 0), 32'h100, 32'hAABBCCDD, 1, rc, rd);
    xact(mmap_cmd(0, 4'hF, 0, 0), 32'h100, 0, 0, rc, rd);
    check(rd == 32'h1122CC44, $sformatf("byte-select write %08x", rd));
    // bus error and timeout
    xact(mmap_cmd(0, 4'hF, 0, 0), 32'h1008, 0, 0, rc, rd);
    check(rc == 8'h01, "bus error gives E");
    xact(mmap_cmd(1, 4'hF, 0, 0), 32'h2000, 5, 1, rc, rd);
    check(rc == 8'h01, "bus timeout gives E");
    // local tokens
    for (int t = TK_GPR_INT32_READ; t <= TK_RND_FREQ_DFS; t++) begin
      automatic logic [31:0] a = $urandom, d = $urandom;
      automatic bit wr = token_is_write(6'(t));
      automatic bit dfs = (t >= TK_SET_FREQ_DFS);
      automatic int c0 = ncpu, d0 = ndfs;
      automatic logic [31:0] expv = {26'(a ^ (wr ? d : 32'h0)), 6'(t)} ^ (dfs ? 32'hFFFF_0000 : 32'h0);
      xact(local_cmd(0, 6'(t)), a, d, wr, rc, rd);
      check(rc == 8'h02, $sformatf("token %0d acked", t));
      check(dfs ? (ndfs == d0 + 1 && ncpu == c0) : (ncpu == c0 + 1 && ndfs == d0),
            $sformatf("token %0d routed", t));
      if (!wr) check(rd == expv, $sformatf("token %0d data %08x expected %08x", t, rd, expv));
    end
    // invalid requests
    xact(local_cmd(0, TK_INVALID), 0, 0, 0, rc, rd);   check(rc == 8'h01, "INVALID gives E");
    xact(local_cmd(0, 6'd50), 0, 0, 0, rc, rd);        check(rc == 8'h01, "unknown token gives E");
    xact(local_cmd(3, TK_GET_CPU_PC), 0, 0, 0, rc, rd); check(rc == 8'h01, "unknown CPU_ID gives E");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

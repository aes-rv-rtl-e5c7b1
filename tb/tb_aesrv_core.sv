// Testbench for aesrv_core with an instruction memory and a data memory.
// The program (aesrv_prog_pkg) is loaded through the memories' host ports;
// for every mode and key size a job runs in alternating data-memory halves
// and the results, chaining value, checksum, subroutine result and
// byte/half accesses are compared with the reference model. Counts the
// pipeline events the job must cause: load-use stalls, taken branches/jumps,
// and pipeline holds for buffer loads, buffer stores and AES runs.
module tb_aesrv_core;
  import aes_ref_pkg::*;
  import aesrv_prog_pkg::*;

  localparam int BASE = 16;
  localparam int NBLK = 4;

  logic clk = 1'b0, rst_n = 1'b0, clear = 1'b0, run = 1'b0, bank = 1'b0;
  logic im_re, im_we = 1'b0, a_en, halt;
  logic [11:0] im_addr, im_waddr = '0;
  logic [31:0] im_rdata, im_wdata = '0;
  logic [3:0] a_we;
  logic [12:0] a_addr;
  logic [31:0] a_wdata, a_rdata;
  logic b_en = 1'b0;
  logic [3:0] b_we = '0;
  logic [12:0] b_addr = '0;
  logic [31:0] b_wdata = '0, b_rdata;
  int checks = 0, failures = 0;
  int n_stall = 0, n_redirect = 0, n_hold_load = 0, n_hold_store = 0, n_hold_aes = 0;

  always #5 clk = ~clk;

  aesrv_core dut (.clk, .rst_n, .clear, .run, .bank,
    .im_re, .im_addr, .im_rdata,
    .dm_en(a_en), .dm_we(a_we), .dm_addr(a_addr), .dm_wdata(a_wdata), .dm_rdata(a_rdata), .halt);
  instr_mem u_im (.clk, .we(im_we), .waddr(im_waddr), .wdata(im_wdata), .re(im_re), .raddr(im_addr), .rdata(im_rdata));
  data_mem u_dm (.clk, .a_en, .a_we, .a_addr, .a_wdata, .a_rdata, .b_en, .b_we, .b_addr, .b_wdata, .b_rdata);

  always_ff @(posedge clk) if (run) begin
    if (dut.stall_lu && !dut.hold) n_stall <= n_stall + 1;
    if (dut.redirect) n_redirect <= n_redirect + 1;
    if (dut.hold && dut.ex_q.spec.buf_load)  n_hold_load  <= n_hold_load + 1;
    if (dut.hold && dut.ex_q.spec.buf_store) n_hold_store <= n_hold_store + 1;
    if (dut.hold && dut.ex_q.spec.aes_go)    n_hold_aes   <= n_hold_aes + 1;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic dm_write(int a, logic [31:0] d);
    @(negedge clk) begin b_en = 1'b1; b_we = 4'hf; b_addr = 13'(a); b_wdata = d; end
    @(negedge clk) begin b_en = 1'b0; b_we = '0; end
  endtask
  task automatic dm_read(int a, output logic [31:0] d);
    @(negedge clk) begin b_en = 1'b1; b_we = '0; b_addr = 13'(a); end
    @(negedge clk) b_en = 1'b0;
    d = b_rdata;
  endtask
  function automatic blk_t w4(logic [31:0] w [$], int i);
    return {w[i], w[i+1], w[i+2], w[i+3]};
  endfunction

  task automatic job(int ks, int mode, logic half);
    word_q_t prog;
    logic [31:0] init [$];
    logic [31:0] d, sum;
    logic [255:0] key;
    blk_t v, c;
    int off, cyc, chk;
    prog = build(ks, mode, NBLK, BASE);
    for (int i = 0; i < prog.size(); i++) begin
      @(negedge clk) begin im_we = 1'b1; im_waddr = 12'(i); im_wdata = prog[i]; end
    end
    @(negedge clk) im_we = 1'b0;
    off = half ? 4096 : 0;
    init = {};
    for (int i = 0; i < 12 + 4*NBLK; i++) init.push_back($urandom);
    for (int i = 0; i < init.size(); i++) dm_write(off + BASE + i, init[i]);
    // start: one clear cycle, then run until halt
    @(negedge clk) begin clear = 1'b1; bank = half; end
    @(negedge clk) begin clear = 1'b0; run = 1'b1; end
    cyc = 0;
    while (!halt) begin @(negedge clk); cyc++; end
    @(negedge clk) run = 1'b0;
    $display("job ks=%0d mode=%0d half=%0d: %0d cycles", ks, mode, half, cyc);
    // expected values
    for (int i = 0; i < 8; i++) key[255-32*i -: 32] = init[i];
    v = w4(init, 8);
    sum = '0;
    for (int b = 0; b < NBLK; b++) begin
      c = mode_step(mode, key, ks, v, w4(init, 12 + 4*b));
      for (int k = 0; k < 4; k++) begin
        dm_read(off + BASE + 12 + 4*b + k, d);
        checks++;
        if (d !== c[127-32*k -: 32]) begin failures++; $display("FAIL ks %0d mode %0d block %0d word %0d", ks, mode, b, k); end
        sum += c[127-32*k -: 32];
      end
    end
    for (int k = 0; k < 4; k++) begin
      dm_read(off + BASE + 8 + k, d);
      checks++;
      if (d !== v[127-32*k -: 32]) begin failures++; $display("FAIL chaining value word %0d", k); end
    end
    chk = off + BASE + 12 + 4*NBLK;
    dm_read(chk, d);     checks++; if (d !== sum) begin failures++; $display("FAIL checksum"); end
    dm_read(chk + 1, d); checks++; if (d !== 32'd77) begin failures++; $display("FAIL jal/jalr"); end
    dm_read(chk + 2, d); checks++; if (d !== {16'h0, sum[7:0], 8'h0}) begin failures++; $display("FAIL sb"); end
    dm_read(chk + 3, d); checks++; if (d !== {16'h0, sum[7:0], 8'h0}) begin failures++; $display("FAIL lhu"); end
    // the other half must be untouched by the core
    dm_read((half ? 0 : 4096) + BASE + 12, d);
    checks++;
    if (d !== 32'hdead_beef) begin failures++; $display("FAIL other half modified"); end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    dm_write(BASE + 12, 32'hdead_beef);
    dm_write(4096 + BASE + 12, 32'hdead_beef);
    for (int m = 0; m < 4; m++)
      for (int k = 0; k < 3; k++) begin
        job(k, m, 1'b1);
        dm_write(4096 + BASE + 12, 32'hdead_beef);
        job(k, m, 1'b0);
        dm_write(BASE + 12, 32'hdead_beef);
      end
    checks += 5;
    if (n_stall == 0)      begin failures++; $display("FAIL no load-use stall seen"); end
    if (n_redirect == 0)   begin failures++; $display("FAIL no taken branch seen"); end
    if (n_hold_load == 0)  begin failures++; $display("FAIL no buffer load seen"); end
    if (n_hold_store == 0) begin failures++; $display("FAIL no buffer store seen"); end
    if (n_hold_aes == 0)   begin failures++; $display("FAIL no AES run seen"); end
    $display("events: load-use stalls %0d, redirects %0d, hold cycles load/store/aes %0d/%0d/%0d",
             n_stall, n_redirect, n_hold_load, n_hold_store, n_hold_aes);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

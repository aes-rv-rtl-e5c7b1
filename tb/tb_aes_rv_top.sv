// End-to-end testbench for aes_rv_top at its default sizes, driven like the
// host would over AXI4-Lite.
//
// The instruction memory is written once with a dispatcher at address 0 and
// one routine per mode and key size (twelve, built by aesrv_prog_pkg); the
// dispatcher jumps to the routine whose address the host left in data word 2
// of the half being processed. Jobs then run in the ping-pong schedule: the
// host starts job j on half j%2, and while the core runs it reads the results
// of job j-1 and writes the input of job j+1 into the other half. Every
// result, chaining value and checksum is compared with the reference model.
// Mechanisms that must occur, counted: host accesses overlapping a run
// (ping-pong), each mode and key size, buffer loads/stores, AES runs,
// load-use stalls and taken branches.
module tb_aes_rv_top;
  import aes_ref_pkg::*;
  import aesrv_prog_pkg::*;
  import rv_asm_pkg::*;

  localparam int BASE = 16;
  localparam int NBLK = 4;
  localparam int NJOBS = 26;
  localparam int RT0 = 32;           // first routine, word address
  localparam int RTS = 32;           // routine stride in words

  logic clk = 1'b0, rst_n = 1'b0;
  logic [17:0] s_axi_awaddr = '0, s_axi_araddr = '0;
  logic s_axi_awvalid = 1'b0, s_axi_wvalid = 1'b0, s_axi_bready = 1'b0;
  logic s_axi_arvalid = 1'b0, s_axi_rready = 1'b0;
  logic [31:0] s_axi_wdata = '0;
  logic [3:0] s_axi_wstrb = '0;
  logic s_axi_awready, s_axi_wready, s_axi_bvalid, s_axi_arready, s_axi_rvalid;
  logic [1:0] s_axi_bresp, s_axi_rresp;
  logic [31:0] s_axi_rdata;
  logic done;
  int checks = 0, failures = 0;

  // mechanism counters
  int n_overlap = 0, n_stall = 0, n_redirect = 0, n_load = 0, n_store = 0, n_aes = 0;
  int n_mode [4];
  int n_ks [3];

  always #5 clk = ~clk;

  aes_rv_top dut (.clk, .rst_n,
    .s_axi_awaddr, .s_axi_awvalid, .s_axi_awready, .s_axi_wdata, .s_axi_wstrb, .s_axi_wvalid,
    .s_axi_wready, .s_axi_bresp, .s_axi_bvalid, .s_axi_bready, .s_axi_araddr, .s_axi_arvalid,
    .s_axi_arready, .s_axi_rdata, .s_axi_rresp, .s_axi_rvalid, .s_axi_rready, .done);

  `include "axi_lite_host.svh"

  always_ff @(posedge clk) begin
    if (dut.run && dut.b_en) n_overlap <= n_overlap + 1;
    if (dut.run && dut.u_core.stall_lu && !dut.u_core.hold) n_stall <= n_stall + 1;
    if (dut.run && dut.u_core.redirect) n_redirect <= n_redirect + 1;
    if (dut.u_core.bau_go_load)  n_load  <= n_load + 1;
    if (dut.u_core.bau_go_store) n_store <= n_store + 1;
    if (dut.u_core.sau_start)    n_aes   <= n_aes + 1;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // per-job input, kept for checking
  logic [31:0] init [NJOBS][12 + 4*NBLK];
  int job_ks [NJOBS], job_mode [NJOBS];

  task automatic wr(int word, logic [31:0] d);
    logic [1:0] resp;
    axi_write(18'(word * 4), d, 4'hf, resp);
    checks++;
    if (resp != 2'b00) begin failures++; $display("FAIL write response at %h", word * 4); end
  endtask

  task automatic rd(int word, output logic [31:0] d);
    logic [1:0] resp;
    axi_read(18'(word * 4), d, resp);
    if (resp != 2'b00) begin failures++; $display("FAIL read response"); end
  endtask

  task automatic put_job(int j);
    int off = (j % 2) ? 32'h10000/4 + 4096 : 32'h10000/4;
    job_mode[j] = (j / 3) % 4;
    job_ks[j] = j % 3;
    wr(off + 2, 32'((RT0 + RTS * (job_mode[j] * 3 + job_ks[j])) * 4));
    for (int i = 0; i < 12 + 4*NBLK; i++) begin
      init[j][i] = $urandom;
      wr(off + BASE + i, init[j][i]);
    end
  endtask

  task automatic check_job(int j);
    int off = (j % 2) ? 32'h10000/4 + 4096 : 32'h10000/4;
    logic [255:0] key;
    blk_t v, c, p;
    logic [31:0] d, sum;
    for (int i = 0; i < 8; i++) key[255-32*i -: 32] = init[j][i];
    v = {init[j][8], init[j][9], init[j][10], init[j][11]};
    sum = '0;
    for (int b = 0; b < NBLK; b++) begin
      p = {init[j][12+4*b], init[j][13+4*b], init[j][14+4*b], init[j][15+4*b]};
      c = mode_step(job_mode[j], key, job_ks[j], v, p);
      for (int k = 0; k < 4; k++) begin
        rd(off + BASE + 12 + 4*b + k, d);
        checks++;
        if (d !== c[127-32*k -: 32]) begin failures++; $display("FAIL job %0d block %0d word %0d", j, b, k); end
        sum += c[127-32*k -: 32];
      end
    end
    for (int k = 0; k < 4; k++) begin
      rd(off + BASE + 8 + k, d);
      checks++;
      if (d !== v[127-32*k -: 32]) begin failures++; $display("FAIL job %0d chaining value", j); end
    end
    rd(off + BASE + 12 + 4*NBLK, d);
    checks++;
    if (d !== sum) begin failures++; $display("FAIL job %0d checksum", j); end
    n_mode[job_mode[j]]++;
    n_ks[job_ks[j]]++;
  endtask

  task automatic start_job(int j);
    logic [1:0] resp;
    axi_write(18'h20000, {30'b0, 1'(j % 2), 1'b1}, 4'hf, resp);
  endtask

  task automatic wait_done(output int polls);
    logic [31:0] st;
    logic [1:0] resp;
    polls = 0;
    do begin axi_read(18'h20004, st, resp); polls++; end while (!st[0]);
  endtask

  initial begin
    word_q_t prog;
    int polls, t0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // instruction memory: dispatcher + twelve routines
    wr(0, lw(6, 0, 8));
    wr(1, jalr(0, 6, 0));
    for (int m = 0; m < 4; m++)
      for (int k = 0; k < 3; k++) begin
        prog = build(k, m, NBLK, BASE);
        for (int i = 0; i < prog.size(); i++) wr(RT0 + RTS * (m*3 + k) + i, prog[i]);
      end
    // ping-pong schedule
    put_job(0);
    for (int j = 0; j < NJOBS; j++) begin
      start_job(j);
      t0 = $time;
      if (j > 0) check_job(j - 1);          // READ the other half
      if (j + 1 < NJOBS) put_job(j + 1);    // WRITE the other half
      wait_done(polls);
      if (j < 12) $display("job %0d (mode %0d, key %0d): done after %0d ns, %0d status polls",
                           j, job_mode[j], 128 + 64*job_ks[j], $time - t0, polls);
    end
    check_job(NJOBS - 1);
    checks += 8;
    if (n_overlap == 0)  begin failures++; $display("FAIL no host access overlapped a run"); end
    if (n_stall == 0)    begin failures++; $display("FAIL no load-use stall"); end
    if (n_redirect == 0) begin failures++; $display("FAIL no taken branch"); end
    if (n_load == 0 || n_store == 0 || n_aes == 0) begin failures++; $display("FAIL custom instructions missing"); end
    for (int m = 0; m < 4; m++) if (n_mode[m] == 0) begin failures++; $display("FAIL mode %0d never ran", m); end
    for (int k = 0; k < 3; k++) if (n_ks[k] == 0) failures++;
    $display("events: overlapped host accesses %0d, load-use stalls %0d, redirects %0d, buffer loads %0d, stores %0d, AES runs %0d",
             n_overlap, n_stall, n_redirect, n_load, n_store, n_aes);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

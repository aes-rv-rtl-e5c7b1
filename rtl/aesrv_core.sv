// aesrv_core: the AES-RV processor core, a five-stage RISC-V pipeline
// (IF, ID, EX, MEM, WB) extended with the high-bandwidth buffer set, the
// buffer access unit and the specialized AES unit (SAU).
//
// Base pipeline (RV32I, see basic_controller):
//   IF   PC register; the instruction memory read is registered, so the word
//        for the PC fetched in IF is the ID stage's instruction.
//   ID   basic and spec. controllers decode; register file read (write-
//        through from WB). A load in EX whose rd is a source here stalls ID
//        one cycle (load-use).
//   EX   ALU; operands forwarded from MEM (ALU/link result) and WB (any
//        result, load data included). Branches and jumps resolve here: a
//        taken one squashes the two younger instructions (IF and ID).
//        Custom instructions act here (see below).
//   MEM  data memory access on port A (byte/half/word, byte enables).
//   WB   load alignment and register write; ECALL/EBREAK here raises 'halt'.
//
// Custom instructions in EX:
//   buffer latch   (0101011/000) latches rs1 (base address) and rs2 (amount)
//                   into the buffer access unit; single cycle.
//   buffer load/store (0101011/001, 010) and AES (0001011, 1001011,
//                   1101011) start the buffer access unit or the SAU and
//                   hold IF, ID and EX until that unit is idle again; MEM and
//                   WB drain meanwhile and receive bubbles, which frees data
//                   memory port A for the buffer transfer. The AES
//                   instruction takes the block count from rs1.
// The core writes nothing to rd for custom instructions.
//
// Ping-pong: 'bank' (latched by the state controller at start) is XORed into
// the top data-memory address bit of every core access, so one program
// processes the first half with bank=0 and the last half with bank=1.
//
// Once ECALL/EBREAK leaves ID, no further instructions are fetched, so
// nothing after it executes. 'clear' restarts the core at PC 0 with an empty
// pipeline; 'run'=0 freezes it. The five stages, the controllers, the
// buffers and the SAU are the paper's; hazard handling, the hold protocol,
// the halt convention and the ping-pong address mapping are this design's.
module aesrv_core
  import aesrv_pkg::*;
#(
  parameter int unsigned IM_AW   = 12,
  parameter int unsigned DM_AW   = 13,
  parameter int unsigned NUM_BUF = 256,
  localparam int unsigned IW = $clog2(NUM_BUF)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             run,
  input  logic             bank,
  // instruction memory read port
  output logic             im_re,
  output logic [IM_AW-1:0] im_addr,
  input  logic [31:0]      im_rdata,
  // data memory port A
  output logic             dm_en,
  output logic [3:0]       dm_we,
  output logic [DM_AW-1:0] dm_addr,
  output logic [31:0]      dm_wdata,
  input  logic [31:0]      dm_rdata,
  output logic             halt
);

  // ---------------------------------------------------------------
  // pipeline registers
  // ---------------------------------------------------------------
  logic [31:0] pc_q;
  logic        halted_q;

  logic        id_valid_q;
  logic [31:0] id_pc_q;

  typedef struct packed {
    logic        valid;
    logic [31:0] pc;
    basic_ctrl_t ctrl;
    spec_ctrl_t  spec;
    logic        is_spec;
    logic [4:0]  rs1, rs2, rd;
    logic [31:0] rs1_val, rs2_val;
  } ex_t;
  ex_t  ex_q;
  logic ex_started_q;

  typedef struct packed {
    logic        valid;
    logic        reg_write;
    logic        mem_read;
    logic        mem_write;
    logic [2:0]  funct3;
    logic [4:0]  rd;
    logic [31:0] result;     // ALU result or link address
    logic [31:0] addr;       // byte address for loads/stores
    logic [31:0] store_data;
    logic        halt;
  } mem_t;
  mem_t mem_q, wb_q;

  // ---------------------------------------------------------------
  // ID stage
  // ---------------------------------------------------------------
  logic [31:0] id_instr;
  basic_ctrl_t id_ctrl;
  spec_ctrl_t  id_spec;
  logic        id_is_spec;
  logic [4:0]  id_rs1, id_rs2, id_rd;
  logic [31:0] id_rs1_val, id_rs2_val;
  logic        id_use_rs1, id_use_rs2;

  assign id_instr = im_rdata;
  assign id_rs1   = id_instr[19:15];
  assign id_rs2   = id_instr[24:20];
  assign id_rd    = id_instr[11:7];

  basic_controller u_basic (.instr(id_instr), .ctrl(id_ctrl));
  spec_controller  u_spec  (.instr(id_instr), .spec(id_spec), .is_spec(id_is_spec));

  assign id_use_rs1 = id_ctrl.use_rs1 | id_is_spec;
  assign id_use_rs2 = id_ctrl.use_rs2 | id_is_spec;

  logic        wb_we;
  logic [31:0] wb_value;

  regfile u_rf (
    .clk, .rst_n,
    .rs1_addr(id_rs1), .rs2_addr(id_rs2),
    .rs1_data(id_rs1_val), .rs2_data(id_rs2_val),
    .we(wb_we), .rd_addr(wb_q.rd), .rd_data(wb_value)
  );

  // ---------------------------------------------------------------
  // EX stage: forwarding, ALU, branches, custom instructions
  // ---------------------------------------------------------------
  logic [31:0] ex_a, ex_b;          // forwarded register values
  logic [31:0] alu_a, alu_b, alu_y;
  logic        br_taken, redirect;
  logic [31:0] target;

  function automatic logic fwd_hit(logic valid, logic we, logic [4:0] rd, logic [4:0] rs);
    return valid && we && rd != 5'd0 && rd == rs;
  endfunction

  always_comb begin
    ex_a = ex_q.rs1_val;
    ex_b = ex_q.rs2_val;
    if (fwd_hit(wb_q.valid, wb_q.reg_write, wb_q.rd, ex_q.rs1)) ex_a = wb_value;
    if (fwd_hit(wb_q.valid, wb_q.reg_write, wb_q.rd, ex_q.rs2)) ex_b = wb_value;
    if (fwd_hit(mem_q.valid, mem_q.reg_write && !mem_q.mem_read, mem_q.rd, ex_q.rs1)) ex_a = mem_q.result;
    if (fwd_hit(mem_q.valid, mem_q.reg_write && !mem_q.mem_read, mem_q.rd, ex_q.rs2)) ex_b = mem_q.result;
  end

  assign alu_a = ex_q.ctrl.a_is_pc  ? ex_q.pc       : ex_a;
  assign alu_b = ex_q.ctrl.b_is_imm ? ex_q.ctrl.imm : ex_b;

  alu u_alu (.op(ex_q.ctrl.alu_op), .a(alu_a), .b(alu_b), .y(alu_y));

  always_comb begin
    case (ex_q.ctrl.mem_funct3)
      3'b000:  br_taken = (ex_a == ex_b);
      3'b001:  br_taken = (ex_a != ex_b);
      3'b100:  br_taken = ($signed(ex_a) <  $signed(ex_b));
      3'b101:  br_taken = ($signed(ex_a) >= $signed(ex_b));
      3'b110:  br_taken = (ex_a <  ex_b);
      default: br_taken = (ex_a >= ex_b);
    endcase
    target = ex_q.ctrl.jalr ? ((ex_a + ex_q.ctrl.imm) & ~32'd1) : (ex_q.pc + ex_q.ctrl.imm);
  end

  // custom units
  logic ex_long, unit_busy, hold;
  logic bau_busy, sau_busy;
  logic bau_latch, bau_go_load, bau_go_store, sau_start;

  assign ex_long   = ex_q.spec.buf_load | ex_q.spec.buf_store | ex_q.spec.aes_go;
  assign unit_busy = bau_busy | sau_busy;
  assign hold      = ex_q.valid && ex_long && (!ex_started_q || unit_busy);

  assign bau_latch    = run && ex_q.valid && ex_q.spec.buf_latch;
  assign bau_go_load  = run && ex_q.valid && ex_q.spec.buf_load  && !ex_started_q;
  assign bau_go_store = run && ex_q.valid && ex_q.spec.buf_store && !ex_started_q;
  assign sau_start    = run && ex_q.valid && ex_q.spec.aes_go    && !ex_started_q;

  assign redirect = ex_q.valid && !hold &&
                    ((ex_q.ctrl.branch && br_taken) || ex_q.ctrl.jal || ex_q.ctrl.jalr);

  // load-use hazard
  logic stall_lu, advance_id;
  assign stall_lu = ex_q.valid && ex_q.ctrl.mem_read &&
                    ((id_use_rs1 && id_rs1 == ex_q.rd) || (id_use_rs2 && id_rs2 == ex_q.rd)) &&
                    ex_q.rd != 5'd0 && id_valid_q;
  assign advance_id = !hold && !stall_lu;

  // ---------------------------------------------------------------
  // buffer set, buffer access unit, SAU
  // ---------------------------------------------------------------
  logic [31:0]      bufs [NUM_BUF];
  logic             bw_we, sb_we;
  logic [IW-1:0]    bw_idx, br_idx, sb_idx;
  logic [31:0]      bw_data, br_data;
  logic [127:0]     sb_data;
  logic             bau_dm_en;
  logic [3:0]       bau_dm_we;
  logic [DM_AW-1:0] bau_dm_addr;
  logic [31:0]      bau_dm_wdata;

  buffer_access_unit #(.DM_AW(DM_AW), .NUM_BUF(NUM_BUF)) u_bau (
    .clk, .rst_n,
    .latch(bau_latch), .base_addr(ex_a), .amount(ex_b),
    .go_load(bau_go_load), .go_store(bau_go_store),
    .dm_en(bau_dm_en), .dm_we(bau_dm_we), .dm_addr(bau_dm_addr),
    .dm_wdata(bau_dm_wdata), .dm_rdata(dm_rdata),
    .buf_we(bw_we), .buf_widx(bw_idx), .buf_wdata(bw_data),
    .buf_ridx(br_idx), .buf_rdata(br_data),
    .busy(bau_busy)
  );

  buffer_set #(.NUM_BUF(NUM_BUF)) u_buf (
    .clk, .rst_n,
    .wr_en(bw_we), .wr_idx(bw_idx), .wr_data(bw_data),
    .blk_we(sb_we), .blk_idx(sb_idx), .blk_wdata(sb_data),
    .rd_idx(br_idx), .rd_data(br_data),
    .bufs
  );

  sau #(.NUM_BUF(NUM_BUF)) u_sau (
    .clk, .rst_n,
    .start(sau_start), .mode(ex_q.spec.mode), .key_size(ex_q.spec.key_size),
    .num_blocks(ex_a[7:0]), .bufs,
    .blk_we(sb_we), .blk_idx(sb_idx), .blk_wdata(sb_data),
    .busy(sau_busy), .done()
  );

  // ---------------------------------------------------------------
  // MEM stage: data memory port A (shared with the buffer access unit)
  // ---------------------------------------------------------------
  logic [DM_AW-1:0] core_addr;
  logic [3:0]       st_be;
  logic [31:0]      st_data;

  always_comb begin
    case (mem_q.funct3[1:0])
      2'b00:   begin st_be = 4'b0001 << mem_q.addr[1:0];          st_data = {4{mem_q.store_data[7:0]}};  end
      2'b01:   begin st_be = 4'b0011 << {mem_q.addr[1], 1'b0};   st_data = {2{mem_q.store_data[15:0]}}; end
      default: begin st_be = 4'b1111;                             st_data = mem_q.store_data;            end
    endcase
    if (bau_busy) begin
      dm_en     = bau_dm_en;
      dm_we     = bau_dm_we;
      core_addr = bau_dm_addr;
      dm_wdata  = bau_dm_wdata;
    end else begin
      dm_en     = run && mem_q.valid && (mem_q.mem_read || mem_q.mem_write);
      dm_we     = (mem_q.valid && mem_q.mem_write) ? st_be : 4'b0000;
      core_addr = mem_q.addr[DM_AW+1:2];
      dm_wdata  = st_data;
    end
    dm_addr = {core_addr[DM_AW-1] ^ bank, core_addr[DM_AW-2:0]};
  end

  // ---------------------------------------------------------------
  // WB stage
  // ---------------------------------------------------------------
  logic [31:0] ld_shift, ld_val;
  always_comb begin
    ld_shift = dm_rdata >> {wb_q.addr[1:0], 3'b000};
    case (wb_q.funct3)
      3'b000:  ld_val = {{24{ld_shift[7]}},  ld_shift[7:0]};
      3'b001:  ld_val = {{16{ld_shift[15]}}, ld_shift[15:0]};
      3'b100:  ld_val = {24'b0, ld_shift[7:0]};
      3'b101:  ld_val = {16'b0, ld_shift[15:0]};
      default: ld_val = dm_rdata;
    endcase
    wb_value = wb_q.mem_read ? ld_val : wb_q.result;
  end
  assign wb_we = run && wb_q.valid && wb_q.reg_write;
  assign halt  = run && wb_q.valid && wb_q.halt;

  // ---------------------------------------------------------------
  // fetch
  // ---------------------------------------------------------------
  assign im_addr = pc_q[IM_AW+1:2];
  assign im_re   = run && (redirect || advance_id);

  // ---------------------------------------------------------------
  // pipeline register updates
  // ---------------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pc_q <= '0; halted_q <= 1'b0;
      id_valid_q <= 1'b0; id_pc_q <= '0;
      ex_q <= '0; ex_started_q <= 1'b0;
      mem_q <= '0; wb_q <= '0;
    end else if (clear) begin
      pc_q <= '0; halted_q <= 1'b0;
      id_valid_q <= 1'b0; id_pc_q <= '0;
      ex_q <= '0; ex_started_q <= 1'b0;
      mem_q <= '0; wb_q <= '0;
    end else if (run) begin
      // IF / ID
      if (redirect) begin
        pc_q       <= target;
        id_valid_q <= 1'b0;
      end else if (advance_id) begin
        pc_q       <= pc_q + 32'd4;
        id_pc_q    <= pc_q;
        id_valid_q <= !halted_q && !(id_valid_q && id_ctrl.halt);
        if (id_valid_q && id_ctrl.halt) halted_q <= 1'b1;
      end

      // EX
      if (hold) begin
        ex_q.rs1_val <= ex_a;     // keep forwarded values while producers drain
        ex_q.rs2_val <= ex_b;
        ex_started_q <= 1'b1;
      end else begin
        ex_started_q <= 1'b0;
        if (redirect || stall_lu || !id_valid_q) begin
          ex_q <= '0;
        end else begin
          ex_q.valid   <= 1'b1;
          ex_q.pc      <= id_pc_q;
          ex_q.ctrl    <= id_ctrl;
          ex_q.spec    <= id_spec;
          ex_q.is_spec <= id_is_spec;
          ex_q.rs1     <= id_rs1;
          ex_q.rs2     <= id_rs2;
          ex_q.rd      <= id_rd;
          ex_q.rs1_val <= id_rs1_val;
          ex_q.rs2_val <= id_rs2_val;
        end
      end

      // MEM
      if (hold || !ex_q.valid) begin
        mem_q <= '0;
      end else begin
        mem_q.valid      <= 1'b1;
        mem_q.reg_write  <= ex_q.ctrl.reg_write;
        mem_q.mem_read   <= ex_q.ctrl.mem_read;
        mem_q.mem_write  <= ex_q.ctrl.mem_write;
        mem_q.funct3     <= ex_q.ctrl.mem_funct3;
        mem_q.rd         <= ex_q.rd;
        mem_q.result     <= (ex_q.ctrl.wb_sel == WB_PC4) ? ex_q.pc + 32'd4 : alu_y;
        mem_q.addr       <= alu_y;
        mem_q.store_data <= ex_b;
        mem_q.halt       <= ex_q.ctrl.halt;
      end

      // WB
      wb_q <= mem_q;
    end
  end

  a_units_exclusive: assert property (@(posedge clk) disable iff (!rst_n) !(bau_busy && sau_busy))
    else $error("aesrv_core: buffer transfer and AES run overlap");

endmodule

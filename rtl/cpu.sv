// cpu: 32-bit five-stage pipelined RISC processor with IEEE-754 single
// floating point.
//
// Stages: IF (PC and instruction memory), ID (decode, register file read,
// branch and jump resolution), EX (integer ALU, EXT_ALU for the
// floating-point and multiply instructions, and the PUSH/POP stack), MEM
// (internal 8K-word data memory, or the external bus for every other
// address) and WB (register write).
//
// Hazards:
//  * Results are forwarded into EX from the EX/MEM and MEM/WB registers;
//    the register file bypasses a write-back to a same-cycle read in ID.
//  * A load followed by an instruction that uses its result stalls the
//    younger one in ID for one cycle (load-use stall).
//  * Branches, JAL and JR are resolved in ID. A taken one squashes the
//    instruction fetched behind it (one-cycle penalty). A conditional
//    branch sees the flags an instruction in EX is producing in the same
//    cycle, so compare-and-branch needs no stall. JR waits in ID until the
//    instruction producing its register has reached write-back.
//  * HLT stops fetching when it is decoded; halted rises when it reaches
//    write-back, so every older instruction has completed.
// The flags Z, V and N are written at the end of EX: ADD, ADDZ, SUB, ADDI,
// SUBI, ADDF, SUBF and MULF write all three; AND, NOR and the shifts write
// only Z; other instructions keep them. ADDZ writes its register and the
// flags only when Z is set.
//
// External bus (MEM stage, one cycle, no wait states): ext_addr,
// ext_wdata, ext_we, ext_re; ext_rdata must answer combinationally in the
// same cycle. Addresses below DM_DEPTH go to the internal data memory.
// prog_* loads the instruction memory.
//
// From the design: the instruction set (encodings, opcodes, flags,
// saturation, R0 and R31 rules), the five stages and the units in them, the
// register file from two 32x32 dual-port memories with bypass, branch
// handling in ID, the 1K instruction and 8K data memories, the 1K stack.
// This design's choices: forwarding paths, the stall rules, flags written
// at the end of EX, MUL/UMUL not writing flags, asynchronous memory reads.
module cpu
  import cpu_pkg::*;
#(
  parameter int IM_DEPTH    = 1024,
  parameter int DM_DEPTH    = 8192,
  parameter int STACK_DEPTH = 1024
) (
  input  logic        clk,
  input  logic        rst_n,
  // instruction memory load port
  input  logic        prog_we,
  input  logic [$clog2(IM_DEPTH)-1:0] prog_addr,
  input  logic [31:0] prog_data,
  // external memory-mapped bus (MEM stage)
  output logic [31:0] ext_addr,
  output logic [31:0] ext_wdata,
  output logic        ext_we,
  output logic        ext_re,
  input  logic [31:0] ext_rdata,
  // status
  output logic [31:0] pc,
  output logic        halted,
  output logic        stall_load_use,
  output logic        stall_jr,
  output logic        branch_taken
);
  localparam int IAW = $clog2(IM_DEPTH);
  localparam int DAW = $clog2(DM_DEPTH);

  // ---------------------------------------------------------------- types
  typedef struct packed {
    logic        valid;
    logic [31:0] instr;
    logic [31:0] pc1;       // address of this instruction + 1
  } if_id_t;

  typedef struct packed {
    logic        valid;
    opcode_e     op;
    logic [4:0]  rs, rb, dest;
    logic [31:0] va, vb;    // register values read in ID
    logic [15:0] imm;
    logic [31:0] pc1;
    aluop_e      aop;
    logic        use_ext;
    xfunc_e      xfunc;
    logic        reg_write;
    logic        imm_b;     // src2 is an immediate
    logic [31:0] immv;
    logic        is_load, is_store, is_push, is_pop, is_addz, is_jal, is_hlt;
    logic        fl_all, fl_z;  // flag write classes
  } id_ex_t;

  typedef struct packed {
    logic        valid;
    logic [4:0]  dest;
    logic        reg_write;
    logic [31:0] res;       // ALU result / address
    logic [31:0] sdata;     // store data
    logic        use_ext, is_pop, is_load, is_store, is_hlt;
  } ex_mem_t;

  typedef struct packed {
    logic        valid;
    logic [4:0]  dest;
    logic        reg_write;
    logic [31:0] val;
    logic        is_hlt;
  } mem_wb_t;

  if_id_t  if_id;
  id_ex_t  id_ex, id_dec;
  ex_mem_t ex_mem;
  mem_wb_t mem_wb;
  flags_t  flags;
  logic    halt_seen;

  // ---------------------------------------------------------------- IF
  logic [31:0] instr_f, pc_next;
  logic        stall, flush;

  instr_mem #(.DEPTH(IM_DEPTH)) u_imem (
    .clk(clk), .addr(pc[IAW-1:0]), .instr(instr_f),
    .prog_we(prog_we), .prog_addr(prog_addr), .prog_data(prog_data));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pc    <= 32'd0;
      if_id <= '0;
    end else if (!stall) begin
      pc <= pc_next;
      if (flush) if_id <= '0;
      else       if_id <= '{valid: 1'b1, instr: instr_f, pc1: pc + 32'd1};
    end
  end

  // ---------------------------------------------------------------- ID
  opcode_e     op_d;
  logic [4:0]  rd_d, rs_d, rt_d, rb_d;
  logic [31:0] rf_a, rf_b;
  logic        use_a, use_b;
  logic        wb_we;
  logic [4:0]  wb_addr;
  logic [31:0] wb_data;
  logic [31:0] br_target;
  flags_t      fl_eff;
  logic        cond_ok;
  flags_t      ex_flags_new;
  logic        ex_fl_all, ex_fl_z;

  assign op_d = opcode_e'(if_id.instr[31:27]);
  assign rd_d = if_id.instr[20:16];
  assign rs_d = if_id.instr[12:8];
  assign rt_d = if_id.instr[4:0];
  assign rb_d = (op_d == OP_SW || op_d == OP_LHB) ? rd_d : rt_d;

  reg_file u_rf (.clk(clk), .we(wb_we), .waddr(wb_addr), .wdata(wb_data),
                 .raddr1(rs_d), .raddr2(rb_d), .rdata1(rf_a), .rdata2(rf_b));

  always_comb begin
    id_dec           = '0;
    id_dec.valid     = if_id.valid;
    id_dec.op        = op_d;
    id_dec.rs        = rs_d;
    id_dec.rb        = rb_d;
    id_dec.dest      = (op_d == OP_JAL) ? 5'd31 : rd_d;
    id_dec.va        = rf_a;
    id_dec.vb        = rf_b;
    id_dec.imm       = if_id.instr[15:0];
    id_dec.pc1       = if_id.pc1;
    id_dec.aop       = AO_PASS;
    id_dec.xfunc     = XF_UNDEF;
    use_a = 1'b0; use_b = 1'b0;
    unique case (op_d)
      OP_ADD, OP_ADDZ: begin id_dec.aop = AO_ADD; use_a = 1; use_b = 1; id_dec.reg_write = 1; id_dec.fl_all = 1; end
      OP_SUB:  begin id_dec.aop = AO_SUB; use_a = 1; use_b = 1; id_dec.reg_write = 1; id_dec.fl_all = 1; end
      OP_AND:  begin id_dec.aop = AO_AND; use_a = 1; use_b = 1; id_dec.reg_write = 1; id_dec.fl_z = 1; end
      OP_NOR:  begin id_dec.aop = AO_NOR; use_a = 1; use_b = 1; id_dec.reg_write = 1; id_dec.fl_z = 1; end
      OP_SLL, OP_SRL, OP_SRA: begin
        id_dec.aop = (op_d == OP_SLL) ? AO_SLL : (op_d == OP_SRL) ? AO_SRL : AO_SRA;
        use_a = 1; id_dec.imm_b = 1; id_dec.immv = {27'd0, if_id.instr[4:0]};
        id_dec.reg_write = 1; id_dec.fl_z = 1;
      end
      OP_LW:   begin id_dec.aop = AO_ADDR; use_a = 1; id_dec.reg_write = 1; id_dec.is_load = 1; end
      OP_SW:   begin id_dec.aop = AO_ADDR; use_a = 1; use_b = 1; id_dec.is_store = 1; end
      OP_LHB:  begin id_dec.aop = AO_LHB; use_b = 1; id_dec.reg_write = 1; end
      OP_LLB:  begin id_dec.aop = AO_LLB; id_dec.reg_write = 1; end
      OP_JAL:  begin id_dec.aop = AO_PASS; id_dec.is_jal = 1; id_dec.reg_write = 1; end
      OP_JR:   begin use_a = 1; end
      OP_PUSH: begin use_a = 1; id_dec.is_push = 1; end
      OP_POP:  begin id_dec.is_pop = 1; id_dec.reg_write = 1; end
      OP_ADDI, OP_SUBI: begin
        id_dec.aop = (op_d == OP_ADDI) ? AO_ADD : AO_SUB;
        use_a = 1; id_dec.imm_b = 1; id_dec.immv = {{24{if_id.instr[7]}}, if_id.instr[7:0]};
        id_dec.reg_write = 1; id_dec.fl_all = 1;
      end
      OP_MUL, OP_UMUL, OP_ADDF, OP_SUBF, OP_MULF: begin
        id_dec.use_ext = 1; id_dec.xfunc = xfunc_e'(op_d[2:0]);
        use_a = 1; use_b = 1; id_dec.reg_write = 1;
        id_dec.fl_all = (op_d == OP_ADDF || op_d == OP_SUBF || op_d == OP_MULF);
      end
      OP_ITF, OP_FTI: begin
        id_dec.use_ext = 1; id_dec.xfunc = xfunc_e'(op_d[2:0]);
        use_a = 1; id_dec.reg_write = 1;
      end
      OP_HLT:  id_dec.is_hlt = 1;
      default: ;  // B and unused opcodes: nothing in EX
    endcase
    id_dec.is_addz = (op_d == OP_ADDZ);
    if (!if_id.valid) begin
      id_dec.reg_write = 0; id_dec.is_store = 0; id_dec.is_push = 0;
      id_dec.is_pop = 0; id_dec.is_hlt = 0; id_dec.fl_all = 0; id_dec.fl_z = 0;
      use_a = 0; use_b = 0;
    end
  end

  // hazards
  always_comb begin
    stall_load_use = id_ex.valid && id_ex.is_load && id_ex.dest != 5'd0 &&
                     ((use_a && id_ex.dest == rs_d) || (use_b && id_ex.dest == rb_d));
    stall_jr = if_id.valid && op_d == OP_JR && rs_d != 5'd0 &&
               ((id_ex.valid && id_ex.reg_write && id_ex.dest == rs_d) ||
                (ex_mem.valid && ex_mem.reg_write && ex_mem.dest == rs_d));
    stall = stall_load_use || stall_jr || halt_seen || (if_id.valid && op_d == OP_HLT);
  end

  // branch resolution with the flags the EX instruction is producing
  always_comb begin
    fl_eff = flags;
    if (ex_fl_all) fl_eff = ex_flags_new;
    else if (ex_fl_z) fl_eff.z = ex_flags_new.z;
    unique case (cond_e'(if_id.instr[26:24]))
      BR_NEQ:    cond_ok = !fl_eff.z;
      BR_EQ:     cond_ok = fl_eff.z;
      BR_GT:     cond_ok = !fl_eff.z && !fl_eff.n;
      BR_LT:     cond_ok = fl_eff.n;
      BR_GTE:    cond_ok = !fl_eff.n;
      BR_LTE:    cond_ok = fl_eff.n || fl_eff.z;
      BR_OVFL:   cond_ok = fl_eff.v;
      default:   cond_ok = 1'b1;
    endcase
    br_target    = if_id.pc1 + {{20{if_id.instr[11]}}, if_id.instr[11:0]};
    branch_taken = 1'b0;
    pc_next      = pc + 32'd1;
    if (if_id.valid && !stall) begin
      if ((op_d == OP_B && cond_ok) || op_d == OP_JAL) begin
        branch_taken = 1'b1; pc_next = br_target;
      end else if (op_d == OP_JR) begin
        branch_taken = 1'b1; pc_next = rf_a;
      end
    end
    flush = branch_taken;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      id_ex     <= '0;
      halt_seen <= 1'b0;
    end else begin
      if (stall) id_ex <= '0;
      else       id_ex <= id_dec;
      if (if_id.valid && op_d == OP_HLT) begin
        halt_seen <= 1'b1;
        if (!halt_seen) id_ex <= id_dec;  // let HLT itself go down once
      end
    end
  end

  // ---------------------------------------------------------------- EX
  logic [31:0] ex_mem_val, fa, fb, src2, alu_res, ext_dst, pop_data;
  flags_t      alu_fl;
  logic        ext_ov, ext_zr, ext_neg, ex_wr;
  logic [$clog2(STACK_DEPTH)-1:0] sp;

  always_comb begin
    ex_mem_val = ex_mem.use_ext ? ext_dst : ex_mem.is_pop ? pop_data : ex_mem.res;
    fa = id_ex.va;
    if (ex_mem.valid && ex_mem.reg_write && ex_mem.dest != 0 && ex_mem.dest == id_ex.rs) fa = ex_mem_val;
    else if (mem_wb.valid && mem_wb.reg_write && mem_wb.dest != 0 && mem_wb.dest == id_ex.rs) fa = mem_wb.val;
    fb = id_ex.vb;
    if (ex_mem.valid && ex_mem.reg_write && ex_mem.dest != 0 && ex_mem.dest == id_ex.rb) fb = ex_mem_val;
    else if (mem_wb.valid && mem_wb.reg_write && mem_wb.dest != 0 && mem_wb.dest == id_ex.rb) fb = mem_wb.val;
    src2 = id_ex.imm_b ? id_ex.immv : fb;
  end

  alu u_alu (.op(id_ex.aop), .src1(id_ex.is_jal ? id_ex.pc1 : fa), .src2(src2),
             .imm(id_ex.imm), .result(alu_res), .flags(alu_fl));

  ext_alu u_ext (.clk(clk), .src1(fa), .src0(fb), .func(id_ex.xfunc),
                 .dst_EX_DM(ext_dst), .ov(ext_ov), .zr(ext_zr), .neg(ext_neg));

  stack #(.DEPTH(STACK_DEPTH)) u_stack (
    .clk(clk), .rst_n(rst_n), .push(id_ex.valid && id_ex.is_push),
    .pop(id_ex.valid && id_ex.is_pop), .push_data(fa), .pop_data(pop_data), .sp(sp));

  always_comb begin
    ex_wr        = id_ex.valid && (!id_ex.is_addz || flags.z);
    ex_flags_new = id_ex.use_ext ? '{z: ext_zr, v: ext_ov, n: ext_neg} : alu_fl;
    ex_fl_all    = ex_wr && id_ex.fl_all;
    ex_fl_z      = ex_wr && id_ex.fl_z;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ex_mem <= '0;
      flags  <= '0;
    end else begin
      ex_mem.valid     <= id_ex.valid;
      ex_mem.dest      <= id_ex.dest;
      ex_mem.reg_write <= id_ex.reg_write && ex_wr;
      ex_mem.res       <= alu_res;
      ex_mem.sdata     <= fb;
      ex_mem.use_ext   <= id_ex.use_ext;
      ex_mem.is_pop    <= id_ex.is_pop;
      ex_mem.is_load   <= id_ex.valid && id_ex.is_load;
      ex_mem.is_store  <= id_ex.valid && id_ex.is_store;
      ex_mem.is_hlt    <= id_ex.valid && id_ex.is_hlt;
      if (ex_fl_all)    flags   <= ex_flags_new;
      else if (ex_fl_z) flags.z <= ex_flags_new.z;
    end
  end

  // ---------------------------------------------------------------- MEM
  logic        dm_sel;
  logic [31:0] dm_rdata, load_val;

  assign dm_sel    = (ex_mem.res < 32'(DM_DEPTH));
  assign ext_addr  = ex_mem.res;
  assign ext_wdata = ex_mem.sdata;
  assign ext_we    = ex_mem.is_store && !dm_sel;
  assign ext_re    = ex_mem.is_load && !dm_sel;

  data_mem #(.DEPTH(DM_DEPTH)) u_dmem (
    .clk(clk), .we(ex_mem.is_store && dm_sel), .addr(ex_mem.res[DAW-1:0]),
    .wdata(ex_mem.sdata), .rdata(dm_rdata));

  assign load_val = dm_sel ? dm_rdata : ext_rdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) mem_wb <= '0;
    else begin
      mem_wb.valid     <= ex_mem.valid;
      mem_wb.dest      <= ex_mem.dest;
      mem_wb.reg_write <= ex_mem.valid && ex_mem.reg_write;
      mem_wb.val       <= ex_mem.is_load ? load_val : ex_mem_val;
      mem_wb.is_hlt    <= ex_mem.is_hlt;
    end
  end

  // ---------------------------------------------------------------- WB
  assign wb_we   = mem_wb.valid && mem_wb.reg_write;
  assign wb_addr = mem_wb.dest;
  assign wb_data = mem_wb.val;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)             halted <= 1'b0;
    else if (mem_wb.is_hlt) halted <= 1'b1;
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(ext_we && ext_re))
    else $error("cpu: external read and write in the same cycle");
endmodule

// impica_address_engine: the compute half of IMPICA's address-access
// decoupled core. It executes pointer-chasing code held in the instruction
// RAM, one operation at a time, using the data RAM as its stack. Every
// instruction that is not a memory access (ALU, branches, parameter
// reads/writes) runs here. On a memory instruction (LD) the engine enqueues
// the virtual address, the operation's stack pointer (its data RAM slot) and
// the destination register into the access queue, pushes its context
// (R1..R7 and the PC) into the slot, and switches to another operation: it
// first resumes an operation whose load has completed (response queue), and
// otherwise starts a new one from the request queue. On resume it reloads the
// context from the slot, takes the loaded word from the IMPICA cache (which
// unlocks the line) and continues. DONE sets the slot's completion flag,
// which the host polls, and announces the finished request ID so the cache
// can drop that operation's lines.
//
// Follows the paper: the decoupling, queue/stack/context-switch mechanism,
// and the memory-mapped parameter area (__param). Own choices: the
// instruction set and encoding (impica_pkg), the slot layout, one
// instruction per two cycles (fetch, execute), 8-cycle context save,
// 9-cycle restore, and giving resumed operations priority over new ones.
// The per-operation load count (used for the cache's root bit) is kept in
// the upper bits of the saved PC word.
module impica_address_engine
  import impica_pkg::*;
#(
  parameter int unsigned ROOT_LOADS = 2,                 // "first few" accesses: assumed 2
  parameter int unsigned DRAM_AW    = 11                 // 16KB / 8B words
) (
  input  logic          clk,
  input  logic          rst_n,
  // request queue head
  input  logic          req_valid,
  output logic          req_ready,
  input  req_t          req,
  // instruction RAM read port
  output logic          imem_en,
  output logic [PC_W-1:0] imem_addr,
  input  logic [31:0]   imem_rdata,
  // data RAM port
  output logic          dmem_en,
  output logic          dmem_we,
  output logic [DRAM_AW-1:0] dmem_addr,
  output word_t         dmem_wdata,
  input  word_t         dmem_rdata,
  // access queue tail
  output logic          acc_valid,
  input  logic          acc_ready,
  output acc_t          acc,
  // response queue head
  input  logic          rsp_valid,
  output logic          rsp_ready,
  input  resp_t         rsp,
  // IMPICA cache read port (data one cycle later; unlocks the line)
  output logic          crd_en,
  output paddr_t        crd_pa,
  output slot_t         crd_slot,
  input  word_t         crd_data,
  // completion
  output logic          done_valid,
  output slot_t         done_slot,
  // activity counters for the host / testbench
  output logic [31:0]   n_ctx_switch,
  output logic [31:0]   n_instr
);
  typedef enum logic [2:0] {S_IDLE, S_FETCH, S_EXEC, S_LDP, S_SAVE, S_RESTORE} state_e;

  state_e      state;
  word_t       regs [1:NREG-1];
  pc_t         pc;
  slot_t       slot;
  logic [7:0]  nloads;
  logic [3:0]  cnt;
  instr_t      ir;
  reg_t        ld_rd;
  word_t       ld_word;


  function automatic logic [DRAM_AW-1:0] slot_word(slot_t s, int unsigned w);
    return DRAM_AW'({s, 4'(w)});
  endfunction

  function automatic word_t rget(reg_t r);
    return (r == 3'd0) ? '0 : regs[r];
  endfunction

  assign ir = instr_t'(imem_rdata);
  wire word_t a = rget(ir.rs1);
  wire word_t b = rget(ir.rs2);
  wire word_t simm = {{(WORD_W-19){ir.imm[18]}}, ir.imm};
  wire pc_t  br_tgt = pc + pc_t'(ir.imm);

  logic take;
  always_comb begin
    unique case (ir.op)
      OP_BEQ:  take = (a == b);
      OP_BNE:  take = (a != b);
      OP_BLTU: take = (a <  b);
      OP_BGEU: take = (a >= b);
      default: take = 1'b0;
    endcase
  end

  word_t alu;
  always_comb begin
    unique case (ir.op)
      OP_ADD:  alu = a + b;
      OP_SUB:  alu = a - b;
      OP_AND:  alu = a & b;
      OP_OR:   alu = a | b;
      OP_XOR:  alu = a ^ b;
      OP_ADDI: alu = a + simm;
      OP_SLLI: alu = a << ir.imm[5:0];
      OP_SRLI: alu = a >> ir.imm[5:0];
      default: alu = '0;
    endcase
  end

  wire is_alu = (ir.op inside {OP_ADD, OP_SUB, OP_AND, OP_OR, OP_XOR, OP_ADDI, OP_SLLI, OP_SRLI});

  // Combinational outputs
  always_comb begin
    req_ready  = 1'b0;
    rsp_ready  = 1'b0;
    imem_en    = 1'b0;
    imem_addr  = pc;
    dmem_en    = 1'b0;
    dmem_we    = 1'b0;
    dmem_addr  = '0;
    dmem_wdata = '0;
    acc_valid  = 1'b0;
    acc        = '0;
    crd_en     = 1'b0;
    crd_pa     = rsp.pa;
    crd_slot   = rsp.slot;
    done_valid = 1'b0;
    done_slot  = slot;
    unique case (state)
      S_IDLE: begin
        if (rsp_valid) begin
          rsp_ready = 1'b1;
          crd_en    = 1'b1;
          dmem_en   = 1'b1;
          dmem_addr = slot_word(rsp.slot, CTX_BASE);
        end else begin
          req_ready = req_valid;
        end
      end
      S_FETCH: imem_en = 1'b1;
      S_EXEC: begin
        unique case (ir.op)
          OP_LDP: begin
            dmem_en   = 1'b1;
            dmem_addr = slot_word(slot, ir.imm[2:0]);
          end
          OP_STP: begin
            dmem_en    = 1'b1;
            dmem_we    = 1'b1;
            dmem_addr  = slot_word(slot, ir.imm[2:0]);
            dmem_wdata = a;
          end
          OP_LD: begin
            acc_valid = 1'b1;
            acc.va    = vaddr_t'(a + simm);
            acc.slot  = slot;
            acc.rd    = ir.rd;
            acc.root  = (nloads < 8'(ROOT_LOADS));
          end
          OP_DONE: begin
            dmem_en    = 1'b1;
            dmem_we    = 1'b1;
            dmem_addr  = slot_word(slot, PARAM_DONE);
            dmem_wdata = word_t'(1);
            done_valid = 1'b1;
          end
          default: ;
        endcase
      end
      S_SAVE: begin
        dmem_en    = 1'b1;
        dmem_we    = 1'b1;
        dmem_addr  = slot_word(slot, CTX_BASE + 32'(cnt));
        dmem_wdata = (cnt == 4'd7) ? {nloads, {(WORD_W-8-PC_W){1'b0}}, pc}
                                   : regs[3'(cnt) + 3'd1];
      end
      S_RESTORE: begin
        if (cnt < 4'd8) begin
          dmem_en   = 1'b1;
          dmem_addr = slot_word(slot, CTX_BASE + 32'(cnt));
        end
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      pc           <= '0;
      slot         <= '0;
      nloads       <= '0;
      cnt          <= '0;
      ld_rd        <= '0;
      ld_word      <= '0;
      n_ctx_switch <= '0;
      n_instr      <= '0;
      for (int i = 1; i < NREG; i++) regs[i] <= '0;
    end else begin
      unique case (state)
        S_IDLE: begin
          if (rsp_valid) begin
            slot  <= rsp.slot;
            ld_rd <= rsp.rd;
            cnt   <= 4'd1;
            state <= S_RESTORE;
          end else if (req_valid) begin
            slot   <= req.slot;
            pc     <= req.start_pc;
            nloads <= '0;
            for (int i = 1; i < NREG; i++) regs[i] <= '0;
            state  <= S_FETCH;
          end
        end
        S_FETCH: state <= S_EXEC;
        S_EXEC: begin
          n_instr <= n_instr + 1;
          if (is_alu) begin
            if (ir.rd != 3'd0) regs[ir.rd] <= alu;
            pc    <= pc + 1'b1;
            state <= S_FETCH;
          end else begin
            unique case (ir.op)
              OP_LDP: state <= S_LDP;
              OP_STP: begin pc <= pc + 1'b1; state <= S_FETCH; end
              OP_BEQ, OP_BNE, OP_BLTU, OP_BGEU: begin
                pc    <= take ? br_tgt : pc + 1'b1;
                state <= S_FETCH;
              end
              OP_LD: begin
                if (acc_ready) begin
                  pc     <= pc + 1'b1;
                  nloads <= (nloads == 8'hFF) ? nloads : nloads + 1'b1;
                  cnt    <= '0;
                  state  <= S_SAVE;
                end else begin
                  n_instr <= n_instr;   // stalled on a full access queue
                end
              end
              OP_DONE: state <= S_IDLE;
              default: state <= S_IDLE;
            endcase
          end
        end
        S_LDP: begin
          if (ir.rd != 3'd0) regs[ir.rd] <= dmem_rdata;
          pc    <= pc + 1'b1;
          state <= S_FETCH;
        end
        S_SAVE: begin
          cnt <= cnt + 1'b1;
          if (cnt == 4'd7) begin
            n_ctx_switch <= n_ctx_switch + 1;
            state        <= S_IDLE;
          end
        end
        S_RESTORE: begin
          // word cnt-1 of the saved context arrives now
          if (cnt == 4'd8) begin
            pc     <= dmem_rdata[PC_W-1:0];
            nloads <= dmem_rdata[WORD_W-1 -: 8];
            state  <= S_FETCH;
          end else begin
            regs[3'(cnt)] <= dmem_rdata;
          end
          // the loaded word (read from the cache on the first cycle) goes last
          if (cnt == 4'd1) ld_word <= crd_data;
          if (cnt == 4'd8 && ld_rd != 3'd0) regs[ld_rd] <= ld_word;
          cnt <= cnt + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) acc_valid |-> state == S_EXEC)
    else $error("address engine: access enqueued outside execute");
endmodule

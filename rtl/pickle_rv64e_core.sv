// pickle_rv64e_core: minimal single-stage, in-order RV64E core of a prefetch generator slot.
//
// It executes prefetch kernels: the RV64I base integer instructions with the E register file
// (x0..x15, x0 hard-wired to zero). No M/A/F/C extensions, no CSRs, no interrupts. A kernel
// is started with start/start_pc and runs until it executes ECALL or EBREAK, which ends it
// (halted rises, done pulses); FENCE is a no-op. An illegal instruction (including a register
// number above 15) also ends the kernel and raises illegal.
//
// Timing: one instruction per cycle from a combinational instruction port (imem_addr ->
// imem_rdata in the same cycle). Loads and stores use a request/grant data port: the core
// holds dreq until dgnt; a store completes in the grant cycle, a load then waits for drvalid
// (any later cycle) and writes back. A stalled request is simply repeated, which is how the
// slot makes the kernel retry while the request manager is full.
// Sub-word accesses are aligned by the core: dbe marks the bytes of the 64-bit word at
// daddr[63:3]; dwdata is already shifted into place, drdata is the full word.
//
// Paper: RV64E ISA, 1-stage, in-order, minimal. Everything else (ports, halting on ECALL,
// stall handshake) is this design's own choice.
module pickle_rv64e_core (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [31:0] start_pc,
  output logic        halted,
  output logic        done,
  output logic        illegal,
  // instruction port
  output logic [31:0] imem_addr,
  input  logic [31:0] imem_rdata,
  // data port
  output logic        dreq,
  output logic        dwe,
  output logic [63:0] daddr,
  output logic [63:0] dwdata,
  output logic [7:0]  dbe,
  input  logic        dgnt,
  input  logic        drvalid,
  input  logic [63:0] drdata
);
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_LOAD} state_e;
  state_e state;

  logic [31:0] pc;
  logic [63:0] rf [16];
  logic [31:0] ins;

  assign imem_addr = pc;
  assign ins       = imem_rdata;
  assign halted    = (state == S_IDLE);

  logic [6:0] opc;
  logic [2:0] f3;
  logic [6:0] f7;
  logic [4:0] rd5, rs15, rs25;
  logic [63:0] a, b, imm_i, imm_s, imm_b, imm_u, imm_j;

  assign opc  = ins[6:0];
  assign f3   = ins[14:12];
  assign f7   = ins[31:25];
  assign rd5  = ins[11:7];
  assign rs15 = ins[19:15];
  assign rs25 = ins[24:20];
  assign a    = rf[rs15[3:0]];
  assign b    = rf[rs25[3:0]];
  assign imm_i = {{52{ins[31]}}, ins[31:20]};
  assign imm_s = {{52{ins[31]}}, ins[31:25], ins[11:7]};
  assign imm_b = {{51{ins[31]}}, ins[31], ins[7], ins[30:25], ins[11:8], 1'b0};
  assign imm_u = {{32{ins[31]}}, ins[31:12], 12'b0};
  assign imm_j = {{43{ins[31]}}, ins[31], ins[19:12], ins[20], ins[30:21], 1'b0};

  // load bookkeeping
  logic [2:0] ld_f3;
  logic [3:0] ld_rd;
  logic [2:0] ld_off;

  // decode / execute
  logic        wr_en;
  logic [63:0] wr_val;
  logic [31:0] next_pc;
  logic        is_load, is_store, is_halt, is_bad, take;
  logic [63:0] eff;
  logic [63:0] op2;
  logic [63:0] alu;
  logic [31:0] w32;

  function automatic logic [63:0] sx32(logic [31:0] v);
    return {{32{v[31]}}, v};
  endfunction

  always_comb begin
    wr_en    = 1'b0;
    wr_val   = '0;
    next_pc  = pc + 32'd4;
    is_load  = 1'b0;
    is_store = 1'b0;
    is_halt  = 1'b0;
    is_bad   = 1'b0;
    take     = 1'b0;
    eff      = a + imm_i;
    op2      = '0;
    alu      = '0;
    w32      = '0;
    unique case (opc)
      7'b0110111: begin wr_en = 1'b1; wr_val = imm_u; end                      // LUI
      7'b0010111: begin wr_en = 1'b1; wr_val = {32'b0, pc} + imm_u; end        // AUIPC
      7'b1101111: begin wr_en = 1'b1; wr_val = {32'b0, pc + 32'd4};            // JAL
                        next_pc = pc + imm_j[31:0]; end
      7'b1100111: begin wr_en = 1'b1; wr_val = {32'b0, pc + 32'd4};            // JALR
                        next_pc = eff[31:0] & ~32'd1; end
      7'b1100011: begin                                                       // BRANCH
        unique case (f3)
          3'b000: take = (a == b);
          3'b001: take = (a != b);
          3'b100: take = ($signed(a) <  $signed(b));
          3'b101: take = ($signed(a) >= $signed(b));
          3'b110: take = (a <  b);
          3'b111: take = (a >= b);
          default: is_bad = 1'b1;
        endcase
        if (take) next_pc = pc + imm_b[31:0];
      end
      7'b0000011: begin is_load = 1'b1; if (f3 == 3'b111) is_bad = 1'b1; end   // LOAD
      7'b0100011: begin is_store = 1'b1; eff = a + imm_s;                      // STORE
                        if (f3[2]) is_bad = 1'b1; end
      7'b0010011, 7'b0110011: begin                                           // OP-IMM / OP
        op2 = (opc == 7'b0010011) ? imm_i : b;
        unique case (f3)
          3'b000: alu = (opc == 7'b0110011 && f7[5]) ? a - op2 : a + op2;
          3'b001: alu = a << op2[5:0];
          3'b010: alu = {63'b0, $signed(a) < $signed(op2)};
          3'b011: alu = {63'b0, a < op2};
          3'b100: alu = a ^ op2;
          3'b101: alu = f7[5] ? 64'($signed(a) >>> op2[5:0]) : a >> op2[5:0];
          3'b110: alu = a | op2;
          default: alu = a & op2;
        endcase
        wr_en = 1'b1; wr_val = alu;
      end
      7'b0011011, 7'b0111011: begin                                           // OP-IMM-32 / OP-32
        op2 = (opc == 7'b0011011) ? imm_i : b;
        unique case (f3)
          3'b000: w32 = (opc == 7'b0111011 && f7[5]) ? a[31:0] - op2[31:0] : a[31:0] + op2[31:0];
          3'b001: w32 = a[31:0] << op2[4:0];
          3'b101: w32 = f7[5] ? 32'($signed(a[31:0]) >>> op2[4:0]) : a[31:0] >> op2[4:0];
          default: is_bad = 1'b1;
        endcase
        wr_en = 1'b1; wr_val = sx32(w32);
      end
      7'b0001111: ;                                                           // FENCE
      7'b1110011: is_halt = 1'b1;                                             // ECALL/EBREAK
      default:    is_bad = 1'b1;
    endcase
    // RV64E: only x0..x15 exist
    if ((wr_en || is_load) && rd5[4]) is_bad = 1'b1;
    if (rs15[4] && opc != 7'b0110111 && opc != 7'b0010111 && opc != 7'b1101111) is_bad = 1'b1;
    if (rs25[4] && (opc == 7'b0110011 || opc == 7'b0111011 ||
                    opc == 7'b0100011 || opc == 7'b1100011)) is_bad = 1'b1;
  end

  // data port
  assign dreq   = (state == S_RUN) && !is_bad && (is_load || is_store);
  assign dwe    = is_store;
  assign daddr  = eff;
  always_comb begin
    unique case (f3[1:0])
      2'b00:   dbe = 8'h01 << eff[2:0];
      2'b01:   dbe = 8'h03 << eff[2:0];
      2'b10:   dbe = 8'h0f << eff[2:0];
      default: dbe = 8'hff;
    endcase
  end
  assign dwdata = b << {eff[2:0], 3'b000};

  logic [63:0] ld_sh, ld_val;
  assign ld_sh = drdata >> {ld_off, 3'b000};
  always_comb begin
    unique case (ld_f3)
      3'b000:  ld_val = {{56{ld_sh[7]}},  ld_sh[7:0]};
      3'b001:  ld_val = {{48{ld_sh[15]}}, ld_sh[15:0]};
      3'b010:  ld_val = {{32{ld_sh[31]}}, ld_sh[31:0]};
      3'b100:  ld_val = {56'b0, ld_sh[7:0]};
      3'b101:  ld_val = {48'b0, ld_sh[15:0]};
      3'b110:  ld_val = {32'b0, ld_sh[31:0]};
      default: ld_val = ld_sh;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      pc      <= '0;
      done    <= 1'b0;
      illegal <= 1'b0;
      ld_f3   <= '0;
      ld_rd   <= '0;
      ld_off  <= '0;
      for (int i = 0; i < 16; i++) rf[i] <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (start) begin
            state   <= S_RUN;
            pc      <= start_pc;
            illegal <= 1'b0;
          end
        end
        S_RUN: begin
          if (is_bad) begin
            state   <= S_IDLE;
            done    <= 1'b1;
            illegal <= 1'b1;
          end else if (is_halt) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else if (is_load || is_store) begin
            if (dgnt) begin
              if (is_load) begin
                state  <= S_LOAD;
                ld_f3  <= f3;
                ld_rd  <= rd5[3:0];
                ld_off <= eff[2:0];
              end else begin
                pc <= next_pc;
              end
            end
          end else begin
            if (wr_en && rd5[3:0] != 4'd0) rf[rd5[3:0]] <= wr_val;
            pc <= next_pc;
          end
        end
        default: begin // S_LOAD
          if (drvalid) begin
            if (ld_rd != 4'd0) rf[ld_rd] <= ld_val;
            pc    <= pc + 32'd4;
            state <= S_RUN;
          end
        end
      endcase
    end
  end

endmodule

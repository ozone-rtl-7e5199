// ozone_core_model: behavioural stand-in for the core that runs Ozone code.
//
// Not synthesizable design content: it plays the part of the host core (whose
// design is outside the Ozone resource) in the end-to-end and workload tests. It drains its
// pipeline for a random number of cycles when asked to flush, then on core_start
// fetches the test instruction set (ozone_toy_isa_pkg) from ISPM_BASE + entry_pc
// through the Ozone fetch port, uses the Ozone register ports and the data port,
// and asks the branch predictor for every branch (a wrong prediction costs two
// bubble cycles). It raises core_done while executing HALT, freezes while
// core_halt is high and returns to idle on core_kill. Outside Ozone mode it can
// issue one normal-thread load (nt_req) and keeps asking to train the main
// predictor on every branch it executes.
module ozone_core_model
  import ozone_pkg::*;
  import ozone_toy_isa_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            ozone_mode,
  input  logic            flush_req,
  output logic            flush_done,
  input  logic            core_start,
  input  logic [14:0]     entry_pc,
  input  logic            core_halt,
  input  logic            core_kill,
  output logic            core_done,
  output logic            cf_req,
  output logic [63:0]     cf_addr,
  input  logic [63:0]     cf_rdata,
  output logic            cd_req,
  output logic            cd_we,
  output logic [7:0]      cd_be,
  output logic [63:0]     cd_addr,
  output logic [63:0]     cd_wdata,
  input  logic [63:0]     cd_rdata,
  output logic [RA_W-1:0] rf_ra1,
  input  logic [XLEN-1:0] rf_rd1,
  output logic [RA_W-1:0] rf_ra2,
  input  logic [XLEN-1:0] rf_rd2,
  output logic            rf_we,
  output logic [RA_W-1:0] rf_wa,
  output logic [XLEN-1:0] rf_wd,
  output logic            br_valid,
  output logic [63:0]     br_target,
  input  logic            pred_taken,
  output logic            main_upd_in,
  input  logic            nt_req,
  input  logic [63:0]     nt_addr,
  output logic            mispredict
);
  typedef enum logic [2:0] {C_IDLE, C_FETCH, C_EXEC, C_MEM, C_BUB1, C_BUB2, C_HALTED} cst_e;
  cst_e st;
  logic [63:0] pc, ir, next_pc_q;
  logic [3:0]  drain;
  op_e         op;
  logic [3:0]  rd, rs1, rs2;
  logic [63:0] imm_s;

  assign op    = op_e'(ir[63:56]);
  assign rd    = ir[55:52];
  assign rs1   = ir[51:48];
  assign rs2   = ir[47:44];
  assign imm_s = {{32{ir[31]}}, ir[31:0]};
  logic [127:0] prod;
  logic [63:0]  prod_hi;
  assign prod    = 128'(rf_rd1) * 128'(rf_rd2);
  assign prod_hi = prod[127:64];
  logic [63:0] ir_q;
  assign ir    = (st == C_EXEC) ? cf_rdata : ir_q;

  always_ff @(posedge clk) if (st == C_EXEC) ir_q <= cf_rdata;

  assign flush_done = flush_req && (drain == 0);

  always_comb begin
    cf_req = (st == C_FETCH) && !core_halt;
    cf_addr = pc;
    cd_req = 1'b0; cd_we = 1'b0; cd_be = 8'hFF; cd_addr = '0; cd_wdata = '0;
    rf_ra1 = rs1; rf_ra2 = rs2;
    rf_we = 1'b0; rf_wa = rd; rf_wd = '0;
    br_valid = 1'b0; br_target = pc + imm_s;
    core_done = 1'b0;
    if (st == C_IDLE && !ozone_mode && nt_req) begin
      cd_req = 1'b1; cd_addr = nt_addr;
    end
    if (st == C_EXEC && !core_halt) begin
      unique case (op)
        OP_LI:   begin rf_we = 1'b1; rf_wd = {32'd0, ir[31:0]}; end
        OP_ADD:  begin rf_we = 1'b1; rf_wd = rf_rd1 + rf_rd2; end
        OP_XOR:  begin rf_we = 1'b1; rf_wd = rf_rd1 ^ rf_rd2; end
        OP_SEQ:  begin rf_we = 1'b1; rf_wd = 64'(rf_rd1 == rf_rd2); end
        OP_CMOV: begin rf_we = (rf_rd1 != 0); rf_wd = rf_rd2; end
        OP_ADDI: begin rf_we = 1'b1; rf_wd = rf_rd1 + imm_s; end
        OP_SHLI: begin rf_we = 1'b1; rf_wd = rf_rd1 << ir[5:0]; end
        OP_SHRI: begin rf_we = 1'b1; rf_wd = rf_rd1 >> ir[5:0]; end
        OP_ANDI: begin rf_we = 1'b1; rf_wd = rf_rd1 & {32'd0, ir[31:0]}; end
        OP_AND:  begin rf_we = 1'b1; rf_wd = rf_rd1 & rf_rd2; end
        OP_SUB:  begin rf_we = 1'b1; rf_wd = rf_rd1 - rf_rd2; end
        OP_MUL:  begin rf_we = 1'b1; rf_wd = rf_rd1 * rf_rd2; end
        OP_MULHU: begin rf_we = 1'b1; rf_wd = prod_hi; end
        OP_SLTU: begin rf_we = 1'b1; rf_wd = 64'(rf_rd1 < rf_rd2); end
        OP_LD:   begin cd_req = 1'b1; cd_addr = rf_rd1 + imm_s; end
        OP_ST:   begin cd_req = 1'b1; cd_we = 1'b1; cd_addr = rf_rd1 + imm_s; cd_wdata = rf_rd2; end
        OP_BNE:  br_valid = 1'b1;
        OP_HALT: core_done = 1'b1;
        default: ;
      endcase
    end
    if (st == C_MEM && op == OP_LD && !core_halt) begin
      rf_we = 1'b1; rf_wd = cd_rdata;
    end
    main_upd_in = br_valid;
    mispredict  = br_valid && pred_taken && (rf_rd1 == rf_rd2);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= C_IDLE; pc <= '0; drain <= '0; next_pc_q <= '0;
    end else if (core_kill) begin
      st <= C_IDLE;
    end else if (core_start) begin
      st <= C_FETCH; pc <= ISPM_BASE + 64'(entry_pc);
    end else if (!core_halt) begin
      unique case (st)
        C_IDLE: begin
          if (!flush_req) drain <= 4'(1 + $urandom % 5);
          else if (drain != 0) drain <= drain - 1'b1;
        end
        C_FETCH: st <= C_EXEC;
        C_EXEC: begin
          unique case (op)
            OP_LD, OP_ST: begin st <= C_MEM; pc <= pc + 8; end
            OP_BNE: begin
              if (rf_rd1 != rf_rd2) begin
                st <= C_FETCH;
                pc <= br_target;
              end else if (pred_taken) begin
                st <= C_BUB1; pc <= pc + 8;      // squash the wrong-path fetch
              end else begin
                st <= C_FETCH; pc <= pc + 8;
              end
            end
            OP_HALT: st <= C_HALTED;
            default: begin st <= C_FETCH; pc <= pc + 8; end
          endcase
        end
        C_MEM:  st <= C_FETCH;
        C_BUB1: st <= C_BUB2;
        C_BUB2: st <= C_FETCH;
        default: ;
      endcase
    end
  end
endmodule

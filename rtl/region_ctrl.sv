// region_ctrl: tightly coupled controller of one vCGRA region.
//
// The controller turns host commands into the fine-grained control of the region's PEs
// and keeps the region's metadata (state, availability, kernel identifier, region
// identifier). Its command FSM has the states IDLE, CONFIGURED, EXECUTING, DONE, HALTED
// and SNAPSHOT. A command is accepted only in the state where it is valid; otherwise the
// sticky `illegal` flag is raised (cleared by the next accepted command).
//
//   IDLE       --CONFIGURE--> (load) CONFIGURED
//   CONFIGURED --EXECUTE-->   EXECUTING
//   EXECUTING  --kernel finished--> DONE     EXECUTING --HALT--> (drain) HALTED
//   HALTED     --SNAPSHOT-->  SNAPSHOT (save) --> HALTED
//   HALTED     --EXECUTE-->   EXECUTING (resume)
//   HALTED     --RESET-->     IDLE           DONE --RESET--> IDLE
//
// Data movement is done by a small copy engine that reads one word at a time (from memory
// or from the PEs' state read-back bus) and writes it to memory, to the configuration bus
// or to the state-restore bus, one memory request outstanding at a time.
//   CONFIGURE (cfg_addr, snap_addr, restore, kernel id): clear the PEs' pipeline state;
//     read the header word at cfg_addr ([15:0] = number of TCDM words); copy
//     NPE*CFG_WORDS configuration words from cfg_addr+1 (PE-major) into the PEs; copy the
//     TCDM image that follows into the TCDM. With `restore` set (stateful migration),
//     then write NPE*STATE_WORDS saved state words from snap_addr into the PEs and reload
//     the TCDM from snap_addr + NPE*STATE_WORDS.
//   HALT: stop the PEs (`pe_run` low) and wait until the LS PEs have no request in flight.
//   SNAPSHOT: write every PE's state-critical words to snap_addr and the TCDM contents
//     after them, in the same layout a restore reads.
// While the engine works, `busy` is high and every command is refused as illegal.
// `available` is high in IDLE: the region is free for the hypervisor.
//
// From the paper: the command set, the states and the transitions printed in its FSM
// figure, the illegal-command flag, configuration from a physical address, snapshots
// of AGU progression registers, FC tokens and previous results to a global-memory
// buffer, TCDM reloaded from the snapshot in stateful migration. Own choices: accepting
// EXECUTE in HALTED as the resume command, RESET in HALTED (to release a region whose
// kernel migrated away), restore as an option of CONFIGURE, the memory layouts, and
// finishing a kernel when every enabled LS PE has finished, and letting the PEs run on in
// DONE so tokens already in flight drain (the finished AGUs issue no new accesses).
// Tool note: the tag and write flag of a memory response are not read, as the engine
// keeps only one request outstanding.
module region_ctrl
  import mestra_pkg::*;
#(
  parameter int unsigned NPE       = 15,
  parameter int unsigned REGION_ID = 0
) (
  input  logic              clk,
  input  logic              rst_n,
  // command interface (from the FFA register file)
  input  logic              cmd_valid,
  input  cmd_e              cmd,
  input  logic [ADDR_W-1:0] arg_cfg_addr,
  input  logic [ADDR_W-1:0] arg_snap_addr,
  input  logic              arg_restore,
  input  logic [15:0]       arg_kernel_id,
  // metadata and status
  output rstate_e           state,
  output logic              busy,
  output logic              illegal,
  output logic              available,
  output logic [15:0]       kernel_id,
  output logic [3:0]        region_id,
  // PE control
  output logic              pe_clear,
  output logic              pe_run,
  output logic              cfg_we,
  output logic [3:0]        cfg_pe,
  output logic [3:0]        cfg_addr,
  output logic [DATA_W-1:0] cfg_wdata,
  output logic [3:0]        st_pe,
  output logic [2:0]        st_addr,
  input  logic [DATA_W-1:0] st_rdata,
  output logic              st_we,
  output logic [DATA_W-1:0] st_wdata,
  input  logic              ls_done,
  input  logic              ls_quiet,
  // memory master
  output logic              req_valid,
  input  logic              req_ready,
  output mem_req_t          req,
  input  logic              rsp_valid,
  input  mem_rsp_t          rsp
);

  typedef enum logic [3:0] {
    PH_IDLE, PH_HDR, PH_CFG, PH_TINIT, PH_RSTATE, PH_RTCDM, PH_SSTATE, PH_STCDM, PH_HALTING
  } phase_e;

  typedef enum logic [1:0] {S_RD, S_RDW, S_WR, S_WRW} step_e;

  localparam int unsigned NCFG = NPE * CFG_WORDS;
  localparam int unsigned NST  = NPE * STATE_WORDS;

  rstate_e           state_q;
  phase_e            phase_q;
  step_e             step_q;
  logic              illegal_q, restore_q;
  logic [15:0]       kid_q;
  logic [ADDR_W-1:0] cfg_base_q, snap_base_q;
  logic [15:0]       tlen_q;
  logic [15:0]       idx_q;
  logic [DATA_W-1:0] data_q;

  // ---------------- per-phase copy parameters ----------------
  logic [15:0]       n_words;
  logic              src_mem, dst_mem;
  logic [ADDR_W-1:0] src_addr, dst_addr;

  always_comb begin
    n_words  = '0;
    src_mem  = 1'b1;
    dst_mem  = 1'b0;
    src_addr = '0;
    dst_addr = '0;
    unique case (phase_q)
      PH_HDR:    begin n_words = 16'd1;       src_addr = cfg_base_q; end
      PH_CFG:    begin n_words = 16'(NCFG);   src_addr = cfg_base_q + 1 + ADDR_W'(idx_q); end
      PH_TINIT:  begin n_words = tlen_q;      src_addr = cfg_base_q + 1 + NCFG + ADDR_W'(idx_q);
                       dst_mem = 1'b1;        dst_addr = (ADDR_W'(1) << TCDM_SEL_BIT) | ADDR_W'(idx_q); end
      PH_RSTATE: begin n_words = 16'(NST);    src_addr = snap_base_q + ADDR_W'(idx_q); end
      PH_RTCDM:  begin n_words = tlen_q;      src_addr = snap_base_q + NST + ADDR_W'(idx_q);
                       dst_mem = 1'b1;        dst_addr = (ADDR_W'(1) << TCDM_SEL_BIT) | ADDR_W'(idx_q); end
      PH_SSTATE: begin n_words = 16'(NST);    src_mem = 1'b0;
                       dst_mem = 1'b1;        dst_addr = snap_base_q + ADDR_W'(idx_q); end
      PH_STCDM:  begin n_words = tlen_q;      src_addr = (ADDR_W'(1) << TCDM_SEL_BIT) | ADDR_W'(idx_q);
                       dst_mem = 1'b1;        dst_addr = snap_base_q + NST + ADDR_W'(idx_q); end
      default: ;
    endcase
  end

  logic copying, phase_end, wr_now;
  assign copying   = !(phase_q inside {PH_IDLE, PH_HALTING});
  assign phase_end = copying && step_q == S_RD && idx_q == n_words;
  assign wr_now    = copying && step_q == S_WR && !dst_mem;   // bus write this cycle

  // memory requests of the copy engine
  always_comb begin
    req_valid = 1'b0;
    req       = '0;
    if (copying && step_q == S_RD && !phase_end && src_mem) begin
      req_valid = 1'b1;
      req.addr  = src_addr;
    end else if (copying && step_q == S_WR && dst_mem) begin
      req_valid = 1'b1;
      req.we    = 1'b1;
      req.addr  = dst_addr;
      req.wdata = data_q;
    end
  end

  // PE buses
  always_comb begin
    cfg_we    = wr_now && phase_q == PH_CFG;
    cfg_pe    = 4'(idx_q / CFG_WORDS);
    cfg_addr  = 4'(idx_q % CFG_WORDS);
    cfg_wdata = data_q;
    st_we     = wr_now && phase_q == PH_RSTATE;
    st_pe     = 4'(idx_q / STATE_WORDS);
    st_addr   = 3'(idx_q % STATE_WORDS);
    st_wdata  = data_q;
  end

  // ---------------- command acceptance ----------------
  logic legal;
  always_comb begin
    legal = 1'b0;
    if (phase_q == PH_IDLE) begin
      unique case (state_q)
        RS_IDLE:       legal = (cmd == CMD_CONFIGURE);
        RS_CONFIGURED: legal = (cmd == CMD_EXECUTE);
        RS_EXECUTING:  legal = (cmd == CMD_HALT);
        RS_HALTED:     legal = (cmd inside {CMD_SNAPSHOT, CMD_EXECUTE, CMD_RESET});
        RS_DONE:       legal = (cmd == CMD_RESET);
        default:       legal = 1'b0;
      endcase
    end
  end

  assign pe_clear = cmd_valid && legal && (cmd inside {CMD_CONFIGURE, CMD_RESET});

  function automatic phase_e next_phase(input phase_e p, input logic restore, input logic [15:0] tl);
    unique case (p)
      PH_HDR:    return PH_CFG;
      PH_CFG:    return (tl != 0) ? PH_TINIT : (restore ? PH_RSTATE : PH_IDLE);
      PH_TINIT:  return restore ? PH_RSTATE : PH_IDLE;
      PH_RSTATE: return (restore && tl != 0) ? PH_RTCDM : PH_IDLE;
      PH_SSTATE: return (tl != 0) ? PH_STCDM : PH_IDLE;
      default:   return PH_IDLE;
    endcase
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q     <= RS_IDLE;
      phase_q     <= PH_IDLE;
      step_q      <= S_RD;
      illegal_q   <= 1'b0;
      restore_q   <= 1'b0;
      kid_q       <= '0;
      cfg_base_q  <= '0;
      snap_base_q <= '0;
      tlen_q      <= '0;
      idx_q       <= '0;
      data_q      <= '0;
    end else begin
      // host commands
      if (cmd_valid) begin
        illegal_q <= !legal;
        if (legal) begin
          unique case (cmd)
            CMD_CONFIGURE: begin
              cfg_base_q  <= arg_cfg_addr;
              snap_base_q <= arg_snap_addr;
              restore_q   <= arg_restore;
              kid_q       <= arg_kernel_id;
              phase_q     <= PH_HDR;
              step_q      <= S_RD;
              idx_q       <= '0;
            end
            CMD_EXECUTE:  state_q <= RS_EXECUTING;
            CMD_HALT:     phase_q <= PH_HALTING;
            CMD_SNAPSHOT: begin
              state_q     <= RS_SNAPSHOT;
              snap_base_q <= arg_snap_addr;
              phase_q     <= PH_SSTATE;
              step_q      <= S_RD;
              idx_q       <= '0;
            end
            CMD_RESET:    state_q <= RS_IDLE;
            default: ;
          endcase
        end
      end

      // kernel completion
      if (state_q == RS_EXECUTING && phase_q == PH_IDLE && ls_done && !(cmd_valid && legal))
        state_q <= RS_DONE;

      // halt drain
      if (phase_q == PH_HALTING && ls_quiet) begin
        phase_q <= PH_IDLE;
        state_q <= RS_HALTED;
      end

      // copy engine
      if (copying) begin
        unique case (step_q)
          S_RD: begin
            if (phase_end) begin
              phase_q <= next_phase(phase_q, restore_q, tlen_q);
              idx_q   <= '0;
              if (next_phase(phase_q, restore_q, tlen_q) == PH_IDLE)
                state_q <= (phase_q inside {PH_SSTATE, PH_STCDM}) ? RS_HALTED : RS_CONFIGURED;
            end else if (!src_mem) begin
              data_q <= st_rdata;
              step_q <= S_WR;
            end else if (req_ready) begin
              step_q <= S_RDW;
            end
          end
          S_RDW: begin
            if (rsp_valid) begin
              data_q <= rsp.rdata;
              step_q <= S_WR;
            end
          end
          S_WR: begin
            if (!dst_mem) begin
              if (phase_q == PH_HDR) tlen_q <= data_q[15:0];
              idx_q  <= idx_q + 16'd1;
              step_q <= S_RD;
            end else if (req_ready) begin
              step_q <= S_WRW;
            end
          end
          S_WRW: begin
            if (rsp_valid) begin
              idx_q  <= idx_q + 16'd1;
              step_q <= S_RD;
            end
          end
          default: step_q <= S_RD;
        endcase
      end
    end
  end

  assign state     = state_q;
  assign busy      = (phase_q != PH_IDLE);
  assign illegal   = illegal_q;
  assign available = (state_q == RS_IDLE) && (phase_q == PH_IDLE);
  assign kernel_id = kid_q;
  assign region_id = 4'(REGION_ID);
  // PEs keep running in DONE: a region whose LS PEs only load is done when its loads are,
  // while its last tokens may still be on their way to a merged neighbour region.
  assign pe_run    = ((state_q == RS_EXECUTING) || (state_q == RS_DONE)) && (phase_q == PH_IDLE);

  // PEs must not run while the copy engine touches their state.
  assert property (@(posedge clk) disable iff (!rst_n) pe_run |-> !copying)
    else $error("region_ctrl: PEs running during a copy");

endmodule

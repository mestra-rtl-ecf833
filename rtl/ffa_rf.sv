// ffa_rf: host-visible register file of one vCGRA region (FFA-RF command interface).
//
// The host (through the shell) writes the command arguments and then the command
// register; writing the command register issues the command to the region's controller
// as a one-cycle pulse with the arguments alongside. Status registers read the
// controller's metadata. Reads are combinational; writes take effect at the clock edge.
//
//   0 CMD        W: command code (mestra_pkg::cmd_e), issues it; R: last command written
//   1 CFG_ADDR   RW: word address of the configuration image in global memory
//   2 SNAP_ADDR  RW: word address of the snapshot buffer in global memory
//   3 KERNEL     RW: [15:0] kernel identifier, [16] restore from snapshot at CONFIGURE
//   4 STATUS     R:  [2:0] state, [3] busy, [4] illegal command, [5] available,
//                    [11:8] region identifier, [31:16] kernel identifier
//   5 PROGRESS   R:  stores committed by the region's LS PEs (iteration progress)
//
// The paper gives the interface's role (command passing for CONFIGURE, EXECUTE, HALT and
// SNAPSHOT, status reporting to the host); the register map is this design's own.
module ffa_rf
  import mestra_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // host register access
  input  logic              h_valid,
  input  logic              h_we,
  input  logic [3:0]        h_addr,
  input  logic [DATA_W-1:0] h_wdata,
  output logic [DATA_W-1:0] h_rdata,
  // to the controller
  output logic              cmd_valid,
  output cmd_e              cmd,
  output logic [ADDR_W-1:0] arg_cfg_addr,
  output logic [ADDR_W-1:0] arg_snap_addr,
  output logic              arg_restore,
  output logic [15:0]       arg_kernel_id,
  // from the controller and the PEs
  input  rstate_e           state,
  input  logic              busy,
  input  logic              illegal,
  input  logic              available,
  input  logic [3:0]        region_id,
  input  logic [15:0]       kernel_id,
  input  logic [DATA_W-1:0] progress
);

  logic [2:0]        cmd_q;
  logic [ADDR_W-1:0] cfg_q, snap_q;
  logic [16:0]       kern_q;
  logic              wr;

  assign wr = h_valid && h_we;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cmd_q  <= '0;
      cfg_q  <= '0;
      snap_q <= '0;
      kern_q <= '0;
    end else if (wr) begin
      unique case (h_addr)
        4'd0: cmd_q  <= h_wdata[2:0];
        4'd1: cfg_q  <= h_wdata;
        4'd2: snap_q <= h_wdata;
        4'd3: kern_q <= h_wdata[16:0];
        default: ;
      endcase
    end
  end

  // The command pulse carries the arguments as they stand when the command is written.
  assign cmd_valid     = wr && h_addr == 4'd0;
  assign cmd           = cmd_e'(h_wdata[2:0]);
  assign arg_cfg_addr  = cfg_q;
  assign arg_snap_addr = snap_q;
  assign arg_restore   = kern_q[16];
  assign arg_kernel_id = kern_q[15:0];

  always_comb begin
    unique case (h_addr)
      4'd0:    h_rdata = DATA_W'(cmd_q);
      4'd1:    h_rdata = cfg_q;
      4'd2:    h_rdata = snap_q;
      4'd3:    h_rdata = DATA_W'(kern_q);
      4'd4:    h_rdata = {kernel_id, 4'd0, region_id, 2'd0, available, illegal, busy, state};
      4'd5:    h_rdata = progress;
      default: h_rdata = '0;
    endcase
  end

endmodule

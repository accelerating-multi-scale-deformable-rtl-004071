// danmp_dimm: one DANMP DIMM - the top of the near-memory MSDAttn accelerator.
//
// The buffer chip receives 83-bit instructions from the host memory controller
// (inst_valid/inst_ready). An instruction in DRAM mode (Mode_Se = 0) is not an
// NMP instruction: it leaves at once on dram_mode_valid/dram_mode_inst for the
// ordinary DDR path, which is outside this RTL. An NMP-mode instruction goes
// to the Rank-NMP of the rank named by the RA bit of Daddr. Each rank has
// NBG bank-groups with a BG-NMP each, and each bank-group has four banks of
// which banks 0 and 2 carry a Bank-NMP. The two Rank-NMP output buffers are
// merged round-robin onto out_valid/out_ready/out.
//
// The DRAM arrays themselves are not logic of this design: every bank's
// command (dram_cmd) and read-data (dram_rd_valid/dram_rd_data, tCL after RD)
// signals are ports, indexed [rank][bank-group][bank]. idle is high when no
// instruction is queued or executing anywhere in the DIMM.
//
// Default sizes are the evaluated configuration (2 ranks x 8 bank-groups x 4
// banks per DIMM, PEs in half of the banks). Rank selection in front of the two
// Rank-NMPs and the round-robin output merge are this design's choices.
module danmp_dimm
  import danmp_pkg::*;
#(
  parameter int NRANK = 2,
  parameter int NBG   = 8,
  parameter int TRCD  = 40,
  parameter int TRP   = 40,
  parameter int TRAS  = 76,
  parameter int TRC   = 116,
  parameter int TCCD  = 12,
  localparam int NBANK = 4
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   inst_valid,
  output logic                   inst_ready,
  input  nmp_inst_t              inst,
  output logic                   dram_mode_valid,
  output nmp_inst_t              dram_mode_inst,
  output logic                   out_valid,
  input  logic                   out_ready,
  output result_t                out,
  output logic                   idle,
  output dram_cmd_t              dram_cmd      [NRANK][NBG][NBANK],
  input  logic                   dram_rd_valid [NRANK][NBG][NBANK],
  input  logic [LANES-1:0][31:0] dram_rd_data  [NRANK][NBG][NBANK]
);
  localparam int RW = (NRANK > 1) ? $clog2(NRANK) : 1;

  logic    r_inst_valid [NRANK];
  logic    r_inst_ready [NRANK];
  logic    r_out_valid  [NRANK];
  logic    r_out_ready  [NRANK];
  result_t r_out        [NRANK];
  logic    r_idle       [NRANK];
  logic [RW-1:0] sel_rank, rr;

  assign sel_rank        = RW'(daddr_ra(inst.daddr));
  assign dram_mode_valid = inst_valid && (inst.mode_se == MODE_DRAM);
  assign dram_mode_inst  = inst;
  assign inst_ready      = (inst.mode_se == MODE_DRAM) ? 1'b1 : r_inst_ready[sel_rank];

  for (genvar r = 0; r < NRANK; r++) begin : g_rank
    logic                   bg_inst_valid [NBG];
    logic                   bg_inst_ready [NBG];
    nmp_inst_t              bg_inst;
    logic [3:0]             bg_psum_tag;
    logic [2:0]             bg_psum_burst;
    logic [LANES-1:0][31:0] bg_psum_data  [NBG];
    logic                   bg_idle       [NBG];

    assign r_inst_valid[r] = inst_valid && (inst.mode_se == MODE_NMP) && (sel_rank == RW'(r));

    rank_nmp #(.NBG(NBG), .RANK_ID(1'(r))) u_rank (
      .clk, .rst_n, .inst_valid(r_inst_valid[r]), .inst_ready(r_inst_ready[r]), .inst,
      .bg_inst_valid, .bg_inst_ready, .bg_inst, .bg_psum_tag, .bg_psum_burst, .bg_psum_data,
      .bg_idle, .out_valid(r_out_valid[r]), .out_ready(r_out_ready[r]), .out(r_out[r]),
      .idle(r_idle[r]));

    for (genvar g = 0; g < NBG; g++) begin : g_bg
      bg_nmp #(.TRCD(TRCD), .TRP(TRP), .TRAS(TRAS), .TRC(TRC), .TCCD(TCCD)) u_bg (
        .clk, .rst_n, .inst_valid(bg_inst_valid[g]), .inst_ready(bg_inst_ready[g]), .inst(bg_inst),
        .dram_cmd(dram_cmd[r][g]), .dram_rd_valid(dram_rd_valid[r][g]), .dram_rd_data(dram_rd_data[r][g]),
        .psum_rd_tag(bg_psum_tag), .psum_rd_burst(bg_psum_burst), .psum_rd_data(bg_psum_data[g]),
        .idle(bg_idle[g]));
    end
  end

  // round-robin merge of the rank output buffers
  logic [RW-1:0] grant;
  logic          any;
  always_comb begin
    grant = rr;
    any   = 1'b0;
    for (int i = NRANK - 1; i >= 0; i--) begin
      if (r_out_valid[RW'((int'(rr) + i) % NRANK)]) begin
        grant = RW'((int'(rr) + i) % NRANK);
        any   = 1'b1;
      end
    end
    for (int r = 0; r < NRANK; r++) r_out_ready[r] = out_ready && any && (grant == RW'(r));
  end
  assign out_valid = any;
  assign out       = r_out[grant];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rr <= '0;
    else if (out_valid && out_ready) rr <= RW'((int'(grant) + 1) % NRANK);
  end

  always_comb begin
    idle = 1'b1;
    for (int r = 0; r < NRANK; r++) idle &= r_idle[r];
  end
endmodule

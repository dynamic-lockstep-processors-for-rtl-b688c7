// dls_system: dynamic lockstep system with N_CORES processing blocks.
//
// Each processing block (a soft core, outside this RTL) connects through one
// Avalon master port core_req/core_rsp. An address decoder per block routes
// its accesses to:
//   0x0000_0000  system_RAM, shared through a round-robin arbiter
//   0x0001_0000  the block's plsb port of the lock-step monitor (safe code
//                and data in ls_RAM at 0x0001_0000, ls_I/O at 0x0001_8000)
//   0x0002_0000  LOCKSTEP_SYNC_ADDRESS on the block's psyb port
//   0x0002_0100  the monitor's control bus, shared through a second arbiter
// The monitor's voted safe bus lsb is decoded once more into ls_RAM and the
// ls_I/O port, which leaves the top because the paper gives that device no
// function. ls_RAM is filled through the load port before safe processing is
// first requested; with LSRAM_TMR set it is held in three copies and read
// through a bitwise vote, ls_ram_corrected marking a read that masked a
// difference (the paper offers TMR only as a possibility, so it is off by
// default). irq goes to all blocks; error is the availability error.
// system_fsm tracks the system state (boot, normal, synchronise, safe
// processing, safe state) from the boot verdict (boot_ok/boot_nok, from boot
// checks outside this design) and the monitor's signals.
// The structure (three blocks, arbitrated system_RAM, monitor with one port
// per block, ls_RAM and ls_I/O on lsb) is the paper's; the address map,
// the shared control bus and the load port are this design's.
// Lint reports combinational loops through the request/response arrays
// (dec_req/dec_rsp, sys_rsp, ctl_rsp, lsb_rsp). They are not real: every
// response is a function of the request and of registers only (a slave's
// waitrequest depends on its request's read flag, never the other way), but
// each struct array is one signal to the linter, so the paths appear closed.
module dls_system
  import lsm_pkg::*;
#(
  parameter int unsigned N_CORES              = 3,
  parameter int unsigned DEFAULT_PARTICIPANTS = 3,
  parameter int unsigned SYSRAM_WORDS         = 4096,
  parameter int unsigned LSRAM_WORDS          = 4096,
  parameter int unsigned SYNC_TIMEOUT         = 1024,
  parameter int unsigned LOCKSTEP_TIMEOUT     = 65536,
  parameter bit          LSRAM_TMR            = 1'b0,
  localparam int unsigned LXW = $clog2(LSRAM_WORDS)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  av_req_t            core_req [N_CORES],
  output av_rsp_t            core_rsp [N_CORES],
  output logic               irq,
  input  logic               request_sp,
  output logic               error,
  output err_cause_t         error_cause,
  output logic               lockstep_processing,
  output logic [N_CORES-1:0] enabled,
  output logic [N_CORES-1:0] dissent,
  input  logic               boot_ok,
  input  logic               boot_nok,
  output sys_state_t         sys_state,
  output logic               safe_state,
  output logic [15:0]        nok_count,
  output av_req_t            ls_io_req,
  input  av_rsp_t            ls_io_rsp,
  input  logic               ls_load_we,
  input  logic [LXW-1:0]     ls_load_addr,
  input  logic [DW-1:0]      ls_load_data,
  output logic               ls_ram_corrected
);

  // Per-core decoder outputs: 0 system_RAM, 1 plsb, 2 psyb, 3 control.
  av_req_t dec_req [N_CORES][4];
  av_rsp_t dec_rsp [N_CORES][4];

  av_req_t sys_m_req [N_CORES], plsb_req [N_CORES], psyb_req [N_CORES], ctl_m_req [N_CORES];
  av_rsp_t sys_m_rsp [N_CORES], plsb_rsp [N_CORES], psyb_rsp [N_CORES], ctl_m_rsp [N_CORES];

  av_req_t sys_req, ctl_req, lsb_req, lsram_req;
  av_rsp_t sys_rsp, ctl_rsp, lsb_rsp, lsram_rsp;
  sync_state_t sync_state;
  av_req_t lsb_s_req [2];
  av_rsp_t lsb_s_rsp [2];

  for (genvar c = 0; c < N_CORES; c++) begin : g_core
    avalon_decoder #(.N_SLAVES(4)) u_dec (
      .m_req (core_req[c]),
      .m_rsp (core_rsp[c]),
      .s_req (dec_req[c]),
      .s_rsp (dec_rsp[c])
    );
    assign sys_m_req[c] = dec_req[c][0];
    assign plsb_req[c]  = dec_req[c][1];
    assign psyb_req[c]  = dec_req[c][2];
    assign ctl_m_req[c] = dec_req[c][3];
    assign dec_rsp[c][0] = sys_m_rsp[c];
    assign dec_rsp[c][1] = plsb_rsp[c];
    assign dec_rsp[c][2] = psyb_rsp[c];
    assign dec_rsp[c][3] = ctl_m_rsp[c];
  end

  arbiter #(.N_PORTS(N_CORES)) u_sys_arbiter (
    .clk   (clk),
    .rst_n (rst_n),
    .m_req (sys_m_req),
    .m_rsp (sys_m_rsp),
    .s_req (sys_req),
    .s_rsp (sys_rsp)
  );

  system_ram #(.WORDS(SYSRAM_WORDS)) u_system_ram (
    .clk   (clk),
    .rst_n (rst_n),
    .req   (sys_req),
    .rsp   (sys_rsp)
  );

  arbiter #(.N_PORTS(N_CORES)) u_ctrl_arbiter (
    .clk   (clk),
    .rst_n (rst_n),
    .m_req (ctl_m_req),
    .m_rsp (ctl_m_rsp),
    .s_req (ctl_req),
    .s_rsp (ctl_rsp)
  );

  lock_step_monitor #(
    .N_PORTS              (N_CORES),
    .DEFAULT_PARTICIPANTS (DEFAULT_PARTICIPANTS),
    .SYNC_TIMEOUT         (SYNC_TIMEOUT),
    .LOCKSTEP_TIMEOUT     (LOCKSTEP_TIMEOUT)
  ) u_lock_step_monitor (
    .clk                 (clk),
    .rst_n               (rst_n),
    .plsb_req            (plsb_req),
    .plsb_rsp            (plsb_rsp),
    .psyb_req            (psyb_req),
    .psyb_rsp            (psyb_rsp),
    .ctrl_req            (ctl_req),
    .ctrl_rsp            (ctl_rsp),
    .lsb_req             (lsb_req),
    .lsb_rsp             (lsb_rsp),
    .request_sp          (request_sp),
    .irq                 (irq),
    .error               (error),
    .error_cause         (error_cause),
    .lockstep_processing (lockstep_processing),
    .enabled             (enabled),
    .dissent             (dissent),
    .sync_state          (sync_state)
  );

  system_fsm u_system_fsm (
    .clk                 (clk),
    .rst_n               (rst_n),
    .boot_ok             (boot_ok),
    .boot_nok            (boot_nok),
    .sync_state          (sync_state),
    .lockstep_processing (lockstep_processing),
    .error               (error),
    .any_dissent         (|dissent),
    .sys_state           (sys_state),
    .safe_state          (safe_state),
    .nok_count           (nok_count)
  );

  avalon_decoder #(
    .N_SLAVES (2),
    .BASE     ({LSIO_BASE, LSRAM_BASE}),
    .MASK     ({LSIO_MASK, LSRAM_MASK})
  ) u_lsb_dec (
    .m_req (lsb_req),
    .m_rsp (lsb_rsp),
    .s_req (lsb_s_req),
    .s_rsp (lsb_s_rsp)
  );

  assign lsram_req    = lsb_s_req[0];
  assign ls_io_req    = lsb_s_req[1];
  assign lsb_s_rsp[0] = lsram_rsp;
  assign lsb_s_rsp[1] = ls_io_rsp;

  ls_ram #(.WORDS(LSRAM_WORDS), .TMR(LSRAM_TMR)) u_ls_ram (
    .clk       (clk),
    .rst_n     (rst_n),
    .req       (lsram_req),
    .rsp       (lsram_rsp),
    .load_we   (ls_load_we),
    .load_addr (ls_load_addr),
    .load_data (ls_load_data),
    .corrected (ls_ram_corrected)
  );

endmodule

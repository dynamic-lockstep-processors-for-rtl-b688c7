// Shared types and constants of the dynamic lockstep system.
//
// All buses in the system are a small subset of Avalon-MM: one transfer at a
// time, a master holds address/read/write/writedata/byteenable stable until
// the slave drops waitrequest; read data is valid in the cycle in which
// waitrequest is low. No pipelined reads, no bursts. Data paths are 32 bits
// wide, as on the soft cores the system is built for; addresses are byte
// addresses. The address map and the accept/reject codes of the sync read
// are this design's choice.
package lsm_pkg;

  localparam int unsigned AW = 32;  // byte address width
  localparam int unsigned DW = 32;  // data width

  typedef struct packed {
    logic [AW-1:0]   address;
    logic            read;
    logic            write;
    logic [DW-1:0]   writedata;
    logic [DW/8-1:0] byteenable;
  } av_req_t;

  typedef struct packed {
    logic [DW-1:0] readdata;
    logic          waitrequest;
  } av_rsp_t;

  localparam av_req_t AV_REQ_IDLE = '{default: '0};

  // Answer to a read of LOCKSTEP_SYNC_ADDRESS: the ISR only tests for zero.
  localparam logic [DW-1:0] SYNC_ACCEPT = 32'h0000_0001;
  localparam logic [DW-1:0] SYNC_REJECT = 32'h0000_0000;

  // States of the synchronizer, also watched by the observer.
  typedef enum logic [1:0] {
    SYNC_IDLE     = 2'd0,  // normal processing
    SYNC_COLLECT  = 2'd1,  // marshalling participants, sync reads stalled
    SYNC_LOCKSTEP = 2'd2   // safe processing in lockstep
  } sync_state_t;

  // States of the whole system (boot, normal and safe processing, safe state).
  typedef enum logic [2:0] {
    SYS_BOOT            = 3'd0,
    SYS_NORMAL          = 3'd1,
    SYS_SYNCHRONISE     = 3'd2,
    SYS_SAFE_PROCESSING = 3'd3,
    SYS_SAFE_STATE      = 3'd4
  } sys_state_t;

  // Causes of the availability error.
  typedef enum logic [1:0] {
    ERR_NONE        = 2'd0,
    ERR_SYNC_TIME   = 2'd1,  // not enough participants in time
    ERR_LS_TIME     = 2'd2,  // safe task did not finish in time
    ERR_NO_MAJORITY = 2'd3   // voter found no majority
  } err_cause_t;

  // Address map (byte addresses) of a processing block's Avalon master.
  localparam logic [AW-1:0] SYSRAM_BASE    = 32'h0000_0000;
  localparam logic [AW-1:0] SYSRAM_MASK    = 32'hFFFF_0000;
  localparam logic [AW-1:0] LSB_BASE       = 32'h0001_0000;  // plsb window
  localparam logic [AW-1:0] LSB_MASK       = 32'hFFFF_0000;
  localparam logic [AW-1:0] LSRAM_BASE     = 32'h0001_0000;  // inside lsb
  localparam logic [AW-1:0] LSRAM_MASK     = 32'hFFFF_8000;
  localparam logic [AW-1:0] LSIO_BASE      = 32'h0001_8000;  // inside lsb
  localparam logic [AW-1:0] LSIO_MASK      = 32'hFFFF_8000;
  localparam logic [AW-1:0] SYNC_ADDRESS   = 32'h0002_0000;  // LOCKSTEP_SYNC_ADDRESS
  localparam logic [AW-1:0] SYNC_MASK      = 32'hFFFF_FF00;
  localparam logic [AW-1:0] CTRL_BASE      = 32'h0002_0100;
  localparam logic [AW-1:0] CTRL_MASK      = 32'hFFFF_FF00;

  // Control-bus register word offsets (address bits [3:2]).
  localparam logic [1:0] REG_CTRL         = 2'd0;  // W: bit0 triggers safe processing
  localparam logic [1:0] REG_PARTICIPANTS = 2'd1;  // RW: number of participants
  localparam logic [1:0] REG_STATUS       = 2'd2;  // R: state, lockstep, error, irq, enabled

endpackage

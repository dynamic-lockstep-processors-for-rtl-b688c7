// system_fsm: state of the whole dynamic-lockstep system.
//
// Tracks the five system states of the concept and their printed transitions:
//   BOOT            --boot_ok-->   NORMAL         --boot_nok--> SAFE_STATE
//   NORMAL          --safep_req--> SYNCHRONISE    (monitor starts collecting)
//   SYNCHRONISE     --safep_start--> SAFE_PROCESSING (lockstep_processing)
//   SAFE_PROCESSING --safep_end-->  NORMAL         (lockstep_processing falls)
//   SAFE_PROCESSING --n processors nok--> SAFE_PROCESSING (counted)
//   NORMAL, SYNCHRONISE, SAFE_PROCESSING --enter_ss--> SAFE_STATE
// SAFE_STATE is permanent until reset. enter_ss is the monitor's availability
// error. The boot checks themselves are outside this design: their verdict
// arrives on boot_ok/boot_nok (boot_nok wins if both are set). In this design
// boot_ok leads to NORMAL, as the description of the state model says; its
// diagram can be read as drawing the arrow elsewhere. nok_count counts the
// cycles with at least one outvoted participant, which safe processing
// survives as long as a majority remains. safep_req is taken from the
// synchronizer leaving IDLE. All transitions are registered; state follows its
// inputs by one cycle.
module system_fsm
  import lsm_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        boot_ok,
  input  logic        boot_nok,
  input  sync_state_t sync_state,
  input  logic        lockstep_processing,
  input  logic        error,
  input  logic        any_dissent,
  output sys_state_t  sys_state,
  output logic        safe_state,
  output logic [15:0] nok_count
);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      sys_state <= SYS_BOOT;
      nok_count <= '0;
    end else begin
      unique case (sys_state)
        SYS_BOOT:
          if (boot_nok)     sys_state <= SYS_SAFE_STATE;
          else if (boot_ok) sys_state <= SYS_NORMAL;
        SYS_NORMAL:
          if (error)                          sys_state <= SYS_SAFE_STATE;
          else if (lockstep_processing)       sys_state <= SYS_SAFE_PROCESSING;
          else if (sync_state != SYNC_IDLE)   sys_state <= SYS_SYNCHRONISE;
        SYS_SYNCHRONISE:
          if (error)                          sys_state <= SYS_SAFE_STATE;
          else if (lockstep_processing)       sys_state <= SYS_SAFE_PROCESSING;
        SYS_SAFE_PROCESSING: begin
          if (error)                          sys_state <= SYS_SAFE_STATE;
          else if (!lockstep_processing)      sys_state <= SYS_NORMAL;
          if (any_dissent && nok_count != '1) nok_count <= nok_count + 16'd1;
        end
        default: sys_state <= SYS_SAFE_STATE;
      endcase
    end
  end

  assign safe_state = (sys_state == SYS_SAFE_STATE);

endmodule

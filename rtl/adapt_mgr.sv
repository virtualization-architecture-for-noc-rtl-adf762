// adapt_mgr: adaptation management (global manager decisions).
//
// Follows the decision flow for every task of an application request:
//  1. Is the requested function configured in some region?
//     yes -> PEaaS: a PE of that function running no task gets it on slot 0;
//            otherwise a PE of that function that is not yet virtualized
//            (a free slot) gets it: its second local port is enabled
//            ("enable the virtualization") and the task takes that slot;
//            if there is neither, go to 2.
//     no  -> 2.
//  2. PRRaaS: is there an unconfigured or idle (no task) region? yes ->
//     configure the requested function in it, wait for the reconfiguration
//     to end, and give the task slot 0. no -> back to 1 and try again each
//     cycle (a task finishing frees resources).
//  3. Assign the task (asg_valid pulse, cfg_task_* sets the NI's
//     task_k_status). After the task flagged req_last, app_go pulses:
//     "perform the application".
// The flow is the paper's; it runs there as software on a global-manager
// processor. Choices of this design: lowest PE index wins, unconfigured
// regions are taken before idle ones, finished tasks are reported on rel_*
// (accepted while not assigning), which clears task_k_status.
module adapt_mgr
  import vnoc_pkg::*;
#(
  parameter int NPE = 5,
  localparam int PW = (NPE > 1) ? $clog2(NPE) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // application requests, one task at a time
  input  logic              req_valid,
  output logic              req_ready,
  input  func_e             req_func,
  input  logic              req_last,
  // assignment of the task
  output logic              asg_valid,
  output logic [PW-1:0]     asg_pe,
  output logic              asg_slot,
  output logic              app_go,
  // task finished
  input  logic              rel_valid,
  output logic              rel_ready,
  input  logic [PW-1:0]     rel_pe,
  input  logic              rel_slot,
  // commands to the tiles
  output logic              cfg_task_valid,
  output logic [PW-1:0]     cfg_task_pe,
  output logic              cfg_task_slot,
  output logic              cfg_task_on,
  output logic              cfg_fn_valid,
  output logic [PW-1:0]     cfg_fn_pe,
  output func_e             cfg_fn,
  // state of the regions
  input  func_e [NPE-1:0]   pe_func,
  input  logic  [NPE-1:0]   pe_cfg_busy,
  // observation
  output logic              waiting,
  output logic              virt_enable,
  output logic [1:0]        pe_task [NPE]
);
  typedef enum logic [1:0] {M_IDLE, M_DECIDE, M_RECONF, M_ASSIGN} m_e;

  m_e            state;
  func_e         f;
  logic          last;
  logic [PW-1:0] tgt;
  logic          tgt_slot;
  logic          rcfg_seen;

  // decision of the flow for the current task (combinational)
  logic          configured, have_idle, have_free, have_prr, prr_unconf;
  logic [PW-1:0] idle_pe, free_pe, prr_pe_i;
  logic          free_slot;

  always_comb begin
    configured = 1'b0; have_idle = 1'b0; have_free = 1'b0; have_prr = 1'b0;
    prr_unconf = 1'b0;
    idle_pe = '0; free_pe = '0; prr_pe_i = '0; free_slot = 1'b0;
    for (int p = NPE - 1; p >= 0; p--) begin
      if (pe_func[p] == f) begin
        configured = 1'b1;
        if (pe_task[p] == 2'b00) begin
          have_idle = 1'b1; idle_pe = PW'(p);
        end
        if (pe_task[p] != 2'b11) begin
          have_free = 1'b1; free_pe = PW'(p); free_slot = pe_task[p][0];
        end
      end
    end
    // PRRaaS candidates: unconfigured first, then idle, lowest index
    for (int p = NPE - 1; p >= 0; p--) begin
      if (!pe_cfg_busy[p] && pe_task[p] == 2'b00 && pe_func[p] != FN_NONE && !prr_unconf) begin
        have_prr = 1'b1; prr_pe_i = PW'(p);
      end
    end
    for (int p = NPE - 1; p >= 0; p--) begin
      if (!pe_cfg_busy[p] && pe_task[p] == 2'b00 && pe_func[p] == FN_NONE) begin
        have_prr = 1'b1; prr_unconf = 1'b1; prr_pe_i = PW'(p);
      end
    end
  end

  assign req_ready = (state == M_IDLE);
  assign rel_ready = (state == M_IDLE) || (state == M_DECIDE);
  assign waiting   = (state == M_DECIDE) && !(rel_valid) && !have_free && !have_prr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state          <= M_IDLE;
      f              <= FN_NONE;
      last           <= 1'b0;
      tgt            <= '0;
      tgt_slot       <= 1'b0;
      rcfg_seen      <= 1'b0;
      asg_valid      <= 1'b0;
      asg_pe         <= '0;
      asg_slot       <= 1'b0;
      app_go         <= 1'b0;
      cfg_task_valid <= 1'b0;
      cfg_task_pe    <= '0;
      cfg_task_slot  <= 1'b0;
      cfg_task_on    <= 1'b0;
      cfg_fn_valid   <= 1'b0;
      cfg_fn_pe      <= '0;
      cfg_fn         <= FN_NONE;
      virt_enable    <= 1'b0;
      for (int p = 0; p < NPE; p++) pe_task[p] <= 2'b00;
    end else begin
      asg_valid      <= 1'b0;
      app_go         <= 1'b0;
      cfg_task_valid <= 1'b0;
      cfg_fn_valid   <= 1'b0;
      virt_enable    <= 1'b0;
      if (rel_valid && rel_ready) begin
        pe_task[rel_pe][rel_slot] <= 1'b0;
        cfg_task_valid <= 1'b1;
        cfg_task_pe    <= rel_pe;
        cfg_task_slot  <= rel_slot;
        cfg_task_on    <= 1'b0;
      end
      case (state)
        M_IDLE: if (req_valid) begin
          f     <= req_func;
          last  <= req_last;
          state <= M_DECIDE;
        end
        M_DECIDE: if (!rel_valid) begin
          if (configured && have_idle) begin
            tgt <= idle_pe; tgt_slot <= 1'b0; state <= M_ASSIGN;
          end else if (configured && have_free) begin
            tgt <= free_pe; tgt_slot <= free_slot; state <= M_ASSIGN;
            virt_enable <= 1'b1;
          end else if (have_prr) begin
            tgt          <= prr_pe_i;
            tgt_slot     <= 1'b0;
            cfg_fn_valid <= 1'b1;
            cfg_fn_pe    <= prr_pe_i;
            cfg_fn       <= f;
            rcfg_seen    <= 1'b0;
            state        <= M_RECONF;
          end
        end
        M_RECONF: begin
          if (pe_cfg_busy[tgt]) rcfg_seen <= 1'b1;
          else if (rcfg_seen && pe_func[tgt] == f) state <= M_ASSIGN;
        end
        default: begin   // M_ASSIGN
          pe_task[tgt][tgt_slot] <= 1'b1;
          cfg_task_valid <= 1'b1;
          cfg_task_pe    <= tgt;
          cfg_task_slot  <= tgt_slot;
          cfg_task_on    <= 1'b1;
          asg_valid      <= 1'b1;
          asg_pe         <= tgt;
          asg_slot       <= tgt_slot;
          app_go         <= last;
          state          <= M_IDLE;
        end
      endcase
    end
  end

  a_one_cmd: assert property (@(posedge clk) disable iff (!rst_n)
    !(rel_valid && rel_ready && state == M_ASSIGN));

endmodule

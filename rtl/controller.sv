// controller: pipeline control of the four-stage core.
//
// It decides, each cycle, which stages advance, which are held and which are flushed:
// - EX advances unless its unit is still busy (the divider, an LSU request not yet
//   granted or the second part of a misaligned access) or WB waits for load data.
// - ID holds its instruction when EX cannot take it, when it reads a register that a
//   load in EX has not delivered yet (load-use: one bubble, as there is no forwarding
//   from memory before WB), and when an mret or trap in ID would race a CSR write in EX.
// - A taken branch, resolved in EX, redirects fetch and kills the instruction in ID.
//   Jumps, traps and mret are resolved in ID, redirect fetch and issue nothing behind
//   them. Either redirect drops whatever IF hands over in that cycle.
// - dbg_halt_i stops new instructions from entering ID; the pipeline drains.
// The paper's controller is only a block in its pipeline figure; these rules are this
// design's, chosen for the four stages and two write ports the paper describes.
// Combinational.
module controller (
  // ID stage
  input  logic       id_valid_i,
  input  logic       rega_used_i, regb_used_i, regc_used_i,
  input  logic [4:0] rega_i, regb_i, regc_i,
  input  logic       id_redirect_i,    // jump, trap or mret in ID
  input  logic       id_sys_i,         // trap or mret in ID
  // EX stage
  input  logic       ex_valid_i,
  input  logic       ex_load_i,
  input  logic [4:0] ex_load_rd_i,
  input  logic       ex_csr_i,
  input  logic       ex_unit_ready_i,
  input  logic       branch_taken_i,   // already qualified with wb_wait_i
  // WB
  input  logic       wb_wait_i,
  input  logic       dbg_halt_i,
  // decisions
  output logic       load_use_o,
  output logic       ex_advance_o,     // EX register loads the next instruction
  output logic       id_issue_o,       // ID instruction moves to EX
  output logic       if_ready_o,       // IF/ID register may load
  output logic       redirect_o,       // fetch redirected (branch or ID redirect)
  output logic       redirect_ex_o,    // ... by the branch in EX
  output logic       pf_ready_o        // L0 buffer may hand over an instruction
);

  logic id_stall;

  always_comb begin
    load_use_o   = ex_valid_i && ex_load_i && ex_load_rd_i != 5'd0 &&
                   ((rega_used_i && rega_i == ex_load_rd_i) ||
                    (regb_used_i && regb_i == ex_load_rd_i) ||
                    (regc_used_i && regc_i == ex_load_rd_i));
    ex_advance_o = !ex_valid_i || (ex_unit_ready_i && !wb_wait_i);
    id_stall     = load_use_o || !ex_advance_o || (id_sys_i && ex_valid_i && ex_csr_i);
    id_issue_o   = id_valid_i && !id_stall && !branch_taken_i;
    redirect_ex_o = branch_taken_i;
    redirect_o   = branch_taken_i || (id_issue_o && id_redirect_i);
    if_ready_o   = !(id_valid_i && id_stall) || branch_taken_i;
    pf_ready_o   = if_ready_o && !dbg_halt_i;
  end

endmodule

// interface_register -- pipeline register between two systolic units.
//
// In the search cycle of its unit (load_i high) it captures the operations
// that the unit passes on (prop_i, rows of the operation propagation table)
// and the buses that go with them; they are presented to the next unit in the
// following cycle, for exactly one cycle. The element bus is fed through a
// two-way select: a push travels on with its own element, a push_first
// carries the element evicted from this unit's tail. The head-group bit
// (Highest) travels with the operation so that every unit sorts it under the
// same group order. Port names follow the unit's outputs in the paper
// (Push_id/data_o, Remove_id_o, Pop_o, Push_first_o, Highest_o); the one-cycle
// valid pulse is this design's own handshake. Reset clears the valid bit.
module interface_register
  import gsq_pkg::*;
#(
  parameter int unsigned IDW = 12,
  parameter int unsigned DW  = 16
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           load_i,
  input  op_flags_t      prop_i,
  input  logic [IDW-1:0] elem_id_i,    // travelling push element
  input  logic [DW-1:0]  elem_data_i,
  input  logic [IDW-1:0] tail_id_i,    // element evicted from the unit's tail
  input  logic [DW-1:0]  tail_data_i,
  input  logic [IDW-1:0] remove_id_i,
  input  logic           highest_i,
  output logic           op_valid_o,
  output op_flags_t      op_o,
  output logic [IDW-1:0] push_id_o,
  output logic [DW-1:0]  push_data_o,
  output logic [IDW-1:0] remove_id_o,
  output logic           highest_o
);

  logic           fire;
  logic [IDW-1:0] sel_id;
  logic [DW-1:0]  sel_data;

  always_comb begin
    fire     = load_i && (prop_i != '0);
    sel_id   = prop_i.push_first ? tail_id_i   : elem_id_i;
    sel_data = prop_i.push_first ? tail_data_i : elem_data_i;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      op_valid_o <= 1'b0;
      op_o       <= '0;
    end else begin
      op_valid_o <= fire;
      op_o       <= fire ? prop_i : '0;
    end
  end

  // Buses are only sampled together with a valid operation.
  always_ff @(posedge clk) begin
    if (fire) begin
      push_id_o   <= sel_id;
      push_data_o <= sel_data;
      remove_id_o <= remove_id_i;
      highest_o   <= highest_i;
    end
  end

  // push and push_first never travel together, nor do pop and remove.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
    end else if (load_i) begin
      a_one_insert: assert (!(prop_i.push && prop_i.push_first))
        else $error("interface_register: push and push_first together");
      a_one_delete: assert (!(prop_i.pop && prop_i.remove))
        else $error("interface_register: pop and remove together");
    end
  end

endmodule

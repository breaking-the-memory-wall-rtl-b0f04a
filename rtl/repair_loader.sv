// repair_loader: applies the DRAM defect list at power-up.
//
// After reset it reads N_ENTRIES 32-bit records from the NVM, one address
// per two cycles (read request, then data on the next cycle), and for
// every record whose valid bit is set pulses rep_we with the record's unit,
// slot, array and row. Every DRAM PHY compares rep_unit with its own id and
// loads the entry into its repair table. init_done rises after the last
// record and stays high until reset. The paper says defects are recorded in
// NVM before shipment and applied at power-up; the record format and the
// NVM read port are this design's choices.
module repair_loader
  import sunrise_pkg::*;
#(
  parameter int N_ENTRIES = 16,
  localparam int NAW = (N_ENTRIES > 1) ? $clog2(N_ENTRIES) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  output logic           nvm_rd_en,
  output logic [NAW-1:0] nvm_addr,
  input  logic [31:0]    nvm_rdata,
  output logic           rep_we,
  output logic [4:0]     rep_unit,
  output logic [1:0]     rep_slot,
  output logic [2:0]     rep_bank,
  output logic [20:0]    rep_row,
  output logic           init_done
);
  typedef enum logic [1:0] {S_READ, S_DATA, S_DONE} state_e;
  state_e state;
  logic [NAW:0] idx;
  repair_entry_t ent;

  assign ent       = repair_entry_t'(nvm_rdata);
  assign nvm_rd_en = (state == S_READ);
  assign nvm_addr  = idx[NAW-1:0];
  assign rep_we    = (state == S_DATA) && ent.valid;
  assign rep_unit  = ent.unit;
  assign rep_slot  = ent.slot;
  assign rep_bank  = ent.bank;
  assign rep_row   = ent.row;
  assign init_done = (state == S_DONE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_READ;
      idx   <= '0;
    end else begin
      unique case (state)
        S_READ: state <= S_DATA;
        S_DATA: begin
          idx   <= idx + 1'b1;
          state <= (idx == (NAW+1)'(N_ENTRIES - 1)) ? S_DONE : S_READ;
        end
        default: state <= S_DONE;
      endcase
    end
  end
endmodule

// cmd_parser: turns the configuration command stream of a unit into register
// writes for that unit's REG file.
//
// Every unit (IQE driver, AWG, digitizer) has one.  Commands arrive as 32-bit
// words, one per cycle when cmd_valid is high, and are shared by all units on
// the backplane; each parser keeps only those for its own slot.
//   header : [31:28] opcode  [27:20] slot (8'hFF = every slot)  [19:0] address
//   opcode 1 (single write): header, data
//   opcode 2 (burst write) : header, count N, then N data words written to
//                            address, address+1, ...
// An unknown opcode sets the sticky err flag and the word is dropped.
// reg_we is registered: the write appears the cycle after its data word.
// The paper only names the command parser; this word format is this design's
// own choice.
module cmd_parser #(
  parameter int unsigned SLOT_W = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [SLOT_W-1:0] slot_id,
  input  logic              cmd_valid,
  input  logic [31:0]       cmd_data,
  output logic              reg_we,
  output logic [19:0]       reg_addr,
  output logic [31:0]       reg_wdata,
  output logic              err
);
  typedef enum logic [1:0] {S_HDR, S_CNT, S_DATA} state_e;
  state_e      state;
  logic        mine;        // current command addressed to this slot
  logic [19:0] addr_q;
  logic [31:0] left_q;      // data words still expected

  wire [3:0]        op   = cmd_data[31:28];
  wire [SLOT_W-1:0] slot = cmd_data[20 +: SLOT_W];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_HDR; mine <= 1'b0; addr_q <= '0; left_q <= '0;
      reg_we <= 1'b0; reg_addr <= '0; reg_wdata <= '0; err <= 1'b0;
    end else begin
      reg_we <= 1'b0;
      if (cmd_valid) begin
        unique case (state)
          S_HDR: begin
            addr_q <= cmd_data[19:0];
            mine   <= (slot == slot_id) || (slot == {SLOT_W{1'b1}});
            if (op == 4'd1) begin
              left_q <= 32'd1; state <= S_DATA;
            end else if (op == 4'd2) begin
              state <= S_CNT;
            end else begin
              err <= 1'b1;
            end
          end
          S_CNT: begin
            left_q <= cmd_data;
            state  <= (cmd_data == 32'd0) ? S_HDR : S_DATA;
          end
          S_DATA: begin
            if (mine) begin
              reg_we    <= 1'b1;
              reg_addr  <= addr_q;
              reg_wdata <= cmd_data;
            end
            addr_q <= addr_q + 20'd1;
            left_q <= left_q - 32'd1;
            if (left_q == 32'd1) state <= S_HDR;
          end
          default: state <= S_HDR;
        endcase
      end
    end
  end

endmodule

// enu: extended neuromorphic unit, the coupling between the RISC-V CPU and
// the neuromorphic processor.
//
// Controller: while idle the ENU requests an instruction from the CPU's
// load-store unit (lsu_req_o); the LSU arbitrates between the ENU and the
// CPU's own accesses and hands over one neuromorphic instruction together
// with the values of its two source registers (instr_valid_i, which is
// only raised while lsu_req_o is high). Instruction decoder: the instruction
// must use the RISC-V custom-0 major opcode (7'b0001011); funct3 selects
//   0 NCFG   bus write  addr = rs1, data = rs2    (network parameter init)
//   1 NRD    bus read   addr = rs1, result = data
//   2 NEN    core enable: core c's enable register <- rs1[c], c = 0..19
//   3 NSTART network startup: TIMESTEPS <- rs1, then CTRL <- start
//   4 NSTAT  read the controller's network state register
// Extended instruction execution unit: turns the instruction into one or
// more transactions on the neuromorphic bus (request held until ack), then
// returns a one-cycle response (rsp_valid_o, rsp_data_o; rsp_err_o for an
// unknown instruction). The paper gives the three parts and the instruction
// classes; the encoding and field use are this design's.
module enu
  import snn_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // LSU side
  output logic        lsu_req_o,
  input  logic        instr_valid_i,
  input  logic [31:0] instr_i,
  input  logic [31:0] rs1_i,
  input  logic [31:0] rs2_i,
  output logic        rsp_valid_o,
  output logic [31:0] rsp_data_o,
  output logic        rsp_err_o,
  // neuromorphic bus
  output nbus_req_t   bus_o,
  input  nbus_rsp_t   bus_i
);
  localparam logic [6:0] OPC_CUSTOM0 = 7'b0001011;
  typedef enum logic [2:0] { F_NCFG = 3'd0, F_NRD = 3'd1, F_NEN = 3'd2,
                             F_NSTART = 3'd3, F_NSTAT = 3'd4 } funct_e;
  typedef enum logic [1:0] { IDLE, EXEC, RESP } st_e;

  st_e         st;
  funct_e      fn;
  logic [31:0] a1, a2, result;
  logic [4:0]  step;
  logic        err;

  assign lsu_req_o   = (st == IDLE);
  assign rsp_valid_o = (st == RESP);
  assign rsp_data_o  = result;
  assign rsp_err_o   = err;

  // execution unit: bus transaction of the current step
  logic last;
  always_comb begin
    bus_o = '0;
    last  = 1'b1;
    if (st == EXEC) begin
      bus_o.req = 1'b1;
      unique case (fn)
        F_NCFG:   begin bus_o.we = 1'b1; bus_o.addr = a1; bus_o.wdata = a2; end
        F_NRD:    begin bus_o.addr = a1; end
        F_NEN:    begin
                    bus_o.we    = 1'b1;
                    bus_o.addr  = {SEL_CORE, 16'd0, step, CR_EN};
                    bus_o.wdata = 32'(a1[step]);
                    last        = (step == 5'(N_CORES - 1));
                  end
        F_NSTART: begin
                    bus_o.we    = 1'b1;
                    bus_o.addr  = {SEL_CTRL, 24'd0, (step == 0) ? 4'd1 : 4'd0};
                    bus_o.wdata = (step == 0) ? a1 : 32'd1;
                    last        = (step == 5'd1);
                  end
        default:  begin bus_o.addr = {SEL_CTRL, 24'd0, 4'd3}; end   // NSTAT
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st     <= IDLE;
      fn     <= F_NCFG;
      a1     <= '0;
      a2     <= '0;
      result <= '0;
      step   <= '0;
      err    <= 1'b0;
    end else begin
      unique case (st)
        IDLE: if (instr_valid_i) begin       // instruction decoder
          a1     <= rs1_i;
          a2     <= rs2_i;
          step   <= '0;
          result <= '0;
          if (instr_i[6:0] == OPC_CUSTOM0 && instr_i[14:12] <= 3'd4) begin
            fn  <= funct_e'(instr_i[14:12]);
            err <= 1'b0;
            st  <= EXEC;
          end else begin
            err <= 1'b1;
            st  <= RESP;
          end
        end
        EXEC: if (bus_i.ack) begin
          if (!bus_o.we) result <= bus_i.rdata;
          if (last) st <= RESP;
          else      step <= step + 1'b1;
        end
        default: st <= IDLE;
      endcase
    end
  end

  // The LSU only hands over an instruction that was requested.
  always_ff @(posedge clk) if (rst_n) assert (!instr_valid_i || lsu_req_o);
endmodule

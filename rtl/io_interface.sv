// io_interface: FIFO/IO interface between the host and the accelerator.
//
// The host pushes 96-bit commands {op, target, addr[23:0], data[63:0]}
// (fsl_pkg::cmd_t) into an input FIFO and pops 64-bit answers from an
// output FIFO. Commands are executed one at a time, in order:
//   WRITE   one word into a memory or a configuration register;
//   READ    one word from the output buffer, the class HV memory, the
//           distance table or a configuration register; the answer is
//           pushed to the output FIFO (targets without a read port answer 0);
//   RUN_FE  start the feature extractor and wait until it is done;
//   RUN_HDC start the HDC engine (data[0] = train, data[14:8] = label),
//           wait, and push the result {correct, class, distance}:
//           bit 63 = label matched, bits 38:32 = class, 31:0 = distance.
// The command stream stalls (the input FIFO is not popped) while an engine
// runs and while the output FIFO is full. The paper names this interface
// (Fig. 2) and says the HDC sizes and precisions are set by an instruction
// set; the command format, register map and flow control here are this
// design's own. stall_cycles counts cycles in which a command waited.
//
// Timing: a WRITE takes effect one cycle after it reaches the FIFO head; a
// READ answers after two cycles plus any output-FIFO back-pressure.
module io_interface
  import fsl_pkg::*;
#(
  parameter int unsigned IN_DEPTH  = 16,
  parameter int unsigned OUT_DEPTH = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  // host side
  input  logic        host_in_valid,
  output logic        host_in_ready,
  input  cmd_t        host_in_data,
  output logic        host_out_valid,
  input  logic        host_out_ready,
  output logic [63:0] host_out_data,
  // configuration
  output fe_cfg_t     fe_cfg,
  output hdc_cfg_t    hdc_cfg,
  // engine control
  output logic        fe_start,
  input  logic        fe_done,
  output logic        hdc_start,
  output logic        hdc_train,
  output logic [6:0]  hdc_label,
  input  logic        hdc_done,
  input  logic [6:0]  hdc_class,
  input  logic [31:0] hdc_dist,
  input  logic        hdc_correct,
  // memory access, decoded
  output logic        wr_en,
  output logic        rd_en,
  output target_e     tgt,
  output logic [23:0] addr,
  output logic [63:0] wdata,
  input  logic [15:0] ob_rd_data,
  input  logic [15:0] cls_rd_data,
  input  logic [31:0] dt_rd_data,
  output logic [31:0] stall_cycles
);
  typedef enum logic [2:0] {S_CMD, S_RDWAIT, S_PUSH, S_WAIT_FE, S_WAIT_HDC} state_e;
  state_e state;

  logic        cmd_valid, cmd_pop;
  cmd_t        cmd;
  logic [96-1:0] cmd_bits;
  logic        ofifo_in_valid, ofifo_in_ready;
  logic [63:0] ofifo_in_data, answer;
  target_e     rd_tgt;
  logic [3:0]  cfg_addr;

  sync_fifo #(.WIDTH(96), .DEPTH(IN_DEPTH)) u_in (
    .clk, .rst_n, .in_valid(host_in_valid), .in_ready(host_in_ready), .in_data(host_in_data),
    .out_valid(cmd_valid), .out_ready(cmd_pop), .out_data(cmd_bits), .level()
  );
  assign cmd = cmd_t'(cmd_bits);

  sync_fifo #(.WIDTH(64), .DEPTH(OUT_DEPTH)) u_out (
    .clk, .rst_n, .in_valid(ofifo_in_valid), .in_ready(ofifo_in_ready), .in_data(ofifo_in_data),
    .out_valid(host_out_valid), .out_ready(host_out_ready), .out_data(host_out_data), .level()
  );

  // decode of the command at the FIFO head (only in S_CMD)
  always_comb begin
    tgt       = cmd.tgt;
    addr      = cmd.addr;
    wdata     = cmd.data;
    cmd_pop   = 1'b0;
    wr_en     = 1'b0;
    rd_en     = 1'b0;
    fe_start  = 1'b0;
    hdc_start = 1'b0;
    hdc_train = cmd.data[0];
    hdc_label = cmd.data[14:8];
    if (state == S_CMD && cmd_valid) begin
      cmd_pop = 1'b1;
      case (cmd.op)
        OP_WRITE:   wr_en     = 1'b1;
        OP_READ:    rd_en     = 1'b1;
        OP_RUN_FE:  fe_start  = 1'b1;
        OP_RUN_HDC: hdc_start = 1'b1;
        default: ;
      endcase
    end
    cfg_addr = addr[3:0];
  end

  // answer of a read, one cycle after rd_en
  always_comb begin
    case (rd_tgt)
      T_OUTBUF: answer = 64'(ob_rd_data);
      T_CLASS:  answer = 64'(cls_rd_data);
      T_DIST:   answer = 64'(dt_rd_data);
      T_CFG: begin
        case (cfg_reg_e'(ofifo_in_data[3:0]))
          CFG_CIN:       answer = 64'(fe_cfg.cin);
          CFG_WIN:       answer = 64'(fe_cfg.w_in);
          CFG_NTILES:    answer = 64'(fe_cfg.n_tiles);
          CFG_NOC:       answer = 64'(fe_cfg.noc);
          CFG_F:         answer = 64'(hdc_cfg.f);
          CFG_D:         answer = 64'(hdc_cfg.d);
          CFG_N:         answer = 64'(hdc_cfg.n);
          CFG_HVBITS:    answer = 64'(hdc_cfg.hv_bits);
          CFG_ENCSHIFT:  answer = 64'(hdc_cfg.enc_shift);
          CFG_FEATSHIFT: answer = 64'(hdc_cfg.feat_shift);
          CFG_FEATBASE:  answer = 64'(hdc_cfg.feat_base);
          default:       answer = '0;
        endcase
      end
      default:  answer = '0;
    endcase
  end

  assign ofifo_in_valid = (state == S_PUSH);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_CMD; rd_tgt <= T_ACT; ofifo_in_data <= '0; stall_cycles <= '0;
      fe_cfg  <= '{cin: 10'd1, w_in: 9'd3, n_tiles: 7'd1, noc: 4'd1};
      hdc_cfg <= '{f: 11'd16, d: 14'd1024, n: 8'd2, hv_bits: 5'd16, enc_shift: 5'd0,
                   feat_shift: 5'd0, feat_base: 8'd0};
    end else begin
      case (state)
        S_CMD: if (cmd_valid) begin
          case (cmd.op)
            OP_WRITE: if (cmd.tgt == T_CFG) begin
              case (cfg_reg_e'(cfg_addr))
                CFG_CIN:       fe_cfg.cin        <= cmd.data[9:0];
                CFG_WIN:       fe_cfg.w_in       <= cmd.data[8:0];
                CFG_NTILES:    fe_cfg.n_tiles    <= cmd.data[6:0];
                CFG_NOC:       fe_cfg.noc        <= cmd.data[3:0];
                CFG_F:         hdc_cfg.f         <= cmd.data[10:0];
                CFG_D:         hdc_cfg.d         <= cmd.data[13:0];
                CFG_N:         hdc_cfg.n         <= cmd.data[7:0];
                CFG_HVBITS:    hdc_cfg.hv_bits   <= cmd.data[4:0];
                CFG_ENCSHIFT:  hdc_cfg.enc_shift <= cmd.data[4:0];
                CFG_FEATSHIFT: hdc_cfg.feat_shift <= cmd.data[4:0];
                CFG_FEATBASE:  hdc_cfg.feat_base <= cmd.data[7:0];
                default: ;
              endcase
            end
            OP_READ: begin
              rd_tgt        <= cmd.tgt;
              ofifo_in_data <= 64'(cmd.addr);  // keeps the register number
              state         <= S_RDWAIT;
            end
            OP_RUN_FE:  state <= S_WAIT_FE;
            OP_RUN_HDC: state <= S_WAIT_HDC;
            default: ;
          endcase
        end
        S_RDWAIT: begin
          ofifo_in_data <= answer;
          state         <= S_PUSH;
        end
        S_PUSH: begin
          if (ofifo_in_ready) state <= S_CMD;
          else                stall_cycles <= stall_cycles + 32'd1;
        end
        S_WAIT_FE: begin
          if (cmd_valid) stall_cycles <= stall_cycles + 32'd1;
          if (fe_done) state <= S_CMD;
        end
        default: begin  // S_WAIT_HDC
          if (cmd_valid) stall_cycles <= stall_cycles + 32'd1;
          if (hdc_done) begin
            ofifo_in_data <= {hdc_correct, 24'd0, hdc_class, hdc_dist};
            state         <= S_PUSH;
          end
        end
      endcase
    end
  end
endmodule

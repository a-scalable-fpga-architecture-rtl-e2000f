// hps_interface -- the four 32-bit registers between the embedded processor
// (HPS) and the QSU fabric.
//
//   addr 0  HPS_control   write only  [0] run: issue gates from the buffer
//                                      [1] clear: state |0..0>, qubit order,
//                                          buffer and result reset (pulse)
//                                      [2] load: next 2*2^NQ HPS_data words
//                                          are an initial state (pulse)
//                                      [3] rewind state readback (pulse)
//                                      [5:4] Fabric_data source: 0 result,
//                                          1 state readback, 2 measurement
//                                          record, 3 qubit order
//   addr 1  Fabric_status read only   status word assembled by the top
//   addr 2  HPS_data      write only  gate word, or initial-state word
//   addr 3  Fabric_data   read only   by source: the result word; the next
//                                      state word (real, imaginary, real,
//                                      ... of amplitude 0, 1, ...;
//                                      sign-extended Q1.16, each read
//                                      advances); or one of two debug words
//
// The paper sends "simulated results and debugging data" through Fabric_data;
// the choice of debug words is this design's. The top assembles them: the
// measurement record holds the last measured value, whether the last error
// gate fired and the last probability sum; the qubit order shows where each
// qubit currently sits in the state index.
//
// Bus timing: `wr_i`/`rd_i` are one-clock strobes with `addr_i`; `rdata_o`
// is combinational from `addr_i`. The four register names and directions
// are the paper's; the bit assignments are this design's choice. Reading a
// write-only register returns 0.
module hps_interface
  import qsu_pkg::*;
#(
  parameter int unsigned NQ = 7
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           wr_i,
  input  logic           rd_i,
  input  logic [1:0]     addr_i,
  input  logic [31:0]    wdata_i,
  output logic [31:0]    rdata_o,
  // to the fabric
  output logic           run_o,
  output logic           clear_o,
  output logic           load_o,
  output logic           data_wr_o,
  output logic [31:0]    data_o,
  output logic [NQ-1:0]  rb_idx_o,
  // from the fabric
  input  logic [31:0]    status_i,
  input  logic [31:0]    result_i,
  input  cplx_t          rb_data_i,
  input  logic [31:0]    dbg_meas_i,
  input  logic [31:0]    dbg_order_i
);
  localparam logic [1:0] A_CONTROL = 2'd0;
  localparam logic [1:0] A_STATUS  = 2'd1;
  localparam logic [1:0] A_DATA    = 2'd2;
  localparam logic [1:0] A_FDATA   = 2'd3;

  logic [1:0] src;
  logic       rb_imag;
  amp_t rb_word;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run_o     <= 1'b0;
      src       <= 2'd0;
      clear_o   <= 1'b0;
      load_o    <= 1'b0;
      data_wr_o <= 1'b0;
      data_o    <= '0;
      rb_idx_o  <= '0;
      rb_imag   <= 1'b0;
    end else begin
      clear_o   <= 1'b0;
      load_o    <= 1'b0;
      data_wr_o <= 1'b0;
      if (wr_i && addr_i == A_CONTROL) begin
        run_o   <= wdata_i[0];
        clear_o <= wdata_i[1];
        load_o  <= wdata_i[2];
        src     <= wdata_i[5:4];
        if (wdata_i[3]) begin
          rb_idx_o <= '0;
          rb_imag  <= 1'b0;
        end
      end
      if (wr_i && addr_i == A_DATA) begin
        data_wr_o <= 1'b1;
        data_o    <= wdata_i;
      end
      if (rd_i && addr_i == A_FDATA && src == 2'd1) begin
        rb_imag <= !rb_imag;
        if (rb_imag) rb_idx_o <= rb_idx_o + 1'b1;
      end
    end
  end

  assign rb_word = rb_imag ? rb_data_i.im : rb_data_i.re;

  always_comb begin
    case (addr_i)
      A_STATUS: rdata_o = status_i;
      A_FDATA:
        case (src)
          2'd1:    rdata_o = 32'($signed(rb_word));
          2'd2:    rdata_o = dbg_meas_i;
          2'd3:    rdata_o = dbg_order_i;
          default: rdata_o = result_i;
        endcase
      default:  rdata_o = '0;
    endcase
  end
endmodule

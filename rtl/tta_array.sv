// tta_array: the array processor, ROWS x COLS TTA processing elements in a
// 2-D mesh with NUM_IMEM shared instruction memories.
//
// Every PE is wired to the Shared registers of its eight neighbours (N, NE,
// E, SE, S, SW, W, NW) and knows its own position: X = column, Y = row, with
// PE[0,0] in the top-left corner and row 0 at the north edge. All PEs start
// together and run the program of the instruction memory that pe_imem_sel
// picks for them, so PEs that share a memory execute one instruction stream
// in lockstep (SIMD); a program makes PEs idle or splits them into groups by
// testing their indices.
// Image input: the west-neighbour inputs of column 0 are the west_in ports,
// fed by a column of ADCs (or a column buffer) outside the array; a program
// that moves each PE's west neighbour into its own Shared register
// ("data passing") shifts a new image column in per pass. The Shared
// registers of the east column are the east_out ports towards an output
// memory. Neighbour inputs that fall outside the array on the other edges
// read as 0 (this design's own choice).
// Control: imem_we/imem_wsel/imem_waddr/imem_wdata load the instruction
// memories; start (one cycle) runs all PEs from address 0; done is high when
// every PE has halted; sleep freezes the whole array (clock enable), as
// between frames. Default size 10 x 11 is the FPGA prototype of the paper.
module tta_array
  import tta_pkg::*;
#(
  parameter int unsigned ROWS       = 10,
  parameter int unsigned COLS       = 11,
  parameter int unsigned NUM_IMEM   = 2,
  parameter int unsigned IMEM_DEPTH = 2048,
  localparam int unsigned PC_W      = $clog2(IMEM_DEPTH),
  localparam int unsigned SEL_W     = (NUM_IMEM > 1) ? $clog2(NUM_IMEM) : 1,
  localparam int unsigned WSEL_W    = SEL_W,
  localparam int unsigned IDX_W     = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic              sleep,
  input  logic              imem_we,
  input  logic [WSEL_W-1:0] imem_wsel,
  input  logic [PC_W-1:0]   imem_waddr,
  input  instr_t            imem_wdata,
  input  logic [SEL_W-1:0]  pe_imem_sel [ROWS][COLS],
  input  word_t             west_in  [ROWS],
  output word_t             east_out [ROWS],
  output logic              done
);
  localparam int unsigned NPE = ROWS * COLS;

  logic [PC_W-1:0] pe_pc   [NPE];
  instr_t          im_data [NUM_IMEM][NPE];
  word_t           shared  [ROWS][COLS];
  logic [NPE-1:0]  halted;

  for (genvar m = 0; m < NUM_IMEM; m++) begin : g_imem
    tta_imem #(.DEPTH(IMEM_DEPTH), .NPORTS(NPE)) u_imem (
      .clk,
      .we(imem_we && (imem_wsel == WSEL_W'(m))),
      .waddr(imem_waddr),
      .wdata(imem_wdata),
      .raddr(pe_pc),
      .rdata(im_data[m])
    );
  end


  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      localparam int unsigned P = r * COLS + c;
      // Direction offsets, index = nb_dir_e: N NE E SE S SW W NW.
      localparam int DR [8] = '{-1, -1, 0, 1, 1,  1,  0, -1};
      localparam int DC [8] = '{ 0,  1, 1, 1, 0, -1, -1, -1};

      word_t  nb [NUM_NB];
      instr_t ins [NUM_IMEM];

      for (genvar d = 0; d < NUM_NB; d++) begin : g_nb
        localparam int NR = r + DR[d];
        localparam int NC = c + DC[d];
        if (NR >= 0 && NR < ROWS && NC >= 0 && NC < COLS) begin : g_in
          assign nb[d] = shared[NR][NC];
        end else if (d == NB_W && NC < 0) begin : g_west
          assign nb[d] = west_in[r];
        end else begin : g_edge
          assign nb[d] = '0;
        end
      end

      for (genvar m = 0; m < NUM_IMEM; m++) begin : g_ins
        assign ins[m] = im_data[m][P];
      end

      tta_pe #(.NUM_IMEM(NUM_IMEM), .PC_W(PC_W), .IDX_W(IDX_W)) u_pe (
        .clk, .rst_n, .en(!sleep), .start,
        .instr_in(ins), .imem_sel(pe_imem_sel[r][c]),
        .pc(pe_pc[P]),
        .nb_in(nb),
        .x_idx(IDX_W'(c)), .y_idx(IDX_W'(r)),
        .shared_out(shared[r][c]),
        .halted(halted[P])
      );
    end
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_east
    assign east_out[r] = shared[r][COLS-1];
  end

  assign done = &halted;
endmodule

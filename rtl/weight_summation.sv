// weight_summation -- pre-VMM generator of the PMA contents.
//
// Before any multiplication, every PMA row must hold the sums of the weights
// its address selects: for slice s (rows BASE_s .. BASE_s+n_s-1 of the 25x6
// weight matrix), address r and column j the stored value is
//     T_s[r][j] = sum over i < n_s with r[i] = 1 of W[BASE_s + i][j].
// (Address bit 0 selects the first row of the slice: address 0001 holds w11,
// 0010 holds w21, 0011 holds w21 + w11.)
//
// This is a once-in-a-lifetime step, not time critical, so one serial MR_W-bit
// accumulator (a Ladner-Fischer adder and a register) does all the additions:
// each clock it adds weight row i of column j if bit i of the address is set,
// and adds zero otherwise. After n_s clocks the column sum is complete and is
// parked in a row register; after the NCOL-th column the whole row is written
// to the PMA with one 'wr_en' strobe. Slices are processed in order PMA-1,
// PMA-2, PMA-3, addresses in ascending order.
//
// Interface: weights are loaded one at a time (w_we, w_row 0..24, w_col 0..5,
// w_data INT8) while idle. 'start' begins the sweep, 'busy' is high while it
// runs and 'done' pulses for one clock after the last row has been written.
// wr_en/wr_pma/wr_addr/wr_data are registered outputs. The sweep takes
// sum_s 2^n_s * NCOL * n_s clocks (52,224 for slices of 8, 8 and 9 rows).
//
// The single serial 11-bit accumulator follows the original design. Note that a
// 9-weight sum can exceed the 11-bit range (-1024..1023) that the 512x66 PMA-3
// provides; such a sum wraps, as it would in the original 66-column array.
module weight_summation
  import da_pkg::*;
#(
  parameter int unsigned MR_W_P = MR_W,
  parameter int unsigned NIN_P  = NIN,
  parameter int unsigned NCOL_P = NCOL,
  parameter int unsigned N1     = A1,
  parameter int unsigned N2     = A2,
  parameter int unsigned N3     = A3
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // weight load
  input  logic                       w_we,
  input  logic [4:0]                 w_row,
  input  logic [2:0]                 w_col,
  input  logic signed [W_W-1:0]      w_data,
  // control
  input  logic                       start,
  output logic                       busy,
  output logic                       done,
  // PMA write port
  output logic                       wr_en,
  output logic [1:0]                 wr_pma,
  output logic [8:0]                 wr_addr,
  output logic [NCOL_P*MR_W_P-1:0]   wr_data
);

  localparam int unsigned NMAX = (N1 > N2) ? ((N1 > N3) ? N1 : N3) : ((N2 > N3) ? N2 : N3);

  logic signed [W_W-1:0] wmat [NIN_P][NCOL_P];

  always_ff @(posedge clk) begin
    if (w_we && !busy) wmat[w_row][w_col] <= w_data;
  end

  // sweep counters
  logic [1:0]          slice;
  logic [NMAX-1:0]     addr;
  logic [2:0]          col;
  logic [3:0]          row;
  logic [MR_W_P-1:0]   acc;
  logic [NCOL_P*MR_W_P-1:0] rowbuf;

  logic [3:0]        nrows;
  logic [4:0]        base;
  logic [MR_W_P-1:0] acc_in, addend, sum;
  logic              last_row, last_col, last_addr, last_slice;

  always_comb begin
    unique case (slice)
      2'd0:    begin nrows = 4'(N1); base = 5'd0;        end
      2'd1:    begin nrows = 4'(N2); base = 5'(N1);      end
      default: begin nrows = 4'(N3); base = 5'(N1 + N2); end
    endcase
    acc_in     = (row == 0) ? '0 : acc;
    addend     = addr[row] ? MR_W_P'(wmat[base + 5'(row)][col]) : '0;  // sign-extended weight
    last_row   = (row == nrows - 1);
    last_col   = (col == 3'(NCOL_P - 1));
    last_addr  = (addr == NMAX'((1 << nrows) - 1));
    last_slice = (slice == 2'd2);
  end

  lf_adder #(.W(MR_W_P)) u_acc (.a(acc_in), .b(addend), .cin(1'b0), .s(sum), .cout());

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      done    <= 1'b0;
      wr_en   <= 1'b0;
      wr_pma  <= '0;
      wr_addr <= '0;
      wr_data <= '0;
      slice   <= '0;
      addr    <= '0;
      col     <= '0;
      row     <= '0;
      acc     <= '0;
      rowbuf  <= '0;
    end else begin
      done  <= 1'b0;
      wr_en <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy  <= 1'b1;
          slice <= '0;
          addr  <= '0;
          col   <= '0;
          row   <= '0;
        end
      end else begin
        acc <= sum;
        if (!last_row) begin
          row <= row + 4'd1;
        end else begin
          row <= '0;
          rowbuf[col*MR_W_P +: MR_W_P] <= sum;
          if (!last_col) begin
            col <= col + 3'd1;
          end else begin
            col     <= '0;
            wr_en   <= 1'b1;
            wr_pma  <= slice;
            wr_addr <= 9'(addr);
            wr_data <= rowbuf;
            wr_data[col*MR_W_P +: MR_W_P] <= sum;
            if (!last_addr) begin
              addr <= addr + 1'b1;
            end else begin
              addr <= '0;
              if (!last_slice) begin
                slice <= slice + 2'd1;
              end else begin
                busy <= 1'b0;
                done <= 1'b1;
              end
            end
          end
        end
      end
    end
  end

endmodule

// sorting_unit -- the Gaussian Sorting Unit (GSU), an insertion sorter.
// Records (key, data) arrive one per cycle (in_valid/in_ready) and are
// inserted in one cycle into a register array kept in ascending key order
// (equal keys keep their arrival order). A list ends with in_last; the sorted
// list is then shifted out, one record per cycle (out_valid/out_ready), with
// out_last on the final record. While it drains, the unit accepts no input.
// Lists longer than N are sorted in runs of N: when the array fills, it drains
// the run (out_last low) and then continues with the rest of the list.
// Two uses share it, as in the paper: Gaussian depth order within a tile
// (key = depth) and the light-to-heavy order of the tiles of a block
// (key = tile load). The paper takes the sorter from an earlier accelerator
// and does not describe it; the insertion structure, the capacity N and the
// run-wise handling of long lists are this design's.
module sorting_unit #(
  parameter int  N     = 256,
  parameter int  KEY_W = 32,
  parameter type T     = logic [31:0]
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [KEY_W-1:0] in_key,
  input  T                 in_data,
  input  logic             in_last,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [KEY_W-1:0] out_key,
  output T                 out_data,
  output logic             out_last,
  output logic             busy
);
  localparam int CW = $clog2(N + 1);
  logic [KEY_W-1:0] key_a [N];
  T                 dat_a [N];
  logic [CW-1:0]    cnt;
  logic             draining, end_of_list;

  assign in_ready  = !draining;
  assign out_valid = draining && (cnt != '0);
  assign out_key   = key_a[0];
  assign out_data  = dat_a[0];
  assign out_last  = end_of_list && (cnt == CW'(1));
  assign busy      = draining || (cnt != '0);

  logic push, pop;
  assign push = in_valid && in_ready;
  assign pop  = out_valid && out_ready;

  logic le [N];
  always_comb
    for (int i = 0; i < N; i++) le[i] = (CW'(i) < cnt) && (key_a[i] <= in_key);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= '0; draining <= 1'b0; end_of_list <= 1'b0;
    end else begin
      if (push) begin
        cnt <= cnt + 1'b1;
        if (in_last || cnt == CW'(N-1)) begin
          draining    <= 1'b1;
          end_of_list <= in_last;
        end
      end else if (pop) begin
        cnt <= cnt - 1'b1;
        if (cnt == CW'(1)) draining <= 1'b0;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (push) begin
      for (int i = 0; i < N; i++) begin
        if (!le[i]) begin
          if (i == 0 || le[i-1]) begin
            key_a[i] <= in_key; dat_a[i] <= in_data;
          end else begin
            key_a[i] <= key_a[i-1]; dat_a[i] <= dat_a[i-1];
          end
        end
      end
    end else if (pop) begin
      for (int i = 0; i < N-1; i++) begin
        key_a[i] <= key_a[i+1]; dat_a[i] <= dat_a[i+1];
      end
    end
  end
endmodule

// DeFT VL-selection table: address = {fault_mask[3:0], router[3:0]}, data = VL index
0 0 1 1 0 0 1 1 2 2 3 3 2 2 3 3
1 1 1 1 2 2 1 3 2 2 3 3 2 2 3 3
0 0 0 0 0 2 3 3 2 2 3 3 2 2 3 3
2 2 3 3 2 2 3 3 2 2 3 3 2 2 3 3
0 0 1 1 0 0 1 1 0 1 3 3 3 3 3 3
1 1 1 1 1 1 1 1 3 3 3 3 3 3 3 3
0 0 0 0 0 0 0 0 3 3 3 3 3 3 3 3
3 3 3 3 3 3 3 3 3 3 3 3 3 3 3 3
0 0 1 1 0 0 1 1 0 2 1 2 2 2 2 2
1 1 1 1 1 1 1 1 2 2 2 2 2 2 2 2
0 0 0 0 0 0 0 0 2 2 2 2 2 2 2 2
2 2 2 2 2 2 2 2 2 2 2 2 2 2 2 2
0 0 1 1 0 0 1 1 0 0 1 1 0 0 1 1
1 1 1 1 1 1 1 1 1 1 1 1 1 1 1 1
0 0 0 0 0 0 0 0 0 0 0 0 0 0 0 0
0 0 0 0 0 0 0 0 0 0 0 0 0 0 0 0

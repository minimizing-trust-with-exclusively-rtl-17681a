13579bdf
26af37be
3a06d39d
4d5e6f7c
60b60b5b
740da73a
87654319
9abcdef8
ae147ad7
c16c16b6
d4c3b295
e81b4e74
fb72ea53
0eca8632
22222211
3579bdf0

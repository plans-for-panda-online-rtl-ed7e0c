0000
0324
0648
096c
0c90
0fb3
12d5
15f7
1918
1c38
1f56
2274
2590
28ab
2bc4
2edc
31f1
3505
3817
3b27
3e34
413f
4447
474d
4a50
4d50
504d
5348
563e
5932
5c22
5f0f
61f8
64dd
67be
6a9b
6d74
7049
731a
75e6
78ad
7b70
7e2f
80e8
839c
864c
88f6
8b9a
8e3a
90d4
9368
95f7
9880
9b03
9d80
9ff7
a268
a4d2
a736
a994
abeb
ae3c
b086
b2c9
b505
b73a
b968
bb8f
bdaf
bfc7
c1d8
c3e2
c5e4
c7de
c9d1
cbbc
cd9f
cf7a
d14d
d318
d4db
d696
d848
d9f2
db94
dd2d
debe
e046
e1c6
e33c
e4aa
e610
e76c
e8bf
ea0a
eb4b
ec83
edb3
eed9
eff5
f109
f213
f314
f40c
f4fa
f5df
f6ba
f78c
f854
f913
f9c8
fa73
fb15
fbad
fc3b
fcc0
fd3b
fdac
fe13
fe71
fec4
ff0e
ff4e
ff85
ffb1
ffd4
ffec
fffb

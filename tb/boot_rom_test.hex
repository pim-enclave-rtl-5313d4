01234567
9f5abf18
3d9238c9
dbc9b27a
7a012c2b
1838a5dc
b6701f8d
54a7993e
f2df12ef
91168ca0
2f4e0651
cd858002
6bbcf9b3
09f47364
a82bed15
466366c6
e49ae077
82d25a28
2109d3d9
bf414d8a
5d78c73b
fbb040ec
99e7ba9d
381f344e
d656adff
748e27b0
12c5a161
b0fd1b12
4f3494c3
ed6c0e74
8ba38825
29db01d6
c8127b87
6649f538
04816ee9
a2b8e89a
40f0624b
df27dbfc
7d5f55ad
1b96cf5e
b9ce490f
5805c2c0
f63d3c71
9474b622
32ac2fd3
d0e3a984
6f1b2335
0d529ce6
ab8a1697
49c19048
e7f909f9
863083aa
2467fd5b
c29f770c
60d6f0bd
ff0e6a6e
9d45e41f
3b7d5dd0
d9b4d781
77ec5132
1623cae3
b45b4494
5292be45
f0ca37f6

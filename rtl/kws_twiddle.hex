7fff0000
7fd8f9b8
7f61f374
7e9ced38
7d89e707
7c29e0e6
7a7cdad8
7884d4e1
7641cf05
73b5c946
70e2c3aa
6dc9be32
6a6db8e4
66cfb3c1
62f1aecd
5ed7aa0b
5a82a57e
55f5a129
51339d0f
4c3f9931
471c9593
41ce9237
3c568f1e
36ba8c4b
30fb89bf
2b1f877c
25288584
1f1a83d7
18f98277
12c88164
0c8c809f
06488028
00008001
f9b88028
f374809f
ed388164
e7078277
e0e683d7
dad88584
d4e1877c
cf0589bf
c9468c4b
c3aa8f1e
be329237
b8e49593
b3c19931
aecd9d0f
aa0ba129
a57ea57e
a129aa0b
9d0faecd
9931b3c1
9593b8e4
9237be32
8f1ec3aa
8c4bc946
89bfcf05
877cd4e1
8584dad8
83d7e0e6
8277e707
8164ed38
809ff374
8028f9b8
